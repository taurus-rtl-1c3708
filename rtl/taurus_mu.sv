// taurus_mu -- Taurus memory unit (MU): banked on-chip SRAM for weights and
// activation lookup tables.
//
// MU_BANKS banks of MU_DEPTH 8-bit entries. Bank l feeds output lane l, so one
// read returns a whole vector in a single cycle. Two static read modes:
//   MU_VEC  every bank reads address cfg.base: a stored weight vector. The
//           output is valid every cycle (weights do not depend on the packet).
//   MU_LUT  bank l reads cfg.base + unsigned(a[l]): each lane looks up its own
//           input in a 256-entry window, e.g. a sigmoid or tanh table (ActLUT).
//           out_valid follows in_valid one cycle later.
// Weights are written out of band (control-plane updates) through the write
// port: one 8-bit entry per cycle, addressed by bank and entry.
//
// Timing: one-cycle read latency (registered output), as single-cycle SRAM.
//
// Follows the published design: banked SRAM, 16 banks x 1024 entries,
// single-cycle access, weights and 1024 x 8-bit activation tables kept on chip.
// This design's own choices: the two read modes, the 8-bit LUT index window
// (inputs are 8-bit, so one lookup spans 256 of the 1024 entries), the write
// port format, and that the memories are not reset.
module taurus_mu
  import taurus_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  mu_cfg_t           cfg,
  input  logic              in_valid,
  input  vec_t              a,
  // out-of-band weight write
  input  logic              wr_en,
  input  logic [BANK_W-1:0] wr_bank,
  input  logic [MU_AW-1:0]  wr_addr,
  input  data_t             wr_data,
  output logic              out_valid,
  output vec_t              y
);

  for (genvar l = 0; l < MU_BANKS; l++) begin : g_bank
    data_t            mem [MU_DEPTH];
    logic [MU_AW-1:0] raddr;

    always_comb begin
      if (cfg.mode == MU_LUT) raddr = cfg.base + MU_AW'(unsigned'(a[l]));
      else                    raddr = cfg.base;
    end

    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BANK_W'(l)) mem[wr_addr] <= wr_data;
      y[l] <= mem[raddr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else unique case (cfg.mode)
      MU_VEC:  out_valid <= 1'b1;
      MU_LUT:  out_valid <= in_valid;
      default: out_valid <= 1'b0;
    endcase
  end

endmodule
