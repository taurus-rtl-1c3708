// tb_taurus_mu -- self-checking test of a Taurus memory unit.
// Fills all banks through the weight-write port with a pattern computed here,
// then checks vector mode (every bank at one address, valid every cycle, one
// cycle read latency) and lookup-table mode (each lane indexes its own bank
// with its input value plus a base, valid one cycle after the input).
module tb_taurus_mu;
  import taurus_pkg::*;

  logic clk = 0, rst_n = 0;
  mu_cfg_t cfg;
  logic in_valid, out_valid;
  vec_t a, y;
  logic wr_en;
  logic [BANK_W-1:0] wr_bank;
  logic [MU_AW-1:0] wr_addr;
  data_t wr_data;
  int checks = 0, failures = 0;

  taurus_mu dut (.clk, .rst_n, .cfg, .in_valid, .a, .wr_en, .wr_bank, .wr_addr, .wr_data,
                 .out_valid, .y);

  always #5 clk = ~clk;

  function automatic data_t pat(input int bank, input int addr);
    return data_t'((bank * 37 + addr * 11 + (addr >> 3)) & 8'hFF);
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '{mode: MU_OFF, base: '0};
    in_valid = 0; a = '0; wr_en = 0; wr_bank = '0; wr_addr = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill memory
    for (int bk = 0; bk < MU_BANKS; bk++)
      for (int ad = 0; ad < MU_DEPTH; ad++) begin
        wr_en = 1; wr_bank = BANK_W'(bk); wr_addr = MU_AW'(ad); wr_data = pat(bk, ad);
        @(negedge clk);
      end
    wr_en = 0;
    // off: never valid
    @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL valid while off"); end
    // vector mode
    for (int n = 0; n < 200; n++) begin
      int base;
      base = $urandom_range(0, MU_DEPTH - 1);
      cfg = '{mode: MU_VEC, base: MU_AW'(base)};
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL vec not valid"); end
      for (int l = 0; l < LANES; l++)
        if (y[l] != pat(l, base)) begin
          failures++; $display("FAIL vec base=%0d lane %0d y=%0d exp=%0d", base, l, y[l], pat(l, base));
          break;
        end
    end
    // LUT mode: one-cycle latency, valid follows input valid
    for (int n = 0; n < 400; n++) begin
      int base, idx[LANES];
      logic v;
      base = $urandom_range(0, MU_DEPTH - 256);
      cfg = '{mode: MU_LUT, base: MU_AW'(base)};
      v = $urandom_range(0, 1);
      in_valid = v;
      for (int l = 0; l < LANES; l++) begin
        idx[l] = $urandom_range(0, 255);
        a[l] = data_t'(idx[l]);
      end
      @(negedge clk);
      in_valid = 0; a = '0;   // output must reflect the previous edge only
      checks++;
      if (out_valid != v) begin failures++; $display("FAIL lut valid"); end
      for (int l = 0; l < LANES; l++)
        if (y[l] != pat(l, base + idx[l])) begin
          failures++; $display("FAIL lut lane %0d y=%0d exp=%0d", l, y[l], pat(l, base + idx[l]));
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
