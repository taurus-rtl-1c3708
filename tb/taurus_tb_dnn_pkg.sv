// taurus_tb_dnn_pkg -- testbench-side "compiler" and reference model for
// dense neural networks on the Taurus MapReduce block.
//
// dnn_map places a fully connected network (ReLU hidden layers, a linear
// output neuron followed by a sigmoid lookup table) on a ROWS x COLS grid:
//  * one CU per neuron: MUL(A,B)>>>FRAC | REDUCE ADD | ADD bias | RELU/PASS;
//    port A gathers the previous layer's scalars (lane 0 of each neuron CU)
//    or the PHV feature lanes; port B takes the neuron's weights from an MU;
//  * weight vectors are packed into MUs: a 16-bank MU read at one address
//    holds floor(16 / fan_in) neurons' weights side by side, and each CU's
//    port B picks its slice of lanes;
//  * one MU in lookup-table mode applies the sigmoid to the output neuron;
//  * the block's output port carries the sigmoid in lane 0.
// Weights, biases and the table are generated here; ref_run() evaluates the
// same network with plain integer arithmetic (the same saturation points and
// reduction-tree order as the hardware's fixed-point definition).
package taurus_tb_dnn_pkg;
  import taurus_pkg::*;

  localparam int FRAC = 4;   // fractional bits of the fixed-point format

  typedef struct {
    int tile, bank, addr, data;
  } wt_write_t;

  function automatic int clamp(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  class dnn_map;
    int rows, cols, nt;
    int sizes[$];                 // layer sizes, sizes[0] = number of features
    int w[$][$][$];               // w[layer][neuron][input], layer >= 1
    int bias[$][$];
    int cu_of[$][$];              // tile of neuron n in layer k
    int lut[256];
    tile_cfg_t cfg[int];          // configured tiles
    port_cfg_t ocfg;
    wt_write_t writes[$];
    int latency;
    int n_cu, n_mu;
    int mu_tiles[$], cu_tiles[$];

    function new(int rows_, int cols_, int sz[$]);
      rows = rows_; cols = cols_; nt = rows * cols;
      sizes = sz;
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < cols; c++)
          if (r % 2 == 0 && c % 2 == 0) mu_tiles.push_back(r * cols + c);
          else                           cu_tiles.push_back(r * cols + c);
    endfunction

    static function port_cfg_t port_off();
      port_cfg_t p;
      for (int l = 0; l < LANES; l++) begin p.src[l] = SRC_ZERO; p.lane[l] = '0; end
      p.vsrc = SRC_ZERO; p.delay = '0;
      return p;
    endfunction

    static function tile_cfg_t tile_off();
      tile_cfg_t t;
      t.port_a = port_off();
      t.port_b = port_off();
      for (int s = 0; s < STAGES; s++)
        t.stage[s] = '{mode: ST_BYPASS, op: OP_PASS, bsel: B_PORT, shift: '0, imm: '0};
      t.mu = '{mode: MU_OFF, base: '0};
      return t;
    endfunction

    // Random weights in [-wmax, wmax] and biases in [-bmax, bmax] (units of 2^-FRAC).
    function void randomize_model(int wmax, int bmax);
      w.delete(); bias.delete();
      w.push_back('{}); bias.push_back('{});
      for (int k = 1; k < sizes.size(); k++) begin
        int wl[$][$]; int bl[$];
        for (int n = 0; n < sizes[k]; n++) begin
          int row[$];
          for (int i = 0; i < sizes[k-1]; i++) row.push_back($urandom_range(0, 2*wmax) - wmax);
          wl.push_back(row);
          bl.push_back($urandom_range(0, 2*bmax) - bmax);
        end
        w.push_back(wl); bias.push_back(bl);
      end
      // sigmoid table: entry for signed input x (Q.FRAC) = round(127 * sigmoid(x / 2^FRAC))
      for (int i = 0; i < 256; i++) begin
        int x; real s;
        x = (i < 128) ? i : i - 256;
        s = 1.0 / (1.0 + $exp(-real'(x) / real'(1 << FRAC)));
        lut[i] = int'(127.0 * s + 0.5);
      end
    endfunction

    // Place and configure; returns 0 when the grid is too small.
    function int place();
      int ci = 0, mi = 0, lut_mu;
      cfg.delete(); writes.delete(); cu_of.delete();
      cu_of.push_back('{});
      for (int k = 1; k < sizes.size(); k++) begin
        int fan, per_mu, last;
        int row[$];
        fan    = sizes[k-1];
        per_mu = LANES / fan;
        last   = (k == sizes.size() - 1);
        for (int n = 0; n < sizes[k]; n++) begin
          tile_cfg_t t;
          int tile, mu, off;
          if (ci >= cu_tiles.size()) return 0;
          if (n % per_mu == 0) begin
            if (mi >= mu_tiles.size()) return 0;
            mu = mu_tiles[mi++];
            t = tile_off();
            t.mu = '{mode: MU_VEC, base: '0};
            cfg[mu] = t;
          end else mu = mu_tiles[mi-1];
          off  = (n % per_mu) * fan;
          tile = cu_tiles[ci++];
          row.push_back(tile);
          t = tile_off();
          for (int i = 0; i < fan; i++) begin
            if (k == 1) begin
              t.port_a.src[i]  = SRC_FEAT;
              t.port_a.lane[i] = LANE_W'(i);
            end else begin
              t.port_a.src[i]  = SRC_W'(cu_of[k-1][i]);
              t.port_a.lane[i] = '0;
            end
            t.port_b.src[i]  = SRC_W'(mu);
            t.port_b.lane[i] = LANE_W'(off + i);
            writes.push_back('{tile: mu, bank: off + i, addr: 0, data: w[k][n][i]});
          end
          t.port_a.vsrc = (k == 1) ? SRC_FEAT : SRC_W'(cu_of[k-1][0]);
          t.stage[0] = '{mode: ST_MAP,    op: OP_MUL, bsel: B_PORT, shift: SH_W'(FRAC), imm: '0};
          t.stage[1] = '{mode: ST_REDUCE, op: OP_ADD, bsel: B_PORT, shift: '0, imm: '0};
          t.stage[2] = '{mode: ST_MAP,    op: OP_ADD, bsel: B_IMM,  shift: '0, imm: data_t'(bias[k][n])};
          t.stage[3] = '{mode: ST_MAP,    op: last ? OP_PASS : OP_RELU, bsel: B_PORT, shift: '0, imm: '0};
          cfg[tile] = t;
        end
        cu_of.push_back(row);
      end
      // sigmoid lookup MU
      if (mi >= mu_tiles.size()) return 0;
      lut_mu = mu_tiles[mi++];
      begin
        tile_cfg_t t;
        t = tile_off();
        t.port_a.src[0]  = SRC_W'(cu_of[sizes.size()-1][0]);
        t.port_a.vsrc    = SRC_W'(cu_of[sizes.size()-1][0]);
        t.mu = '{mode: MU_LUT, base: '0};
        cfg[lut_mu] = t;
      end
      for (int i = 0; i < 256; i++) writes.push_back('{tile: lut_mu, bank: 0, addr: i, data: lut[i]});
      ocfg = port_off();
      ocfg.src[0] = SRC_W'(lut_mu);
      ocfg.vsrc   = SRC_W'(lut_mu);
      n_cu = ci; n_mu = mi;
      // per layer: 1 interconnect + 7 CU cycles; then port, MU read, output port
      latency = (sizes.size() - 1) * (1 + 1 + RED_LVLS + 1 + 1) + 3;
      return 1;
    endfunction

    // Hardware-exact integer evaluation. Returns the sigmoid output.
    function int ref_run(int feat[$]);
      int x[$];
      x = feat;
      for (int k = 1; k < sizes.size(); k++) begin
        int y[$];
        for (int n = 0; n < sizes[k]; n++) begin
          int v[LANES];
          int acc;
          for (int l = 0; l < LANES; l++)
            v[l] = (l < sizes[k-1]) ? clamp((x[l] * w[k][n][l]) >>> FRAC) : 0;
          for (int width = LANES / 2; width >= 1; width /= 2)
            for (int i = 0; i < width; i++) v[i] = clamp(v[2*i] + v[2*i+1]);
          acc = clamp(v[0] + bias[k][n]);
          if (k != sizes.size() - 1 && acc < 0) acc = 0;
          y.push_back(acc);
        end
        x = y;
      end
      return lut[x[0] & 255];
    endfunction
  endclass

endpackage
