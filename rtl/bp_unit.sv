// bp_unit: double-column bidirectional-propagation BP unit (BPU).
//
// Decodes on the original factor graph of a length-N polar code with one row
// of N/2 pe_r elements and one row of N/2 pe_l elements working in the same
// clock cycle. In cycle c = 0..n-2 of an iteration the R row processes stage
// c (R_c and L_{c+1} -> R_{c+1}) and the L row processes stage n-1-c
// (L_{n-c} and R_{n-1-c} -> L_{n-1-c}). R_n and L_0 are never computed, so an
// iteration takes n-1 cycles, as in the paper. The outputs of both rows are
// registered in Reg R and Reg L and written into the R and L memory banks one
// cycle later; each row's "own" input comes straight from its register (or
// from R'_0 / L'_n in cycle 0), the other input from the memory bank or, when
// the register holds the wanted column, from the register (bypass). The
// per-stage "Routing R/L" networks are the MUXes that pick the butterfly
// pairs (i, i+2^j) of the active stage.
//
// Interface: `start` clears all R/L messages to 0 and starts iteration 0;
// while `run` is high one cycle of the schedule is executed per clock.
// `iter_end` is high in the first cycle of each following iteration, when Reg
// L holds the L_1 column (`l1`) of the iteration just finished; `iters` counts
// finished iterations. The two-row structure, the stage pairing and the n-1
// cycle iteration follow the paper; the exact read/bypass timing inside an
// iteration is not given there and is this design's.
module bp_unit
  import bpl_pkg::*;
#(
  parameter int N  = 1024,
  parameter int NS = 10,
  parameter int IW = 8        // iteration counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          run,
  input  llr_t          r0 [N],     // R'_0 from Mem.R_0
  input  llr_t          ln [N],     // L'_n from Mem.L_n
  output logic          iter_end,
  output logic [IW-1:0] iters,
  output llr_t          l1 [N]
);
  localparam int H   = N/2;
  localparam int CIW = $clog2(NS);   // column index width

  llr_t  rmem [NS][N];     // R columns 1..n-1 used
  llr_t  lmem [NS][N];     // L columns 1..n-1 used
  llr_t  reg_r [N];
  llr_t  reg_l [N];
  logic [SW-1:0] c;

  stage_t st_r, st_l;        // stages of the R and L rows
  stage_t rreg_col, lreg_col; // columns held by Reg R / Reg L
  llr_t  r_in [N], lr_in [N];   // R row inputs: R_c, L_{c+1}
  llr_t  l_in [N], rl_in [N];   // L row inputs: L_{n-c}, R_{n-1-c}
  llr_t  ra_up [H], ra_dn [H], la_up [H], la_dn [H];
  llr_t  lb_up [H], lb_dn [H], rb_up [H], rb_dn [H];
  llr_t  ro_up [H], ro_dn [H], lo_up [H], lo_dn [H];
  llr_t  r_out [N], l_out [N];

  always_comb begin
    st_r     = stage_t'(c);
    st_l     = stage_t'(NS - 1 - int'(c));
    rreg_col = (c == '0) ? stage_t'(NS-1) : stage_t'(c);
    lreg_col = (c == '0) ? stage_t'(1)    : stage_t'(NS - int'(c));
    r_in  = (c == '0) ? r0 : reg_r;
    l_in  = (c == '0) ? ln : reg_l;
    lr_in = (lreg_col == stage_t'(int'(c) + 1)) ? reg_l : lmem[int'(c) + 1];
    rl_in = (rreg_col == st_l) ? reg_r : rmem[st_l[CIW-1:0]];
  end

  // Routing R / Routing L: gather the butterfly pairs of the active stages.
  always_comb begin
    for (int p = 0; p < H; p++) begin
      ra_up[p] = '0; ra_dn[p] = '0; la_up[p] = '0; la_dn[p] = '0;
      lb_up[p] = '0; lb_dn[p] = '0; rb_up[p] = '0; rb_dn[p] = '0;
    end
    for (int j = 0; j < NS; j++) begin
      if (st_r == stage_t'(j)) begin
        for (int p = 0; p < H; p++) begin
          ra_up[p] = r_in [((p >> j) << (j+1)) | (p & ((1 << j) - 1))];
          ra_dn[p] = r_in [((p >> j) << (j+1)) | (p & ((1 << j) - 1)) | (1 << j)];
          la_up[p] = lr_in[((p >> j) << (j+1)) | (p & ((1 << j) - 1))];
          la_dn[p] = lr_in[((p >> j) << (j+1)) | (p & ((1 << j) - 1)) | (1 << j)];
        end
      end
      if (st_l == stage_t'(j)) begin
        for (int p = 0; p < H; p++) begin
          lb_up[p] = l_in [((p >> j) << (j+1)) | (p & ((1 << j) - 1))];
          lb_dn[p] = l_in [((p >> j) << (j+1)) | (p & ((1 << j) - 1)) | (1 << j)];
          rb_up[p] = rl_in[((p >> j) << (j+1)) | (p & ((1 << j) - 1))];
          rb_dn[p] = rl_in[((p >> j) << (j+1)) | (p & ((1 << j) - 1)) | (1 << j)];
        end
      end
    end
  end

  for (genvar p = 0; p < H; p++) begin : g_pe
    pe_r u_per (.r_up(ra_up[p]), .r_dn(ra_dn[p]), .l_up(la_up[p]), .l_dn(la_dn[p]),
                .o_up(ro_up[p]), .o_dn(ro_dn[p]));
    pe_l u_pel (.l_up(lb_up[p]), .l_dn(lb_dn[p]), .r_up(rb_up[p]), .r_dn(rb_dn[p]),
                .o_up(lo_up[p]), .o_dn(lo_dn[p]));
  end

  // Scatter the PE outputs back into bit-row order.
  always_comb begin
    for (int i = 0; i < N; i++) begin r_out[i] = '0; l_out[i] = '0; end
    for (int j = 0; j < NS; j++) begin
      if (st_r == stage_t'(j))
        for (int p = 0; p < H; p++) begin
          r_out[((p >> j) << (j+1)) | (p & ((1 << j) - 1))]            = ro_up[p];
          r_out[((p >> j) << (j+1)) | (p & ((1 << j) - 1)) | (1 << j)] = ro_dn[p];
        end
      if (st_l == stage_t'(j))
        for (int p = 0; p < H; p++) begin
          l_out[((p >> j) << (j+1)) | (p & ((1 << j) - 1))]            = lo_up[p];
          l_out[((p >> j) << (j+1)) | (p & ((1 << j) - 1)) | (1 << j)] = lo_dn[p];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c     <= '0;
      iters <= '0;
      for (int i = 0; i < N; i++) begin reg_r[i] <= '0; reg_l[i] <= '0; end
      for (int s = 0; s < NS; s++)
        for (int i = 0; i < N; i++) begin rmem[s][i] <= '0; lmem[s][i] <= '0; end
    end else if (start) begin
      c     <= '0;
      iters <= '0;
      for (int i = 0; i < N; i++) begin reg_r[i] <= '0; reg_l[i] <= '0; end
      for (int s = 0; s < NS; s++)
        for (int i = 0; i < N; i++) begin rmem[s][i] <= '0; lmem[s][i] <= '0; end
    end else if (run) begin
      reg_r <= r_out;
      reg_l <= l_out;
      for (int i = 0; i < N; i++) begin
        rmem[rreg_col[CIW-1:0]][i] <= reg_r[i];
        lmem[lreg_col[CIW-1:0]][i] <= reg_l[i];
      end
      if (int'(c) == NS-2) begin
        c     <= '0;
        iters <= iters + 1'b1;
      end else begin
        c <= c + 1'b1;
      end
    end
  end

  assign iter_end = run && (c == '0) && (iters != '0);
  assign l1       = reg_l;
endmodule
