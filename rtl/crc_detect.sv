// crc_detect: CRC-11 detection on the information bits of a decoded u.
//
// The information bits are the non-frozen positions of u in natural order,
// the last 11 of them being the CRC of the others; a frame passes when the
// remainder of the whole information sequence divided by
// g(x) = x^11+x^10+x^9+x^5+1 is zero. Because the remainder is linear in the
// bits, each non-frozen position i gets a fixed 11-bit signature
// x^(number of information bits after i) mod g(x); the remainder is then the
// XOR of the signatures of all positions holding a 1, formed in a single
// combinational step (`pass`). The signature table is rebuilt, one position
// per cycle from i = N-1 down to 0, after `build` (N cycles, `busy` high),
// whenever the frozen set changes. The paper specifies the polynomial and
// that CRC detection decides between outputting u and trying the next PFG; the
// signature-table realisation and its build sequence are this design's.
module crc_detect
  import bpl_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] frozen,   // 1 = frozen bit position
  input  logic         build,
  output logic         busy,
  input  logic [N-1:0] u,
  output logic         pass
);
  localparam int IW = $clog2(N) + 1;
  logic [CRC_W-1:0] sig [N];
  logic [CRC_W-1:0] p;
  logic [IW-1:0]    idx;     // position being filled + 1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
      p    <= '0;
      for (int i = 0; i < N; i++) sig[i] <= '0;
    end else if (build) begin
      busy <= 1'b1;
      idx  <= IW'(N);
      p    <= CRC_W'(1);
    end else if (busy) begin
      if (frozen[idx-1]) sig[idx-1] <= '0;
      else begin
        sig[idx-1] <= p;
        p <= {p[CRC_W-2:0], 1'b0} ^ (p[CRC_W-1] ? CRC_POLY : '0);
      end
      idx <= idx - 1'b1;
      if (idx == IW'(1)) busy <= 1'b0;
    end
  end

  always_comb begin
    logic [CRC_W-1:0] syn;
    syn = '0;
    for (int i = 0; i < N; i++) if (u[i]) syn ^= sig[i];
    pass = (syn == '0);
  end
endmodule
