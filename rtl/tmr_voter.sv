// tmr_voter: bitwise 2-of-3 majority voter with a discrepancy output.
//
// y is the majority of a, b and c in every bit position. err is high whenever the three
// inputs are not all equal, i.e. a single copy has been upset; it feeds the per-domain SEU
// counters through OR gates. The voter and its extra discrepancy output follow the paper
// (Sec. 3.1); the width is a parameter (32 for the SRAM read data voters). Purely
// combinational, no timing.
module tmr_voter #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         err
);
  always_comb begin
    y   = (a & b) | (a & c) | (b & c);
    err = |((a ^ b) | (a ^ c));
  end
endmodule
