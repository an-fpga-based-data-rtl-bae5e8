// tmr_voter: bitwise two-out-of-three majority voter for triple modular
// redundancy (TMR).
//
// Three copies of a value come in; y_o carries, bit by bit, the value at least
// two of them agree on, so an upset in any one copy is masked. mismatch_o is
// high whenever the copies disagree in any bit, which tells the owner that one
// copy has been hit and will be rewritten from y_o on the next clock edge.
// Purely combinational, no latency.
//
// The paper states that the PP3-FPGA firmware uses TMR to harden its logic; the
// voter itself is the textbook majority function, and the disagreement flag is
// this design's addition for observability.
module tmr_voter #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  input  logic [WIDTH-1:0] c_i,
  output logic [WIDTH-1:0] y_o,
  output logic             mismatch_o
);
  always_comb begin
    y_o        = (a_i & b_i) | (a_i & c_i) | (b_i & c_i);
    mismatch_o = (a_i != b_i) || (a_i != c_i);
  end
endmodule
