// sync_2ff: two-flip-flop synchroniser for signals that arrive over the flat
// cable from the other board's clock domain.
//
// Each bit of d_i is sampled by two flip-flops in series; q_o follows d_i two
// to three clk cycles later. Reset value is RST_VAL. Only single-bit control
// lines that change slowly (the 1 kHz shift clock and the data line, which is
// stable for half a shift period around each edge) pass through it, so no
// multi-bit coherence is needed.
module sync_2ff #(
  parameter int unsigned WIDTH   = 1,
  parameter logic        RST_VAL = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);
  logic [WIDTH-1:0] meta_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta_q <= {WIDTH{RST_VAL}};
      q_o    <= {WIDTH{RST_VAL}};
    end else begin
      meta_q <= d_i;
      q_o    <= meta_q;
    end
  end
endmodule
