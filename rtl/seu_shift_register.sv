// seu_shift_register: the upset sensor in the PP3-FPGA test firmware, a long
// serial-in serial-out shift register (3000 bits by default, as in the paper).
//
// The control board drives a slow shift clock (sck_i, 1 kHz in the test) and a
// data line (sdi_i) over the flat cable and reads the register's last bit back
// on sdo_o. Both inputs cross from the control board's clock domain through a
// two-flip-flop synchroniser; each rising edge of the synchronised sck moves
// the register by one place, shifting the synchronised sdi in at bit 0. sdo_o
// is bit LEN-1, so the first bit written is the first bit read back, after
// LEN-1 further edges the LEN-th, and a bit that flips while the register holds
// still appears at the output in its place.
//
// The register has no error protection on purpose: its job is to collect
// upsets. upset_i flips bit upset_idx_i on the next clk edge; it emulates a
// particle hit in simulation and is tied low in hardware.
//
// Timing: a shift occurs 3 clk cycles after the sck edge arrives; sdo_o then
// changes on that same edge. sck_i must stay high and low for at least 4 clk
// cycles each, and sdi_i must be stable from 3 cycles before to 3 cycles after
// each rising sck edge. Reset clears the register.
//
// From the paper: the register length and its use (written, held, read back
// and compared by the control board). The synchroniser, edge detection, reset
// and injection port are this design's choices.
module seu_shift_register
  import seu_pkg::*;
#(
  parameter int unsigned LEN = SR_LEN_DEFAULT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   sck_i,
  input  logic                   sdi_i,
  output logic                   sdo_o,
  output logic                   shift_o,
  input  logic                   upset_i,
  input  logic [$clog2(LEN)-1:0] upset_idx_i
);
  logic [LEN-1:0] sr_q;
  logic [1:0]     sync_q;
  logic           sck_s, sdi_s, sck_prev_q;

  sync_2ff #(.WIDTH(2)) u_sync (
    .clk  (clk),
    .rst_n(rst_n),
    .d_i  ({sck_i, sdi_i}),
    .q_o  (sync_q)
  );
  assign {sck_s, sdi_s} = sync_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sck_prev_q <= 1'b0;
    else        sck_prev_q <= sck_s;
  end

  assign shift_o = sck_s & ~sck_prev_q;

  logic [LEN-1:0] sr_d;

  always_comb begin
    sr_d = shift_o ? {sr_q[LEN-2:0], sdi_s} : sr_q;
    if (upset_i && (int'(upset_idx_i) < LEN)) sr_d[upset_idx_i] = ~sr_d[upset_idx_i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr_q <= '0;
    else        sr_q <= sr_d;
  end

  assign sdo_o = sr_q[LEN-1];
endmodule
