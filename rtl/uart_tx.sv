// uart_tx: 8N1 serial transmitter for the control board's link to the host
// computer (the board's USB-UART bridge).
//
// A byte offered with valid_i while ready_o is high is accepted on that clock
// edge and sent LSB first: one start bit (0), eight data bits, one stop bit
// (1), each CLK_HZ/BAUD clock cycles long. ready_o returns high after the stop
// bit, so a new byte can be accepted on the next edge: back-to-back bytes
// start every 10*DIV+1 cycles (DIV = CLK_HZ/BAUD), the stop bit being one cycle
// longer than the others. tx_o idles high.
// The protocol and rate are this design's choices; the paper only says that
// the board passes failure information to the host over its USB cable.
module uart_tx
  import seu_pkg::*;
#(
  parameter int unsigned CLK_HZ = CLK_HZ_DEFAULT,
  parameter int unsigned BAUD   = BAUD_DEFAULT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid_i,
  input  logic [7:0] data_i,
  output logic       ready_o,
  output logic       tx_o
);
  localparam int unsigned DIV = (CLK_HZ / BAUD < 1) ? 1 : CLK_HZ / BAUD;
  localparam int unsigned DW  = (DIV < 2) ? 1 : $clog2(DIV);

  logic [8:0]    frame_q;   // {stop, data}, shifted out LSB first after the start bit
  logic [3:0]    bits_q;    // bits still to send
  logic [DW-1:0] div_q;

  assign ready_o = (bits_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_q <= '1;
      bits_q  <= '0;
      div_q   <= '0;
      tx_o    <= 1'b1;
    end else if (bits_q == '0) begin
      if (valid_i) begin
        frame_q <= {1'b1, data_i};
        bits_q  <= 4'd10;
        div_q   <= '0;
        tx_o    <= 1'b0;            // start bit goes out at once
      end
    end else if (div_q == DW'(DIV - 1)) begin
      div_q   <= '0;
      frame_q <= {1'b1, frame_q[8:1]};
      bits_q  <= bits_q - 1'b1;
      tx_o    <= (bits_q == 4'd1) ? 1'b1 : frame_q[0];
    end else begin
      div_q <= div_q + 1'b1;
    end
  end

  // A byte must be held while it waits to be accepted.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           valid_i && !ready_o |=> valid_i && $stable(data_i));
endmodule
