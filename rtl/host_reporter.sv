// host_reporter: tells the host computer about every SEU the control board
// detects.
//
// Each report_i pulse latches the failure count and the bit position of the
// mismatch and marks a report pending. When the UART is free, the pending
// report is sent as five bytes, big-endian: REPORT_SYNC (0xA5), count[15:8],
// count[7:0], index[15:8], index[7:0]. Reports that arrive while one is being
// sent are merged: only the latest count and position are kept, and since the
// count is cumulative the host still learns the total. At the paper's 1 kHz
// shift rate a mismatch can come at most once per millisecond, and a report
// takes 0.43 ms at 115200 Bd, so in the real test nothing is merged.
// sent_o pulses when the last byte of a report has been handed to the UART.
//
// From the paper: the board sends the failure information to the host for
// diagnosis. The message format, the merging rule and the UART are this
// design's choices.
module host_reporter
  import seu_pkg::*;
#(
  parameter int unsigned CLK_HZ = CLK_HZ_DEFAULT,
  parameter int unsigned BAUD   = BAUD_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        report_i,
  input  logic [15:0] count_i,
  input  logic [15:0] index_i,
  output logic        tx_o,
  output logic        busy_o,
  output logic        sent_o
);
  logic        pending_q;
  logic [15:0] count_q, index_q;
  logic [7:0]  msg_q [REPORT_BYTES];
  logic [2:0]  byte_q;      // bytes of msg_q still to send
  logic        sending_q;
  logic        ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending_q <= 1'b0;
      count_q   <= '0;
      index_q   <= '0;
      sending_q <= 1'b0;
      byte_q    <= '0;
      sent_o    <= 1'b0;
      for (int i = 0; i < REPORT_BYTES; i++) msg_q[i] <= '0;
    end else begin
      sent_o <= 1'b0;
      if (!sending_q && pending_q) begin
        msg_q[0]  <= REPORT_SYNC;
        msg_q[1]  <= count_q[15:8];
        msg_q[2]  <= count_q[7:0];
        msg_q[3]  <= index_q[15:8];
        msg_q[4]  <= index_q[7:0];
        byte_q    <= 3'(REPORT_BYTES);
        sending_q <= 1'b1;
        pending_q <= 1'b0;
      end else if (sending_q && ready) begin
        for (int i = 0; i < REPORT_BYTES - 1; i++) msg_q[i] <= msg_q[i+1];
        byte_q <= byte_q - 1'b1;
        if (byte_q == 3'd1) begin
          sending_q <= 1'b0;
          sent_o    <= 1'b1;
        end
      end
      // A new report overrides whatever was pending (set wins over the clear above).
      if (report_i) begin
        pending_q <= 1'b1;
        count_q   <= count_i;
        index_q   <= index_i;
      end
    end
  end

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_tx (
    .clk    (clk),
    .rst_n  (rst_n),
    .valid_i(sending_q),
    .data_i (msg_q[0]),
    .ready_o(ready),
    .tx_o   (tx_o)
  );

  assign busy_o = sending_q | pending_q;
endmodule
