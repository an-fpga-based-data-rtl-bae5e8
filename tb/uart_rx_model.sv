// uart_rx_model: testbench receiver for the 8N1 host link. It waits for a
// start bit, samples each bit in its middle (DIV clock cycles per bit) and
// pushes every byte whose stop bit is high into the queue `bytes`; a byte
// with a bad start or stop bit increments `framing_errors`.
module uart_rx_model #(
  parameter int unsigned DIV = 10
) (
  input logic clk,
  input logic rx
);
  logic [7:0] bytes[$];
  int framing_errors = 0;

  initial begin
    logic [7:0] b;
    forever begin
      @(negedge rx);
      repeat (DIV / 2) @(posedge clk);
      if (rx !== 1'b0) begin
        framing_errors++;
      end else begin
        for (int i = 0; i < 8; i++) begin
          repeat (DIV) @(posedge clk);
          b[i] = rx;
        end
        repeat (DIV) @(posedge clk);
        if (rx !== 1'b1) framing_errors++;
        else bytes.push_back(b);
      end
    end
  end
endmodule
