// tb_host_reporter: self-checking test of the host report path (message
// framing plus UART) with CLK_HZ=1000 and BAUD=100, i.e. 10 cycles per bit.
// A testbench UART receiver decodes the line. Checked: the five bytes of a
// single report, the time until the last byte is handed to the UART (exactly
// 2 + 4*(10*10+1) cycles after the report: one UART frame of 10 bits plus one
// hand-over cycle per byte), and the merge rule: of three reports
// arriving while one is being sent, only the last is sent next.
`timescale 1ns/1ps
module tb_host_reporter;
  import seu_pkg::*;
  localparam int unsigned DIV = 10;
  logic clk = 0, rst_n = 0;
  logic report = 0;
  logic [15:0] count = '0, index = '0;
  logic tx, busy, sent;
  int checks = 0, failures = 0;
  int merged = 0;

  host_reporter #(.CLK_HZ(1000), .BAUD(100)) dut (
    .clk(clk), .rst_n(rst_n), .report_i(report), .count_i(count), .index_i(index),
    .tx_o(tx), .busy_o(busy), .sent_o(sent));

  uart_rx_model #(.DIV(DIV)) rx (.clk(clk), .rx(tx));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(input logic [15:0] c, input logic [15:0] i);
    @(negedge clk);
    report = 1; count = c; index = i;
    @(negedge clk);
    report = 0;
  endtask

  task automatic expect_msg(input logic [15:0] c, input logic [15:0] i);
    logic [7:0] exp [5];
    exp = '{REPORT_SYNC, c[15:8], c[7:0], i[15:8], i[7:0]};
    for (int k = 0; k < 5; k++) begin
      check(rx.bytes.size() > 0, "byte missing");
      if (rx.bytes.size() > 0) begin
        logic [7:0] got;
        got = rx.bytes.pop_front();
        check(got == exp[k], $sformatf("byte %0d got %h exp %h", k, got, exp[k]));
      end
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(tx == 1'b1, "line idles high");
    // single report and its latency
    @(negedge clk);
    report = 1; count = 16'h1234; index = 16'h0ABC;
    t0 = 0;
    @(negedge clk);
    report = 0;
    while (!sent) begin @(negedge clk); t0++; end
    check(t0 == 2 + 4 * (10 * DIV + 1),
          $sformatf("sent_o %0d cycles after the report, expected %0d", t0, 2 + 4 * (10 * DIV + 1)));
    repeat (20 * DIV) @(posedge clk);
    expect_msg(16'h1234, 16'h0ABC);
    check(!busy, "idle after report");
    // three reports, the last two while the first is in flight
    pulse(16'h0001, 16'h0002);
    repeat (30) @(posedge clk);
    pulse(16'h0002, 16'h0007);
    repeat (30) @(posedge clk);
    pulse(16'h0003, 16'h0BB8);
    merged++;
    t1 = 0;
    while (busy) begin @(posedge clk); t1++; end
    repeat (20 * DIV) @(posedge clk);
    expect_msg(16'h0001, 16'h0002);
    expect_msg(16'h0003, 16'h0BB8);
    check(rx.bytes.size() == 0, "no extra bytes");
    check(rx.framing_errors == 0, "framing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
