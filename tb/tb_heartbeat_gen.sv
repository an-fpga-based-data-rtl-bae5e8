// tb_heartbeat_gen: self-checking test of the triple-redundant heartbeat.
// With CLK_HZ=1000 and HALF_MS=10 the output must toggle every 10 cycles.
// The testbench predicts every toggle with its own cycle counter, injects
// single-copy upsets at random times (which must neither move nor drop a
// toggle, and must raise tmr_err_o for exactly one cycle), and checks that
// the output keeps toggling within the 0.8 s-equivalent watchdog window.
`timescale 1ns/1ps
module tb_heartbeat_gen;
  localparam int unsigned CLK_HZ = 1000, HALF_MS = 10, HALF = 10;
  logic clk = 0, rst_n = 0;
  logic [2:0] upset = '0;
  logic wdi, err;
  int checks = 0, failures = 0;
  int upsets = 0, err_cycles = 0;

  heartbeat_gen #(.CLK_HZ(CLK_HZ), .HALF_MS(HALF_MS)) dut (
    .clk(clk), .rst_n(rst_n), .upset_i(upset), .wdi_o(wdi), .tmr_err_o(err));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  logic exp_wdi = 0;
  logic upset_prev = 0;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (cyc = 1; cyc <= 2000; cyc++) begin
      // random single-copy upset roughly every 7 cycles, never two at once
      @(negedge clk);
      upset = ($urandom % 7 == 0) ? 3'(1 << ($urandom % 3)) : 3'b000;
      @(posedge clk);
      #1;
      if (cyc % HALF == 0) exp_wdi = ~exp_wdi;
      checks++;
      if (wdi !== exp_wdi) begin
        failures++;
        $display("FAIL cycle %0d wdi=%b exp %b", cyc, wdi, exp_wdi);
      end
      // tmr_err_o is high in the cycle after an upset was written, and only then
      checks++;
      if (err !== (upset != 0)) begin
        failures++;
        $display("FAIL cycle %0d tmr_err=%b after upset=%b", cyc, err, upset);
      end
      if (upset != 0) upsets++;
      if (err) err_cycles++;
    end
    // two copies hit at once in the same way defeat the vote: the output
    // moves, which shows the voter is what protects it
    @(negedge clk); upset = 3'b011;
    @(posedge clk); #1; upset = 3'b000;
    checks++;
    if (wdi === exp_wdi) begin
      failures++;
      $display("FAIL double upset did not reach the output");
    end
    $display("single-copy upsets injected: %0d, cycles with copy disagreement: %0d", upsets, err_cycles);
    checks++;
    if (upsets == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
