// tb_seu_tester: self-checking test of the control-board sequencer.
// Reduced timing: LEN=50, CLK_HZ=20000, SCK_HZ=1000 (10 cycles per half
// shift-clock period), HOLD_MS=2 (40 cycles), BAUD=10000 (2 cycles per bit).
// The DUT register is modelled here behaviourally (3 cycles of synchroniser
// latency, as in the real one). Each test cycle the testbench flips chosen
// bits of the model during HOLD and then checks: the mismatch pulses and their
// bit positions, the failure counter and the per-cycle count, the reports
// decoded from the UART line, the shift-clock period (20 cycles), the cycle
// period 4*LEN*HALF + HOLD_CYC = 2040 cycles, and that the sequencer stops
// after the cycle in which run_i drops.
`timescale 1ns/1ps
module tb_seu_tester;
  import seu_pkg::*;
  localparam int unsigned LEN = 50, HALF = 10, HOLD_CYC = 40, DIV = 2;
  localparam int unsigned PERIOD = 4 * LEN * HALF + HOLD_CYC;

  logic clk = 0, rst_n = 0, run = 0;
  logic sck, to_dut, from_dut, tx;
  phase_e phase;
  logic [31:0] fails, cycles, last_fails;
  logic mismatch, done, sent;
  int checks = 0, failures = 0;

  seu_tester #(.LEN(LEN), .CLK_HZ(20000), .SCK_HZ(1000), .HOLD_MS(2), .BAUD(10000)) dut (
    .clk(clk), .rst_n(rst_n), .run_i(run), .sck_o(sck), .sdo_o(to_dut), .sdi_i(from_dut),
    .tx_o(tx), .phase_o(phase), .fail_count_o(fails), .cycle_count_o(cycles),
    .last_cycle_fail_o(last_fails), .mismatch_o(mismatch), .cycle_done_o(done),
    .report_sent_o(sent));

  uart_rx_model #(.DIV(DIV)) rx (.clk(clk), .rx(tx));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Behavioural DUT register with synchroniser delay.
  logic [LEN-1:0] reg_m = '0;
  logic [2:0] sck_d = '0, sdi_d = '0;
  always @(posedge clk) begin
    sck_d <= {sck_d[1:0], sck};
    sdi_d <= {sdi_d[1:0], to_dut};
    if (sck_d[1] && !sck_d[2]) reg_m <= {reg_m[LEN-2:0], sdi_d[1]};
  end
  assign from_dut = reg_m[LEN-1];

  // Monitors: mismatch positions, shift-clock period, cycle period.
  int read_rises = 0, last_rise = -1, now = 0, bad_sck = 0, n_rises = 0;
  int done_times[$];
  int seen_idx[$];
  logic sck_prev = 0;
  always @(posedge clk) begin
    now <= now + 1;
    if (sck && !sck_prev) begin
      if (last_rise >= 0 && now - last_rise != 2 * HALF && (now - last_rise) < 4 * HALF) bad_sck++;
      last_rise = now;
      n_rises++;
      if (phase == PH_READ) read_rises++;
    end
    if (mismatch && rst_n) seen_idx.push_back(read_rises - 1);
    if (done && rst_n) done_times.push_back(now);
    if (phase != PH_READ) read_rises = 0;
    sck_prev <= sck;
  end

  // One test cycle with the given model positions flipped during HOLD.
  task automatic run_cycle(input int pos[$], input bit stop_after);
    int f0, exp_idx[$];
    f0 = fails;
    seen_idx.delete();
    wait (phase == PH_HOLD);
    repeat (5) @(posedge clk);
    foreach (pos[k]) begin
      reg_m[pos[k]] = ~reg_m[pos[k]];
      exp_idx.push_back(LEN - 1 - pos[k]);
    end
    exp_idx.sort();
    if (stop_after) run = 0;
    @(posedge done);
    @(negedge clk);
    check(fails == f0 + pos.size(), $sformatf("failure count %0d exp %0d", fails, f0 + pos.size()));
    check(last_fails == pos.size(), $sformatf("per-cycle count %0d exp %0d", last_fails, pos.size()));
    check(seen_idx.size() == exp_idx.size(), "number of mismatch pulses");
    foreach (exp_idx[k])
      if (k < seen_idx.size())
        check(seen_idx[k] == exp_idx[k], $sformatf("mismatch position %0d exp %0d", seen_idx[k], exp_idx[k]));
  endtask

  task automatic expect_report(input logic [15:0] c, input logic [15:0] i);
    logic [7:0] exp [5];
    exp = '{REPORT_SYNC, c[15:8], c[7:0], i[15:8], i[7:0]};
    for (int k = 0; k < 5; k++) begin
      check(rx.bytes.size() > 0, "report byte missing");
      if (rx.bytes.size() > 0) begin
        logic [7:0] got;
        got = rx.bytes.pop_front();
        check(got == exp[k], $sformatf("report byte %0d got %h exp %h", k, got, exp[k]));
      end
    end
  endtask

  initial begin
    int p[$];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(phase == PH_IDLE && !sck, "idle after reset");
    run = 1;
    // cycle 1: no upsets
    p = {};
    run_cycle(p, 0);
    check(rx.bytes.size() == 0, "no report without upsets");
    // cycle 2: three upsets far apart, each gets its own report
    p = {40, 25, 3};
    run_cycle(p, 0);
    repeat (200) @(posedge clk);
    expect_report(16'd1, 16'(LEN - 1 - 40));
    expect_report(16'd2, 16'(LEN - 1 - 25));
    expect_report(16'd3, 16'(LEN - 1 - 3));
    // cycle 3: three neighbouring upsets; the third report is merged into the
    // one still pending, so two reports arrive and the last one is complete
    p = {20, 19, 18};
    run_cycle(p, 1);
    repeat (400) @(posedge clk);
    expect_report(16'd4, 16'(LEN - 1 - 20));
    expect_report(16'd6, 16'(LEN - 1 - 18));
    check(rx.bytes.size() == 0, "merged report not repeated");
    // run_i dropped during cycle 3: the sequencer must now be idle
    repeat (3 * PERIOD / 2) @(posedge clk);
    check(phase == PH_IDLE && cycles == 3, $sformatf("stopped after 3 cycles (%0d)", cycles));
    check(done_times.size() == 3, $sformatf("three cycle_done pulses (%0d)", done_times.size()));
    if (done_times.size() == 3) begin
      check(done_times[1] - done_times[0] == PERIOD,
            $sformatf("cycle period %0d exp %0d", done_times[1] - done_times[0], PERIOD));
      check(done_times[2] - done_times[1] == PERIOD, "cycle period (2)");
    end
    check(bad_sck == 0, "shift-clock period 2*HALF");
    check(n_rises == 3 * 2 * LEN, $sformatf("shift-clock edges %0d exp %0d", n_rises, 3 * 2 * LEN));
    check(rx.framing_errors == 0, "uart framing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
