// tb_pp3_test_firmware: self-checking test of the DUT firmware with a short
// register (LEN=64) and a fast heartbeat (CLK_HZ=1000, HB_HALF_MS=10, so a
// toggle every 10 cycles).
// It writes and reads back random patterns with one emulated register upset
// per pass, checks every bit read against a model, checks that the heartbeat
// toggles every 10 cycles throughout, and that a heartbeat copy upset raises
// tmr_err_o without disturbing wdi_o.
`timescale 1ns/1ps
module tb_pp3_test_firmware;
  localparam int unsigned LEN = 64, H = 5, HB = 10;
  localparam int unsigned IW  = $clog2(LEN);

  logic clk = 0, rst_n = 0;
  logic sck = 0, sdi = 0, sdo, wdi, shift, tmr_err;
  logic sr_upset = 0;
  logic [IW-1:0] sr_idx = '0;
  logic [2:0] hb_upset = '0;
  logic [LEN-1:0] model = '0;
  int checks = 0, failures = 0;
  int toggles = 0, tmr_events = 0;

  pp3_test_firmware #(.LEN(LEN), .CLK_HZ(1000), .HB_HALF_MS(HB)) dut (
    .clk(clk), .rst_n(rst_n), .sck_i(sck), .sdi_i(sdi), .sdo_o(sdo), .wdi_o(wdi),
    .shift_o(shift), .tmr_err_o(tmr_err), .sr_upset_i(sr_upset), .sr_upset_idx_i(sr_idx),
    .hb_upset_i(hb_upset));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Heartbeat monitor: wdi must toggle exactly every HB cycles after reset.
  int cyc = 0;
  logic wdi_exp = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      cyc <= cyc + 1;
      #1;
      if ((cyc % HB) == 0) begin wdi_exp = ~wdi_exp; toggles++; end
      check(wdi == wdi_exp, $sformatf("heartbeat at cycle %0d", cyc));
      if (tmr_err) tmr_events++;
    end
  end

  task automatic shift_bit(input logic d, output logic seen);
    sdi = d;
    repeat (H) @(posedge clk);
    seen = sdo;
    #1 sck = 1;
    repeat (H) @(posedge clk);
    model = {model[LEN-2:0], d};
    #1 sck = 0;
  endtask

  initial begin
    logic seen;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      int idx;
      for (int i = 0; i < LEN; i++) shift_bit(1'($urandom), seen);
      idx = $urandom % LEN;
      @(negedge clk) begin sr_upset = 1; sr_idx = IW'(idx); hb_upset = 3'(1 << (pass % 3)); end
      @(negedge clk) begin sr_upset = 0; hb_upset = '0; end
      model[idx] = ~model[idx];
      for (int i = 0; i < LEN; i++) begin
        logic exp;
        exp = model[LEN-1];
        shift_bit(1'($urandom), seen);
        check(seen == exp, $sformatf("pass %0d read bit %0d", pass, i));
      end
    end
    check(tmr_events == 4, $sformatf("tmr_err_o cycles %0d, expected 4", tmr_events));
    check(toggles > 40, "heartbeat toggled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
