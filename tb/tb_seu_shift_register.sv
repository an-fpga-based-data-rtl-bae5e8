// tb_seu_shift_register: self-checking test of the 3000-bit upset sensor at
// its default length.
// The testbench plays the control board: it writes 3000 random bits with a
// slow shift clock (6 cycles low, 6 high), flips a few random bits through the
// upset port while the clock is stopped, and reads all 3000 bits back while
// writing new ones, comparing each bit with its own model of the register.
// It also checks the shift latency (shift_o exactly 2 clock edges after sck
// rises, for one cycle) and that reset clears the register.
`timescale 1ns/1ps
module tb_seu_shift_register;
  import seu_pkg::*;
  localparam int unsigned LEN = SR_LEN_DEFAULT;
  localparam int unsigned H   = 6;
  localparam int unsigned IW  = $clog2(LEN);

  logic clk = 0, rst_n = 0;
  logic sck = 0, sdi = 0, sdo, shift;
  logic upset = 0;
  logic [IW-1:0] upset_idx = '0;
  logic [LEN-1:0] model = '0;
  int checks = 0, failures = 0;
  int upsets_done = 0;

  seu_shift_register #(.LEN(LEN)) dut (
    .clk(clk), .rst_n(rst_n), .sck_i(sck), .sdi_i(sdi), .sdo_o(sdo), .shift_o(shift),
    .upset_i(upset), .upset_idx_i(upset_idx));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // One shift-clock period: data set during the low half, rising edge, high half.
  // Returns the sdo value seen just before the rising edge.
  task automatic shift_bit(input logic d, output logic seen, input bit check_latency);
    int lat;
    sdi = d;
    repeat (H) @(posedge clk);
    seen = sdo;
    #1 sck = 1;
    lat = 0;
    for (int i = 1; i <= H; i++) begin
      @(posedge clk); #1;
      if (check_latency) check(shift == (i == 2), $sformatf("shift_o latency, edge %0d shift=%b", i, shift));
    end
    model = {model[LEN-2:0], d};
    sck = 0;
  endtask

  initial begin
    logic seen;
    logic d;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // write phase
    for (int i = 0; i < LEN; i++) begin
      d = 1'($urandom);
      shift_bit(d, seen, i < 4);
    end
    check(sdo == model[LEN-1], "sdo after write");
    // hold phase with upsets
    repeat (20) @(posedge clk);
    for (int k = 0; k < 5; k++) begin
      int idx;
      idx = $urandom % LEN;
      @(negedge clk);
      upset = 1; upset_idx = IW'(idx);
      @(negedge clk);
      upset = 0;
      model[idx] = ~model[idx];
      upsets_done++;
    end
    repeat (20) @(posedge clk);
    // read phase, writing fresh bits at the same time
    for (int i = 0; i < LEN; i++) begin
      logic exp;
      exp = model[LEN-1];
      d = 1'($urandom);
      shift_bit(d, seen, 0);
      check(seen == exp, $sformatf("read bit %0d got %b exp %b", i, seen, exp));
    end
    // reset clears the register
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    model = '0;
    for (int i = 0; i < 40; i++) begin
      shift_bit(1'b1, seen, 0);
      check(seen == 1'b0, "register cleared by reset");
    end
    check(upsets_done == 5, "upsets injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
