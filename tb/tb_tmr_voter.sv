// tb_tmr_voter: self-checking test of the 2-of-3 majority voter.
// Drives 2000 random triples of 8-bit words, many of them built from one
// common value with one or two copies corrupted, and compares y_o and
// mismatch_o with a per-bit vote counted in the testbench.
`timescale 1ns/1ps
module tb_tmr_voter;
  localparam int W = 8;
  logic [W-1:0] a, b, c, y;
  logic         mm;
  int checks = 0, failures = 0;

  tmr_voter #(.WIDTH(W)) dut (.a_i(a), .b_i(b), .c_i(c), .y_o(y), .mismatch_o(mm));

  task automatic check_one();
    logic [W-1:0] exp_y;
    logic         exp_mm;
    for (int i = 0; i < W; i++) exp_y[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
    exp_mm = !(a == b && b == c);
    #1;
    checks++;
    if (y !== exp_y || mm !== exp_mm) begin
      failures++;
      $display("FAIL a=%h b=%h c=%h y=%h (exp %h) mm=%b (exp %b)", a, b, c, y, exp_y, mm, exp_mm);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v;
    for (int n = 0; n < 2000; n++) begin
      v = W'($urandom);
      a = v; b = v; c = v;
      unique case (n % 4)
        0: ;                                  // all agree
        1: a = v ^ W'(1 << ($urandom % W));  // one copy hit
        2: begin b = W'($urandom); end        // one copy arbitrary
        3: begin a = W'($urandom); b = W'($urandom); c = W'($urandom); end
      endcase
      check_one();
      // a single corrupted copy must always be outvoted
      if (n % 4 == 1 || n % 4 == 2) begin
        checks++;
        if (y !== v) begin failures++; $display("FAIL single upset not masked"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
