// seu_tester: the control unit on the data-generator board (an Arty A7) that
// measures upsets in the device under test's shift register.
//
// One test cycle has three phases. WRITE: a pattern of LEN bits is shifted
// into the DUT register over the flat cable at SCK_HZ (1 kHz), one bit per
// shift-clock period. HOLD: the shift clock stops for HOLD_MS (1 s) while the
// register sits in the beam. READ: LEN more shift-clock periods move the
// register's contents out on sdi_i, where each bit is compared with the bit
// that was written; at the same time the pattern is shifted in again. Every
// bit that differs is one single-event upset: the failure counter is
// incremented, mismatch_o pulses and a report with the new count and the bit's
// position (0 = first bit written) goes to the host through host_reporter.
// While run_i is high the cycles repeat back to back.
//
// Shift clock: each bit period is 2*HALF clock cycles, HALF = CLK_HZ/(2*SCK_HZ);
// sck_o is low for the first half, high for the second. sdo_o changes only at
// the falling edge, so it is stable around the rising edge, on which the DUT
// shifts. In READ the DUT output is sampled at the end of the low half, just
// before the rising edge that moves the next bit out; HALF must be at least 8
// so that the two synchronisers and the DUT's shift latency fit in it.
//
// Cycle timing: from the clock edge that enters WRITE to the edge that raises
// cycle_done_o is 4*LEN*HALF + HOLD_CYC clock cycles, and back-to-back cycles
// are exactly that far apart (7 s at the defaults).
//
// The pattern is a PRBS-7 sequence restarted from a fixed seed for each phase,
// so the expected bits need no storage. From the paper: register length, shift
// rate, hold time, the write/hold/read/compare procedure, the failure counter
// and the report to the host. The pattern, the clocking scheme and the
// back-to-back cycling are this design's choices.
module seu_tester
  import seu_pkg::*;
#(
  parameter int unsigned LEN     = SR_LEN_DEFAULT,
  parameter int unsigned CLK_HZ  = CLK_HZ_DEFAULT,
  parameter int unsigned SCK_HZ  = SCK_HZ_DEFAULT,
  parameter int unsigned HOLD_MS = HOLD_MS_DEFAULT,
  parameter int unsigned BAUD    = BAUD_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run_i,
  // flat cable to the DUT
  output logic        sck_o,
  output logic        sdo_o,
  input  logic        sdi_i,
  // USB-UART to the host
  output logic        tx_o,
  // status
  output phase_e      phase_o,
  output logic [31:0] fail_count_o,
  output logic [31:0] cycle_count_o,
  output logic [31:0] last_cycle_fail_o,
  output logic        mismatch_o,
  output logic        cycle_done_o,
  output logic        report_sent_o
);
  localparam int unsigned HALF_RAW = CLK_HZ / (2 * SCK_HZ);
  localparam int unsigned HALF     = (HALF_RAW < 8) ? 8 : HALF_RAW;
  localparam longint unsigned HOLD_L = longint'(CLK_HZ) * longint'(HOLD_MS) / 1000;
  localparam int unsigned HOLD_CYC = (HOLD_L < 1) ? 1 : int'(HOLD_L);
  localparam int unsigned HW = $clog2(HALF);
  localparam int unsigned TW = (HOLD_CYC < 2) ? 1 : $clog2(HOLD_CYC);
  localparam int unsigned BW = (LEN < 2) ? 1 : $clog2(LEN);

  phase_e        phase_q;
  logic [HW-1:0] half_q;
  logic [TW-1:0] hold_q;
  logic [BW-1:0] bit_q;
  logic [6:0]    prbs_q;
  logic          sck_q, sdo_q;
  logic [31:0]   fail_q, cycles_q, cyc_fail_q, last_fail_q;
  logic [15:0]   idx_q;
  logic          mismatch_q, done_q;
  logic          sdi_s;
  logic [6:0]    prbs_nxt;

  assign prbs_nxt = prbs7_next(prbs_q);

  sync_2ff #(.WIDTH(1)) u_sync (
    .clk  (clk),
    .rst_n(rst_n),
    .d_i  (sdi_i),
    .q_o  (sdi_s)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q     <= PH_IDLE;
      half_q      <= '0;
      hold_q      <= '0;
      bit_q       <= '0;
      prbs_q      <= PRBS_SEED;
      sck_q       <= 1'b0;
      sdo_q       <= PRBS_SEED[6];
      fail_q      <= '0;
      cycles_q    <= '0;
      cyc_fail_q  <= '0;
      last_fail_q <= '0;
      idx_q       <= '0;
      mismatch_q  <= 1'b0;
      done_q      <= 1'b0;
    end else begin
      mismatch_q <= 1'b0;
      done_q     <= 1'b0;
      unique case (phase_q)
        PH_IDLE: begin
          if (run_i) begin
            phase_q    <= PH_WRITE;
            half_q     <= '0;
            bit_q      <= '0;
            prbs_q     <= PRBS_SEED;
            sdo_q      <= PRBS_SEED[6];
            cyc_fail_q <= '0;
          end
        end
        PH_WRITE, PH_READ: begin
          if (half_q != HW'(HALF - 1)) begin
            half_q <= half_q + 1'b1;
          end else begin
            half_q <= '0;
            if (!sck_q) begin
              // End of the low half: raise sck; in READ, check the bit on the line.
              sck_q <= 1'b1;
              if (phase_q == PH_READ && sdi_s != prbs_q[6]) begin
                fail_q     <= fail_q + 1'b1;
                cyc_fail_q <= cyc_fail_q + 1'b1;
                idx_q      <= 16'(bit_q);
                mismatch_q <= 1'b1;
              end
            end else begin
              // End of the high half: lower sck and present the next bit.
              sck_q <= 1'b0;
              if (bit_q == BW'(LEN - 1)) begin
                bit_q  <= '0;
                prbs_q <= PRBS_SEED;
                sdo_q  <= PRBS_SEED[6];
                if (phase_q == PH_WRITE) begin
                  phase_q <= PH_HOLD;
                  hold_q  <= '0;
                end else begin
                  cycles_q    <= cycles_q + 1'b1;
                  last_fail_q <= cyc_fail_q;
                  cyc_fail_q  <= '0;
                  done_q      <= 1'b1;
                  phase_q     <= run_i ? PH_WRITE : PH_IDLE;
                end
              end else begin
                bit_q  <= bit_q + 1'b1;
                prbs_q <= prbs_nxt;
                sdo_q  <= prbs_nxt[6];
              end
            end
          end
        end
        PH_HOLD: begin
          if (hold_q == TW'(HOLD_CYC - 1)) begin
            phase_q <= PH_READ;
            half_q  <= '0;
          end else begin
            hold_q <= hold_q + 1'b1;
          end
        end
        default: phase_q <= PH_IDLE;
      endcase
    end
  end

  host_reporter #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_report (
    .clk     (clk),
    .rst_n   (rst_n),
    .report_i(mismatch_q),
    .count_i (fail_q[15:0]),
    .index_i (idx_q),
    .tx_o    (tx_o),
    .busy_o  (),
    .sent_o  (report_sent_o)
  );

  assign sck_o             = sck_q;
  assign sdo_o             = sdo_q;
  assign phase_o           = phase_q;
  assign fail_count_o      = fail_q;
  assign cycle_count_o     = cycles_q;
  assign last_cycle_fail_o = last_fail_q;
  assign mismatch_o        = mismatch_q;
  assign cycle_done_o      = done_q;

  // The shift clock only toggles while shifting.
  a_sck_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (phase_q inside {PH_IDLE, PH_HOLD}) |-> !sck_q);
endmodule
