// heartbeat_gen: triple-redundant heartbeat for the external supervisory
// watchdog of the PP3-FPGA module.
//
// The watchdog on the board (a TPS3306-class supervisor) resets the FPGA, and
// so triggers a reload of the configuration from flash, when its WDI input has
// not seen a transition for 0.8 s. This block toggles wdi_o every HALF_MS
// milliseconds (default 200 ms, four toggles per watchdog window) as long as
// the FPGA is clocked and its logic is intact.
//
// Structure: the state {counter, wdi} exists in three copies. Every cycle the
// three are voted by tmr_voter, the next state is computed once from the voted
// value and written back into all three copies, so an upset in one copy is
// outvoted at once and scrubbed on the following edge (TMR with feedback
// voting). wdi_o is the voted toggle bit. upset_i[k] flips copy k's toggle bit
// and counter LSB on the next edge: it emulates an SEU in simulation and is
// tied low in hardware. tmr_err_o is high in any cycle in which the copies
// disagree.
//
// Timing: first toggle HALF_MS after reset is released, then every HALF_MS;
// clk is CLK_HZ. From the paper: the 0.8 s watchdog window and the use of TMR
// in the firmware. The toggle interval, the counter width and the scrubbing
// scheme are this design's choices.
module heartbeat_gen
  import seu_pkg::*;
#(
  parameter int unsigned CLK_HZ  = CLK_HZ_DEFAULT,
  parameter int unsigned HALF_MS = HB_HALF_MS_DEFAULT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] upset_i,
  output logic       wdi_o,
  output logic       tmr_err_o
);
  localparam longint unsigned HALF_CYC_L = longint'(CLK_HZ) * longint'(HALF_MS) / 1000;
  localparam int unsigned HALF_CYC = (HALF_CYC_L < 2) ? 2 : int'(HALF_CYC_L);
  localparam int unsigned CW       = $clog2(HALF_CYC);

  // Elaboration-time check: at least two toggles must fall in every watchdog window.
  if (2 * HALF_MS > WDT_TIMEOUT_MS) begin : g_check
    $error("heartbeat_gen: HALF_MS too long for the watchdog window");
  end

  typedef struct packed {
    logic [CW-1:0] cnt;
    logic          wdi;
  } hb_state_t;

  localparam hb_state_t UPSET_MASK = '{cnt: CW'(1), wdi: 1'b1};

  hb_state_t copy_q [3];
  hb_state_t voted, next_s;

  tmr_voter #(.WIDTH($bits(hb_state_t))) u_vote (
    .a_i       (copy_q[0]),
    .b_i       (copy_q[1]),
    .c_i       (copy_q[2]),
    .y_o       (voted),
    .mismatch_o(tmr_err_o)
  );

  always_comb begin
    next_s = voted;
    if (voted.cnt == CW'(HALF_CYC - 1)) begin
      next_s.cnt = '0;
      next_s.wdi = ~voted.wdi;
    end else begin
      next_s.cnt = voted.cnt + 1'b1;
    end
  end

  for (genvar k = 0; k < 3; k++) begin : g_copy
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) copy_q[k] <= '0;
      else        copy_q[k] <= upset_i[k] ? (next_s ^ UPSET_MASK) : next_s;
    end
  end

  assign wdi_o = voted.wdi;
endmodule
