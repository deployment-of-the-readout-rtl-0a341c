// fc_simulator -- stand-in for the BESIII Fast Control signals when the
// board runs on its own (standalone mode).
//
// It produces the L1 trigger and the check line in the BESIII clock domain,
// represented here by the clock enable fc_ce (one TIGER clock in CLK_RATIO).
// Every `period` BESIII clocks a trigger is started: l1 goes high for L1_LEN
// BESIII clocks. Every CHECK_EVERY-th trigger the check line is raised for
// the same L1_LEN clocks. While full_in (the FULL line of the readout) is
// high no new trigger is started, as the real Fast Control does.
//
// As published: L1 length of eight BESIII clocks, a check every 256
// triggers, triggers held back while FULL is asserted. Own choices: a
// fixed, programmable trigger period (the real L1 arrives at random), and
// check coinciding with the trigger it counts.
//
// Timing: l1 and check change only in cycles where fc_ce is high; a trigger
// starts in the fc_ce cycle in which the period counter expires.
module fc_simulator #(
  parameter int unsigned L1_LEN      = 8,
  parameter int unsigned CHECK_EVERY = 256
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        fc_ce,       // BESIII clock enable
  input  logic        enable,
  input  logic [15:0] period,      // BESIII clocks between trigger starts
  input  logic        full_in,
  output logic        l1,
  output logic        check,
  output logic [31:0] n_sent
);
  localparam int unsigned CW = $clog2(CHECK_EVERY);

  logic [15:0] tick;
  logic [7:0]  hold;        // remaining high time of the current pulse
  logic [CW-1:0] chk_cnt;
  logic [15:0] per_eff;

  // a period shorter than the pulse would merge pulses
  assign per_eff = (period <= 16'(L1_LEN)) ? 16'(L1_LEN + 1) : period;

  always_ff @(posedge clk) begin
    if (rst) begin
      tick    <= '0;
      hold    <= '0;
      chk_cnt <= '0;
      l1      <= 1'b0;
      check   <= 1'b0;
      n_sent  <= '0;
    end else if (fc_ce) begin
      if (hold != 0) begin
        hold <= hold - 1'b1;
        if (hold == 8'd1) begin
          l1    <= 1'b0;
          check <= 1'b0;
        end
      end
      if (tick >= per_eff - 1'b1) begin
        if (enable && !full_in && hold == 0) begin
          tick    <= '0;
          l1      <= 1'b1;
          hold    <= 8'(L1_LEN);
          n_sent  <= n_sent + 1'b1;
          chk_cnt <= chk_cnt + 1'b1;
          check   <= (chk_cnt == CW'(CHECK_EVERY - 1));
        end
      end else begin
        tick <= tick + 1'b1;
      end
    end
  end
endmodule
