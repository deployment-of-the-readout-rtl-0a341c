// reset_manager -- produces the resets of the readout firmware.
//
// Two resets are made:
//  * rst     : the data-path reset. It follows the asynchronous power-on
//              reset (por_n) and the manual request manual_rst, is released
//              synchronously and lasts RST_LEN clocks after the request.
//  * ts_rst  : a one-clock pulse that restarts the time base (the trigger
//              timestamp counter and, through tiger_rst, the TIGER coarse
//              counters) so that GEMROC and TIGER time stamps agree. It is
//              issued on manual_ts_rst, or, when auto_en is set, on the first
//              accepted L1 trigger after a data-path reset.
//
// As published: resets generated automatically on the first trigger or
// manually. Own choices: what each reset clears, the two-flop
// synchroniser and the reset length.
//
// Timing: rst rises asynchronously with por_n low, otherwise one clock
// after manual_rst; it falls RST_LEN clocks later. ts_rst follows its cause
// by one clock.
module reset_manager #(
  parameter int unsigned RST_LEN = 16
) (
  input  logic clk,
  input  logic por_n,
  input  logic manual_rst,
  input  logic manual_ts_rst,
  input  logic auto_en,
  input  logic l1_accept,
  output logic rst,
  output logic ts_rst,
  output logic armed
);
  logic [1:0] sync;
  logic [$clog2(RST_LEN+1)-1:0] cnt;

  always_ff @(posedge clk or negedge por_n) begin
    if (!por_n) sync <= 2'b00;
    else        sync <= {sync[0], 1'b1};
  end

  always_ff @(posedge clk) begin
    if (!sync[1] || manual_rst) begin
      cnt <= '0;
      rst <= 1'b1;
    end else if (cnt != ($bits(cnt))'(RST_LEN)) begin
      cnt <= cnt + 1'b1;
      rst <= 1'b1;
    end else begin
      rst <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      armed  <= 1'b1;
      ts_rst <= 1'b0;
    end else begin
      ts_rst <= manual_ts_rst || (auto_en && armed && l1_accept);
      if (auto_en && l1_accept) armed <= 1'b0;
    end
  end
endmodule
