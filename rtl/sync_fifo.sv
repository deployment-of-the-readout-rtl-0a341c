// sync_fifo -- single-clock first-in first-out buffer (helper).
//
// A circular array with separate read and write pointers. The head entry is
// always visible on rd_data (first-word fall-through); rd_en pops it. A write
// while full and a read while empty are ignored (and flagged by assertions).
// count gives the fill level, used by the blocks for "almost full" checks.
// Depth must be a power of two. Generic building block, not taken from any
// particular block of the readout firmware.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, rp;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign count   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty));
endmodule
