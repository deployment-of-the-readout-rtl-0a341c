// diag_dpram -- diagnostic memory read by the board's soft processor.
//
// The firmware side continuously copies its diagnostic variables into a
// dual-port RAM; the processor reads it through the second port without
// disturbing the data path. Layout (32-bit words):
//   address 0        : sticky flags -- a bit of flags_in that was ever high
//                      since the last clr_sticky (buffer full, PLL lock
//                      lost, ...)
//   address 1        : live value of flags_in
//   address 2 + i    : diag_in[i], i = 0 .. N_DIAG-1 (counters)
// A scan pointer writes one address per clock, so every location is at most
// N_DIAG + 2 clocks old. Reads: cpu_rdata is valid one clock after
// cpu_addr.
//
// As published: a DPRAM of diagnostic variables read by the processor,
// with flags for full buffers and for the lock of the clock and optical
// link PLLs. Own choices: the layout, the sticky flags, the scan.
module diag_dpram #(
  parameter int unsigned N_DIAG = 16,
  parameter int unsigned DEPTH  = 64
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [31:0]              flags_in,
  input  logic [31:0]              diag_in [N_DIAG],
  input  logic                     clr_sticky,
  input  logic [$clog2(DEPTH)-1:0] cpu_addr,
  output logic [31:0]              cpu_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned IW = (N_DIAG > 1) ? $clog2(N_DIAG) : 1;

  logic [31:0]   sticky;
  logic [AW-1:0] scan;
  logic [31:0]   wdata;

  always_ff @(posedge clk) begin
    if (rst || clr_sticky) sticky <= '0;
    else                   sticky <= sticky | flags_in;
  end

  always_ff @(posedge clk) begin
    if (rst || scan == AW'(N_DIAG + 1)) scan <= '0;
    else                                scan <= scan + 1'b1;
  end

  always_comb begin
    if (scan == 0)      wdata = sticky;
    else if (scan == 1) wdata = flags_in;
    else                wdata = diag_in[IW'(scan - AW'(2))];
  end

  dpram #(.WIDTH(32), .DEPTH(DEPTH)) u_ram (
    .clk, .we(1'b1), .waddr(scan), .wdata(wdata),
    .raddr(cpu_addr), .rdata(cpu_rdata)
  );
endmodule
