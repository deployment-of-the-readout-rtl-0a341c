// dpram -- simple dual-port RAM (helper): one write port, one read port,
// one clock. The read data appear one clock after the read address
// (registered output, as in an FPGA block RAM). A read of the address being
// written in the same clock returns the old contents. No reset: the users
// of this memory keep their own valid counts.
module dpram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
