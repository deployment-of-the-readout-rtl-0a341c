// tb_diag_dpram -- self-checking test of the diagnostic memory.
//
// Random counter values are presented; after one scan period every address
// 2+i must read diag_in[i] (read data one clock after the address). A flag
// pulse must show in the sticky word (address 0) until clr_sticky, while
// address 1 follows the live flags.
module tb_diag_dpram;
  localparam int N = 16;
  logic clk = 1'b0;
  logic rst = 1'b1;
  logic [31:0] flags_in = '0;
  logic [31:0] diag_in [N];
  logic clr_sticky = 1'b0;
  logic [5:0] cpu_addr = '0;
  logic [31:0] cpu_rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  diag_dpram dut (.*);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk) cpu_addr = a;
    @(negedge clk) d = cpu_rdata;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    for (int i = 0; i < N; i++) diag_in[i] = $urandom;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (2 * N + 4) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      rd(6'(i + 2), d);
      chk(d == diag_in[i], $sformatf("diag %0d: %h exp %h", i, d, diag_in[i]));
    end
    // new values are picked up within one scan
    for (int i = 0; i < N; i++) diag_in[i] = $urandom;
    repeat (N + 4) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      rd(6'(i + 2), d);
      chk(d == diag_in[i], $sformatf("updated diag %0d", i));
    end
    // sticky flags
    @(negedge clk) flags_in = 32'h0000_0104;
    @(negedge clk) flags_in = 32'h0;
    repeat (N + 4) @(posedge clk);
    rd(6'd0, d);
    chk(d == 32'h0000_0104, $sformatf("sticky %h", d));
    rd(6'd1, d);
    chk(d == 32'h0, "live flags low");
    @(negedge clk) clr_sticky = 1'b1;
    @(negedge clk) clr_sticky = 1'b0;
    repeat (N + 4) @(posedge clk);
    rd(6'd0, d);
    chk(d == 32'h0, "sticky cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
