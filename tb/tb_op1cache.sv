// tb_op1cache -- self-checking testbench of the border cache.
//
// Random writes with random bank enables against a reference array, then
// reads: the word read in cycle t must be in M3 at the end of t+1, and M3
// entries of banks not enabled in a read must hold their old value.
module tb_op1cache;
  localparam int W = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd = 0, wr = 0; logic [3:0] ben = 0; logic [31:0] addr = 0, wdata = 0;
  logic [31:0] m3 [4];
  op1cache #(.WORDS_PER_BANK(W)) dut (.*);
  int checks = 0, failures = 0;
  logic [31:0] ref_m [4][W];
  logic        known [4][W];
  initial begin
    logic [31:0] prev [4]; logic [3:0] rb; int ra;
    for (int b = 0; b < 4; b++) for (int i = 0; i < W; i++) known[b][i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      wr = 1; rd = 0; ben = 4'($urandom); addr = $urandom % 64; wdata = $urandom;
      for (int b = 0; b < 4; b++) if (ben[b]) begin ref_m[b][addr] = wdata; known[b][addr] = 1; end
      @(negedge clk);
    end
    wr = 0;
    for (int n = 0; n < 300; n++) begin
      rd = 1; rb = 4'($urandom); ben = rb; ra = $urandom % 64; addr = ra;
      prev = m3;
      @(negedge clk); rd = 0; ben = 0;
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (rb[b] && known[b][ra] && m3[b] !== ref_m[b][ra]) begin failures++; $display("FAIL rd b%0d a%0d", b, ra); end
        if (!rb[b] && m3[b] !== prev[b]) begin failures++; $display("FAIL hold b%0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
