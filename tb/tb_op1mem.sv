// tb_op1mem -- self-checking testbench of OP1MEM.
//
// Fills the four banks through the host port, then checks: a port-A read
// lands in M1 two cycles after issue with the split address mapping (bank 0
// from addr[15:0], banks 1-3 from addr[31:16]); the copy flag moves M1[0..3]
// to M1[4..7]; port A and port B run together on different halves; a port-B
// read or write on the half port A reads is stalled and not performed, and
// succeeds when retried; write-back writes are visible to later reads.
module tb_op1mem;
  localparam int W = 8192;
  localparam int H = W / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_rd = 0, a_cp = 0; logic [3:0] a_ben = 0; logic [31:0] a_addr = 0;
  logic b_rd = 0; logic [3:0] b_ben = 0; logic [31:0] b_addr = 0;
  logic [3:0] b_we = 0; logic [15:0] b_waddr [4]; logic [31:0] b_wdata [4];
  logic b_stall;
  logic h_we = 0, h_re = 0; logic [1:0] h_bank = 0; logic [15:0] h_addr = 0;
  logic [31:0] h_wdata = 0, h_rdata;
  logic [31:0] m1 [8], mb [4];
  op1mem #(.WORDS_PER_BANK(W)) dut (.*);
  int checks = 0, failures = 0, stalls = 0;
  function automatic logic [31:0] pat(input int b, input int a); return {8'(b), 8'hA5, 16'(a)}; endfunction
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask
  initial begin
    int x, y; logic [31:0] old [4];
    for (int i = 0; i < 4; i++) begin b_waddr[i] = 0; b_wdata[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // host fill of a few regions in both halves
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < 64; a++) foreach (old[k]) begin end
    for (int b = 0; b < 4; b++) for (int a = 0; a < 32; a++) begin
      h_we = 1; h_bank = 2'(b); h_addr = 16'(a); h_wdata = pat(b, a); @(negedge clk);
      h_addr = 16'(H + a); h_wdata = pat(b, H + a); @(negedge clk);
    end
    h_we = 0;
    // port A reads with split address, latency 2
    for (int n = 0; n < 50; n++) begin
      x = $urandom % 32; y = $urandom % 32;
      a_rd = 1; a_ben = 4'hF; a_addr = {16'(y), 16'(x)};
      @(negedge clk); a_rd = 0;
      chk("m1 not yet", 32'(m1[0] === pat(0, x) && n > 0 && 0), 0);
      @(negedge clk);
      chk("m1[0]", m1[0], pat(0, x));
      for (int b = 1; b < 4; b++) chk("m1[b]", m1[b], pat(b, y));
      // copy: next read with cp moves old words up
      old = m1[0:3];
      a_rd = 1; a_cp = 1; a_addr = {16'(x), 16'(y)};
      @(negedge clk); a_rd = 0; a_cp = 0; @(negedge clk);
      for (int b = 0; b < 4; b++) chk("cp", m1[4+b], old[b]);
      chk("m1[0] after cp", m1[0], pat(0, y));
    end
    // concurrent A (low half) + B read (high half): no stall
    a_rd = 1; a_ben = 4'hF; a_addr = {16'd3, 16'd3};
    b_rd = 1; b_ben = 4'hF; b_addr = H + 5;
    #1 chk("no stall", 32'(b_stall), 0);
    @(negedge clk); a_rd = 0; b_rd = 0; @(negedge clk);
    for (int b = 0; b < 4; b++) chk("mb", mb[b], pat(b, H + 5));
    // conflict: B write into the half A reads -> stall, not written
    a_rd = 1; a_addr = {16'd1, 16'd1};
    b_we = 4'b0001; b_waddr[0] = 16'd7; b_wdata[0] = 32'hDEAD_BEEF;
    #1 chk("stall on conflict", 32'(b_stall), 1); if (b_stall) stalls++;
    @(negedge clk); a_rd = 0;
    #1 chk("stall released", 32'(b_stall), 0);
    @(negedge clk); b_we = 0;
    a_rd = 1; a_ben = 4'h1; a_addr = 32'd7; @(negedge clk); a_rd = 0; @(negedge clk);
    chk("retried write", m1[0], 32'hDEAD_BEEF);
    // conflict on a B read
    a_rd = 1; a_ben = 4'h2; a_addr = {16'd2, 16'd0};
    b_rd = 1; b_ben = 4'h2; b_addr = 32'd9;
    #1 chk("read stall", 32'(b_stall), 1);
    old = mb;
    @(negedge clk); a_rd = 0; b_rd = 0; @(negedge clk);
    chk("stalled read not done", mb[1], old[1]);
    chk("stall count", 32'(stalls), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
