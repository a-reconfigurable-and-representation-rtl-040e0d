// tb_op2mem -- self-checking testbench of OP2MEM and its weight packer.
//
// Writes random 8-bit weights bit-plane by bit-plane through the host port,
// then reads them back at every precision k = 3..8. The packed weights must
// equal the original weights truncated to k bits and sign-extended, two
// cycles after the read; only planes 0..k-1 may change M2. Also checks the
// write-port stall on a half conflict and a write-back word landing in the
// upper bank group (w_hi).
module tb_op2mem;
  localparam int W = 6144;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] prec = 8; logic a_rd = 0; logic [31:0] a_addr = 0;
  logic [3:0] w_en = 0; logic w_hi = 0; logic [15:0] w_addr = 0; logic [31:0] w_data [4];
  logic w_stall;
  logic h_we = 0, h_re = 0; logic [2:0] h_bank = 0; logic [15:0] h_addr = 0;
  logic [31:0] h_wdata = 0, h_rdata;
  logic [31:0] m2 [8]; logic signed [7:0] iv [32];
  op2mem #(.WORDS_PER_BANK(W)) dut (.*);
  int checks = 0, failures = 0;
  logic signed [7:0] wt [8][32];
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask
  initial begin
    logic [31:0] old [8];
    for (int i = 0; i < 4; i++) w_data[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 8; a++) begin
      for (int p = 0; p < 32; p++) wt[a][p] = 8'($urandom);
      for (int b = 0; b < 8; b++) begin
        h_we = 1; h_bank = 3'(b); h_addr = 16'(a);
        for (int p = 0; p < 32; p++) h_wdata[p] = wt[a][p][b];
        @(negedge clk);
      end
    end
    h_we = 0;
    for (int k = 3; k <= 8; k++)
      for (int a = 0; a < 8; a++) begin
        prec = 4'(k); old = m2;
        a_rd = 1; a_addr = a; @(negedge clk); a_rd = 0; @(negedge clk);
        for (int b = k; b < 8; b++) chk("inactive plane", m2[b], old[b]);
        for (int p = 0; p < 32; p++) begin
          logic signed [7:0] e;
          for (int b = 0; b < 8; b++) e[b] = (b < k) ? wt[a][p][b] : wt[a][p][k-1];
          chk("packed weight", 32'(iv[p]), 32'(e));
        end
      end
    // write-port conflict and w_hi
    prec = 8;
    a_rd = 1; a_addr = 1; w_en = 4'b0001; w_hi = 1; w_addr = 16'd2; w_data[0] = 32'h1234_5678;
    #1 chk("w_stall", 32'(w_stall), 1);
    @(negedge clk); a_rd = 0; #1 chk("w_stall off", 32'(w_stall), 0);
    @(negedge clk); w_en = 0;
    h_re = 1; h_bank = 3'd4; h_addr = 16'd2; @(negedge clk); h_re = 0;
    chk("w_hi write", h_rdata, 32'h1234_5678);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
