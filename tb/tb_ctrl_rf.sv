// tb_ctrl_rf -- self-checking testbench of the control register file.
//
// Checks the reset values (8-bit weights, all TPAs on, cache on), a random
// sequence of writes against a reference copy, and the decoded fields
// (weight precision clamped to 3..8, base subset clamped to B0..B4, activation/output precision, base subset, TPA enables).
module tb_ctrl_rf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0; logic [1:0] waddr = 0; logic [15:0] wdata = 0;
  logic [15:0] regs [4], pad, tpa_en;
  logic [3:0] wprec; logic act_hp, out_hp, cache_en; logic [2:0] bsel;
  ctrl_rf dut (.*);
  int checks = 0, failures = 0;
  logic [15:0] ref_r [4];
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    chk("rst prec", 32'(wprec), 8); chk("rst tpa_en", 32'(tpa_en), 16'hFFFF);
    chk("rst cache", 32'(cache_en), 1); chk("rst bsel", 32'(bsel), 0);
    ref_r = regs;
    for (int n = 0; n < 200; n++) begin
      we = 1; waddr = 2'($urandom); wdata = 16'($urandom);
      @(negedge clk);
      ref_r[waddr] = wdata;
      for (int i = 0; i < 4; i++) chk("reg", 32'(regs[i]), 32'(ref_r[i]));
      chk("wprec", 32'(wprec), ref_r[0][3:0] < 3 ? 3 : ref_r[0][3:0] > 8 ? 8 : 32'(ref_r[0][3:0]));
      chk("act_hp", 32'(act_hp), 32'(ref_r[0][4]));
      chk("bsel", 32'(bsel), ref_r[0][7:5] > 4 ? 0 : 32'(ref_r[0][7:5]));
      chk("out_hp", 32'(out_hp), 32'(ref_r[0][8]));
      chk("pad", 32'(pad), 32'(ref_r[1]));
      chk("tpa_en", 32'(tpa_en), 32'(ref_r[2]));
      chk("cache_en", 32'(cache_en), 32'(ref_r[3][0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
