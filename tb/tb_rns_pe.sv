// tb_rns_pe -- self-checking testbench of the RNS processing element.
//
// Feeds random signed 8-bit operand pairs, encoded into residues by the
// testbench, through clr/mac sequences of random length and checks every
// enabled residue channel of Z against the integer dot product taken modulo
// that channel's modulus; disabled channels (base subset) must hold. One MAC
// per cycle: Z is updated at the clock edge after mac is asserted.
module tb_rns_pe;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mac = 0, clr = 0;
  logic [NCH-1:0] chan_en = '1;
  logic [ZW-1:0] a = 0, b = 0, z;
  rns_pe dut (.*);
  int checks = 0, failures = 0;
  function automatic logic [ZW-1:0] enc(input longint v);
    logic [ZW-1:0] o = '0;
    for (int c = 0; c < NCH; c++) o[ROFS[c] +: 5] = 5'(smod(v, MOD[c]));
    return o;
  endfunction
  initial begin
    longint acc; logic [ZW-1:0] zfrozen;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n; n = 1 + ($urandom % 20);
      chan_en = (t % 3 == 0) ? base_mask(3'($urandom % 5)) : 5'b11111;
      zfrozen = z;
      acc = 0;
      for (int k = 0; k < n; k++) begin
        longint x, y;
        x = longint'($signed(8'($urandom))); y = longint'($signed(8'($urandom)));
        a = enc(x); b = enc(y); mac = 1; clr = (k == 0);
        acc += x * y;
        @(negedge clk);
      end
      mac = 0; clr = 0;
      for (int c = 0; c < NCH; c++) begin
        int unsigned g, e;
        g = 32'(z[ROFS[c] +: 5]) & ((1 << RW[c]) - 1);
        e = chan_en[c] ? smod(acc, MOD[c]) : (32'(zfrozen[ROFS[c] +: 5]) & ((1 << RW[c]) - 1));
        checks++;
        if (chan_en[c] && g != e) begin failures++; $display("FAIL t=%0d ch%0d got %0d exp %0d", t, c, g, e); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
