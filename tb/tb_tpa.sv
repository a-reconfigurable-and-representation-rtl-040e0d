// tb_tpa -- self-checking testbench of one tensor processing array.
//
// Streams a broadcast scalar (I_s) and a 32-lane vector (I_v), both residues
// of random signed bytes, for a random number of cycles, then issues pproc,
// which moves Z to Y and clears Z. Y is decoded with the CRT converter and
// compared with the integer dot products. Also checks that a disabled array
// (en low) neither accumulates nor updates Y, and that one MAC is done per
// cycle (Y valid the cycle after pproc).
module tb_tpa;
  import accel_pkg::*;
  localparam int NPE = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 1, mac = 0, pproc = 0;
  logic [NCH-1:0] chan_en = '1;
  logic [ZW-1:0] is = 0, iv [NPE], z [NPE], y [NPE];
  logic [ZW-1:0] ysel; logic signed [31:0] ydec; int pe = 0;
  tpa #(.NPE(NPE)) dut (.*);
  assign ysel = y[pe];
  rns_to_bin u_crt (.bsel(3'd0), .r(ysel), .x(ydec));
  int checks = 0, failures = 0;
  longint acc [NPE];
  logic [ZW-1:0] yprev [NPE];
  function automatic logic [ZW-1:0] enc(input longint v);
    logic [ZW-1:0] o = '0;
    for (int c = 0; c < NCH; c++) o[ROFS[c] +: 5] = 5'(smod(v, MOD[c]));
    return o;
  endfunction
  initial begin
    for (int p = 0; p < NPE; p++) iv[p] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int n; n = 1 + $urandom % 40;
      en = (t != 5);
      yprev = y;
      for (int p = 0; p < NPE; p++) acc[p] = 0;
      for (int k = 0; k < n; k++) begin
        longint s; s = longint'($signed(8'($urandom)));
        is = enc(s); mac = 1;
        for (int p = 0; p < NPE; p++) begin
          longint v; v = longint'($signed(8'($urandom)));
          iv[p] = enc(v); acc[p] += s * v;
        end
        @(negedge clk);
      end
      mac = 0; pproc = 1; @(negedge clk); pproc = 0;
      for (int p = 0; p < NPE; p++) begin
        pe = p; #1;
        checks++;
        if (en && ydec != 32'(acc[p])) begin failures++; $display("FAIL t=%0d pe=%0d got %0d exp %0d", t, p, ydec, acc[p]); end
        if (!en && y[p] !== yprev[p]) begin failures++; $display("FAIL disabled TPA changed Y"); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
