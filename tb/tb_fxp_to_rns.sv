// tb_fxp_to_rns -- self-checking testbench of the forward converter and of
// the CRT reverse converter.
//
// Every cycle a fresh vector of random signed bytes enters the converter; one
// cycle later each lane's residues must equal x mod m for all five moduli
// (one-cycle latency, one vector per cycle). Each lane's output is also fed
// to rns_to_bin, which must give x back for every base subset B0..B4.
module tb_fxp_to_rns;
  import accel_pkg::*;
  localparam int N = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [7:0] x [N], xq [N];
  logic [ZW-1:0] r [N];
  logic [2:0] bsel = 0;
  logic signed [31:0] xb;
  int lane = 0;
  fxp_to_rns #(.N(N)) dut (.clk, .rst_n, .x, .r);
  rns_to_bin u_crt (.bsel, .r(r[lane]), .x(xb));
  int checks = 0, failures = 0;
  initial begin
    for (int i = 0; i < N; i++) x[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) x[i] = (t == 0 && i < 2) ? (i == 0 ? -8'sd128 : 8'sd127) : 8'($urandom);
      xq = x;
      @(negedge clk);
      for (int i = 0; i < N; i++)
        for (int c = 0; c < NCH; c++) begin
          int unsigned g;
          g = 32'(r[i][ROFS[c] +: 5]) & ((1 << RW[c]) - 1);
          checks++;
          if (g != smod(longint'(xq[i]), MOD[c])) begin
            failures++; $display("FAIL lane %0d ch %0d x=%0d got %0d", i, c, xq[i], g);
          end
        end
      lane = $urandom % N; bsel = 3'($urandom % 5);
      #1;
      checks++;
      if (xb != 32'(xq[lane])) begin failures++; $display("FAIL crt bsel=%0d x=%0d got %0d", bsel, xq[lane], xb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
