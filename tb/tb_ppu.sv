// tb_ppu -- self-checking testbench of the post-processing unit.
//
// Drives the Y registers with residues of random accumulator values and issues
// PPU instructions one per cycle, checking O and PPR against a reference model
// written here: QNT (signed-exponent scale, round half up, saturate), QFUNC
// with ReLU and with a PWL function, AFUNC, MUL by a PPR value, LDPPR,
// ADDPPR/SUBPPR, PWL into PPR, SETR, and the max and sum reductions started by
// REDMAX/REDSUM and stopped by REDDIS. Results must appear two cycles after the
// instruction is issued and busy must be high while one is in flight.
module tb_ppu;
  import accel_pkg::*;
  localparam int NPE = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  simd_cmd_t cmd;
  logic [2:0] bsel = 0;
  logic [ZW-1:0] y [NPE];
  logic signed [7:0] mem = 0;
  logic signed [11:0] pwl_a [8][16], pwl_b [8][16];
  logic signed [7:0] o [NPE];
  logic signed [ZW-1:0] ppr [4];
  logic busy;
  ppu #(.NPE(NPE)) dut (.*);
  int checks = 0, failures = 0;
  longint yv [NPE];

  function automatic logic [ZW-1:0] enc(input longint v);
    logic [ZW-1:0] r = '0;
    for (int c = 0; c < NCH; c++) r[ROFS[c] +: 5] = 5'(smod(v, MOD[c]));
    return r;
  endfunction
  function automatic int q8(input longint v, input int sh);
    longint r;
    if (sh >= 0) r = v * (longint'(1) << sh);
    else begin r = v + (longint'(1) << (-sh - 1)); r = (r >= 0) ? r / (longint'(1) << -sh) : -((-r + (longint'(1) << -sh) - 1) / (longint'(1) << -sh)); end
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction
  function automatic longint pw(input int f, input int x);
    int i; i = ((x + 128) >> 4);
    return longint'(pwl_a[f][i]) * x + longint'(pwl_b[f][i]) * 128;
  endfunction
  function automatic int sx20(input logic signed [ZW-1:0] v); return int'(v); endfunction
  task automatic chk(input string w, input int g, input int e);
    checks++; if (g != e) begin failures++; $display("FAIL %s got %0d exp %0d", w, g, e); end
  endtask
  task automatic issue(input simd_fn_e fn, input int a = 0, input int sf = 0, input int f = 0,
                       input int d = 0, input int s = 0, input int t = 0);
    cmd = '0; cmd.valid = 1; cmd.fn = fn; cmd.a = 5'(a); cmd.sf = 5'(sf); cmd.f = afunc_e'(f);
    cmd.d = 2'(d); cmd.s = 2'(s); cmd.t = 2'(t);
    @(negedge clk); cmd = '0;
    checks++; if (!busy) begin failures++; $display("FAIL busy low"); end
    @(negedge clk);
  endtask

  initial begin
    int e, mx, sm, r;
    cmd = '0;
    for (int f = 0; f < 8; f++) for (int i = 0; i < 16; i++) begin
      pwl_a[f][i] = 12'($signed(12'($urandom)) >>> 4); pwl_b[f][i] = 12'($signed(12'($urandom)) >>> 6);
    end
    for (int p = 0; p < NPE; p++) begin yv[p] = longint'($signed(16'($urandom))); y[p] = enc(yv[p]); end
    repeat (2) @(negedge clk); rst_n = 1;
    chk("idle", busy, 0);
    // QNT with a negative and a positive exponent
    for (int p = 0; p < NPE; p++) begin
      int sf; sf = -($urandom % 10);
      issue(SF_QNT, p, sf);
      chk("QNT", o[p], q8(yv[p], sf));
    end
    chk("idle after", busy, 0);
    issue(SF_QFUNC, 3, -6, int'(F_RELU));
    chk("QFUNC relu", o[3], q8(yv[3] < 0 ? 0 : yv[3], -6));
    issue(SF_SETR, 0, -4);
    issue(SF_QFUNC, 4, -7, int'(F_GELU));
    chk("QFUNC pwl", o[4], q8(pw(int'(F_GELU), q8(yv[4], -7)), -4));
    e = o[5];
    issue(SF_AFUNC, 5, 0, int'(F_RELU));
    chk("AFUNC relu", o[5], e < 0 ? 0 : e);
    e = o[6];
    issue(SF_AFUNC, 6, 0, int'(F_TANH));
    chk("AFUNC pwl", o[6], q8(pw(int'(F_TANH), e), -4));
    mem = -8'sd37; issue(SF_LDPPR, 0, 0, 0, 1);
    chk("LDPPR", sx20(ppr[1]), -37);
    mem = 8'sd90; issue(SF_LDPPR, 0, 0, 0, 2);
    issue(SF_ADDPPR, 0, 0, 0, 3, 1, 2);
    chk("ADDPPR", sx20(ppr[3]), 53);
    issue(SF_SUBPPR, 0, 0, 0, 0, 1, 2);
    chk("SUBPPR", sx20(ppr[0]), -127);
    issue(SF_MUL, 7, -9, 0, 0, 1);
    chk("MUL", o[7], q8(yv[7] * -37, -9));
    issue(SF_PWL, 0, 0, int'(F_EXP), 0, 1);
    chk("PWL", sx20(ppr[0]), int'(pw(int'(F_EXP), -37)) & 32'hFFFFF | ((pw(int'(F_EXP), -37) < 0) ? 32'hFFF00000 : 0));
    // reductions
    issue(SF_REDMAX, 0, 0, 0, 2);
    mx = -128;
    for (int p = 8; p < 16; p++) begin issue(SF_QNT, p, -8); mx = (o[p] > mx) ? o[p] : mx; end
    chk("REDMAX", sx20(ppr[2]), mx);
    issue(SF_REDSUM, 0, 0, 0, 3);
    sm = 0;
    for (int p = 16; p < 24; p++) begin issue(SF_QNT, p, -8); sm += o[p]; end
    issue(SF_REDDIS);
    issue(SF_QNT, 24, -8);
    chk("REDSUM", sx20(ppr[3]), sm);
    // back-to-back issue: one instruction per cycle
    cmd = '0; cmd.valid = 1; cmd.fn = SF_QNT; cmd.a = 5'd25; cmd.sf = 5'(-3);
    @(negedge clk); cmd.a = 5'd26; @(negedge clk); cmd = '0; @(negedge clk);
    chk("pipelined 1", o[25], q8(yv[25], -3));
    chk("pipelined 2", o[26], q8(yv[26], -3));
    // base subset B4 on a value that fits its dynamic range
    bsel = 3'd4; yv[27] = -500; y[27] = enc(-500);
    issue(SF_QNT, 27, -2); chk("QNT bsel=4", o[27], q8(-500, -2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
