// tb_accel_top -- end-to-end testbench of the whole accelerator at full size
// (16 TPAs x 32 PEs, full memories, no parameter overrides).
//
// The testbench loads nine mCore programs, the PWL table, an 8x16 input tile X
// in OP1MEM and an 8x32 weight tile W in OP2MEM (bit planes), then lets the
// cores run a matrix product O = Q(X^T W) twice:
//   pass 1: base subset B0 (all five moduli), 8-bit weights;
//   pass 2: after mCore-0 rewrites CTRL0, base subset B4 {5,7,32} and 4-bit
//           weights (the same words read back at 4-bit precision).
// In each pass mCore-1/-2 load X and W rows, the type-III cores 4-7 build
// the X scalars (core 5 through the border cache, which mCore-3 writes and reads),
// mCore-0 issues MAC per row and PPROC at the end. PPROC interrupts mCore-8,
// whose handler quantizes every PE's result (blocking PPU instructions),
// writes the 32 rows back with st_simd, runs a max reduction, applies a PWL
// activation and does half-precision, transposed and 2x2 pooled stores. While
// it stores, mCore-1 keeps reading the same OP1MEM half, so port-B conflicts
// stall mCore-8. The PWL table is loaded in the first cycles after reset,
// long before the first activation uses it. The stored words are read back
// through the host port and compared with a reference model written here;
// the reduction results are
// checked in the PPUs. Each mechanism (I-cache hit and miss, branch flush and
// predicted branch, forwarding, interrupt entry, blocking stall, port
// conflict stall, ld copy, border-cache write and read, precision and base-subset switch)
// is counted, and a mechanism that never happened is a failure. The run
// time of one pass is also checked against the cycle count the programs
// imply.
module tb_accel_top;
  import accel_pkg::*;
  import asm_pkg::*;

  localparam int K = 8, SF = -4, BASE = 'h100, NOUT = 36, DELAY = 150;
  localparam int LOOP1 = 3, PPROC1 = 14, DLY1 = 16, LOOP2 = 21, PPROC2 = 32, DLY2 = 34, HALT = 37;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we = 0, prog_nc = 0; logic [3:0] prog_core = 0; logic [15:0] prog_addr = 0;
  logic [31:0] prog_data = 0;
  logic pwl_we = 0; logic [2:0] pwl_f = 0; logic [3:0] pwl_i = 0;
  logic signed [11:0] pwl_a_in = 0, pwl_b_in = 0;
  logic h1_we = 0, h1_re = 0; logic [1:0] h1_bank = 0; logic [15:0] h1_addr = 0;
  logic [31:0] h1_wdata = 0, h1_rdata;
  logic h2_we = 0, h2_re = 0; logic [2:0] h2_bank = 0; logic [15:0] h2_addr = 0;
  logic [31:0] h2_wdata = 0, h2_rdata;
  logic [15:0] pc0, pc8;

  accel_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_ihit, n_imiss, n_flush, n_pred, n_fwd, n_intr, n_blk, n_bstall, n_cp, n_cwr, n_crd,
      n_bsel, n_prec, n_sts, n_mac;
  logic [2:0] bsel_q; logic [3:0] prec_q;
  always @(posedge clk) begin
    if (!rst_n) begin
      n_ihit <= 0; n_imiss <= 0; n_flush <= 0; n_pred <= 0; n_fwd <= 0; n_intr <= 0; n_blk <= 0;
      n_bstall <= 0; n_cp <= 0; n_cwr <= 0; n_crd <= 0; n_bsel <= 0; n_prec <= 0; n_sts <= 0; n_mac <= 0;
      bsel_q <= 0; prec_q <= 8;
    end else begin
      if (dut.g_core[0].u_core.u_if.fetch && dut.g_core[0].u_core.u_if.hit) n_ihit <= n_ihit + 1;
      if (dut.g_core[0].u_core.u_if.fetch && !dut.g_core[0].u_core.u_if.hit &&
          !dut.g_core[0].u_core.u_if.instr_valid) n_imiss <= n_imiss + 1;
      if (dut.ls0.flush && !dut.ls0.hold) n_flush <= n_flush + 1;
      if (dut.g_core[0].u_core.e_valid && dut.g_core[0].u_core.is_br && dut.g_core[0].u_core.taken &&
          dut.g_core[0].u_core.e_pred && !dut.ls0.hold) n_pred <= n_pred + 1;
      if (dut.g_core[2].u_core.e_valid && dut.g_core[2].u_core.w_we &&
          dut.g_core[2].u_core.w_wa == dut.g_core[2].u_core.e_dec.a1 &&
          dut.g_core[2].u_core.e_dec.op == OP_ADDI) n_fwd <= n_fwd + 1;
      if (dut.g_core[8].u_core.intr_ack[0]) n_intr <= n_intr + 1;
      if (dut.g_core[8].u_core.hold_int && dut.g_core[8].u_core.blk_pend) n_blk <= n_blk + 1;
      if (dut.stall8 && dut.wreq.valid) n_bstall <= n_bstall + 1;
      if (dut.dm[1].rd && dut.dm[1].cp) n_cp <= n_cp + 1;
      if (dut.dm[3].wr && dut.cache_en) n_cwr <= n_cwr + 1;
      if (dut.dm[3].rd && dut.cache_en) n_crd <= n_crd + 1;
      if (dut.wreq.valid && !dut.stall8) n_sts <= n_sts + 1;
      if (dut.mac_d) n_mac <= n_mac + 1;
      bsel_q <= dut.bsel; prec_q <= dut.wprec;
      if (dut.bsel != bsel_q) n_bsel <= n_bsel + 1;
      if (dut.wprec != prec_q) n_prec <= n_prec + 1;
    end
  end

  // reduction registers of every PPU
  logic signed [ZW-1:0] red [16];
  for (genvar t = 0; t < 16; t++) begin : g_red
    assign red[t] = dut.g_ppu[t].u_ppu.ppr[1];
  end

  // ------------------------------------------------------------ programs
  logic [31:0] prog [9][128];

  task automatic body(input int a);
    // one row k of the product, 11 instructions at a..a+10
    prog[1][a]   = LD(1, 15, 1);                 // X row k: M1[0..3], old M1 copied to M1[4..7]
    prog[2][a]   = LD(1, 15);                    // W row k: M2 bit planes
    prog[1][a+1] = R(OP_ADD, 1, 1, 3);           // {k,k} += {1,1}
    prog[2][a+1] = I(OP_ADDI, 1, 1, 1);
    prog[2][a+2] = I(OP_ADDI, 4, 1, 0);          // uses r1 straight from WB (forwarding)
    prog[4][a+2] = R(OP_ADD, 16, 0, 0, 0, 15, 0, 0);   // X[0] = M1[0]
    prog[6][a+2] = R(OP_ADD, 16, 2, 0, 0, 15, 0, 0);   // X[2] = M1[2]
    prog[7][a+2] = R(OP_ADD, 16, 3, 0, 0, 15, 0, 0);   // X[3] = M1[3]
    prog[3][a+3] = ST(0, 9, 1);                  // border cache <- M1[1]
    prog[3][a+4] = LD(0, 1);                     // M3[0] <- border cache
    prog[5][a+6] = R(OP_ADD, 16, 12, 0, 0, 15, 0, 0);  // X[1] = M3[0]
    prog[0][a+9] = SIMD(SF_MAC);
    prog[0][a+10] = BR(OP_BNZD, 2, 0, a);
  endtask

  task automatic build();
    int p;
    for (int c = 0; c < 9; c++) for (int i = 0; i < 128; i++) prog[c][i] = NOP();
    // master, cores 1-2 set-up
    prog[0][0] = I(OP_LDI, 2, 0, K - 1);
    prog[0][1] = I(OP_LDI, 8, 0, 16'h0008);      // CTRL0: 8-bit weights, base B0
    prog[1][0] = I(OP_LDID, 1, 0, 0);
    prog[1][1] = I(OP_LDID, 3, 0, 1);
    prog[2][0] = I(OP_LDI, 1, 0, 0);
    body(LOOP1);
    prog[0][PPROC1] = SIMD(SF_PPROC);
    prog[0][DLY1-1] = I(OP_LDI, 3, 0, DELAY);
    prog[1][DLY1]   = LD(5, 15);                  // keeps port A busy on the low half
    prog[0][DLY1+2] = BR(OP_BNZD, 3, 0, DLY1);
    prog[0][LOOP2-2] = I(OP_LDI, 8, 0, 16'h0084); // CTRL0: 4-bit weights, base B4
    prog[0][LOOP2-1] = I(OP_LDI, 2, 0, K - 1);
    prog[1][LOOP2-1] = I(OP_LDID, 1, 0, 0);
    prog[2][LOOP2-1] = I(OP_LDI, 1, 0, 0);
    body(LOOP2);
    prog[0][PPROC2] = SIMD(SF_PPROC);
    prog[0][DLY2-1] = I(OP_LDI, 3, 0, DELAY);
    prog[1][DLY2]   = LD(5, 15);
    prog[0][DLY2+2] = BR(OP_BNZD, 3, 0, DLY2);
    prog[0][HALT]   = BR(OP_B, 0, 0, HALT);
    // mCore-8: post-processing, woken by PPROC
    prog[8][0] = I(OP_LDI, 1, 0, BASE);
    prog[8][1] = I(OP_LDI, 2, 0, 1);
    prog[8][2] = INTREN(1);
    prog[8][3] = INTRA(0, 5);
    prog[8][4] = WAITI();
    prog[8][5] = I(OP_LDI, 3, 0, 2);
    prog[8][6] = SIMD(SF_SETR, 1, 0, -7);         // blocking, in a loop so it hits
    prog[8][7] = BR(OP_BNZD, 3, 0, 6);            // in the I-cache and really waits
    prog[8][8] = SIMD(SF_REDMAX, 0, 0, 0, 0, 1);
    p = 9;
    for (int j = 0; j < 32; j++) begin
      prog[8][p++] = SIMD(SF_QNT, 1, j, SF);
      prog[8][p++] = STS(1, 2, 0, j);
    end
    prog[8][p++] = SIMD(SF_REDDIS);
    prog[8][p++] = SIMD(SF_AFUNC, 1, 0, 0, int'(F_GELU));
    prog[8][p++] = STS(1, 2, 0, 0, 0, 1);         // half precision
    prog[8][p++] = STS(1, 2, 5, 8, 1);            // transposed
    prog[8][p++] = STS(1, 2, 0, 3, 0, 0, 1);      // 2x2 max pool
    prog[8][p++] = STS(1, 2, 0, 3, 0, 0, 2);      // 2x2 average pool
    prog[8][p++] = BR(OP_B, 0, 0, 4);
  endtask

  // ------------------------------------------------------------ data and model
  logic signed [7:0] X [16][K];
  logic signed [7:0] W [K][32];
  logic signed [11:0] pa [16], pb [16];
  logic signed [7:0] O [2][16][32];
  logic [31:0] expw [2][NOUT][4];
  logic [3:0]  expen [2][NOUT];

  function automatic int q8(input longint v, input int sh);
    longint r, d;
    if (sh >= 0) r = v * (longint'(1) << sh);
    else begin
      d = longint'(1) << -sh; r = v + d / 2;
      r = (r >= 0) ? r / d : -((-r + d - 1) / d);
    end
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  task automatic model();
    for (int ps = 0; ps < 2; ps++) begin
      logic signed [7:0] g [16];
      for (int t = 0; t < 16; t++)
        for (int p = 0; p < 32; p++) begin
          longint s = 0;
          for (int k = 0; k < K; k++) begin
            logic signed [7:0] w;
            w = W[k][p];
            if (ps == 1) w = {{4{w[3]}}, w[3:0]};
            s += longint'(X[t][k]) * longint'(w);
          end
          O[ps][t][p] = 8'(q8(s, SF));
        end
      for (int j = 0; j < 32; j++) begin
        expen[ps][j] = 4'hF;
        for (int b = 0; b < 4; b++) for (int q = 0; q < 4; q++) expw[ps][j][b][8*q +: 8] = O[ps][4*b+q][j];
      end
      for (int t = 0; t < 16; t++) begin
        int x, i;
        x = O[ps][t][0]; i = (x + 128) >> 4;
        g[t] = 8'(q8(longint'(pa[i]) * x + longint'(pb[i]) * 128, -7));
      end
      expen[ps][32] = 4'hF;
      for (int b = 0; b < 4; b++) for (int k = 0; k < 4; k++) begin
        expw[ps][32][b][4*k +: 4] = g[4*b+k][7:4];
        expw[ps][32][b][16+4*k +: 4] = O[ps][4*b+k][1][7:4];
      end
      expen[ps][33] = 4'b0010;
      for (int k = 0; k < 4; k++) expw[ps][33][1][8*k +: 8] = O[ps][5][8+k];
      for (int m = 0; m < 2; m++) begin
        expen[ps][34+m] = 4'b0001;
        for (int q = 0; q < 4; q++) begin
          int r0, c0, v [4], mx, s;
          r0 = 2*(q/2); c0 = 2*(q%2);
          v[0] = O[ps][4*r0+c0][3]; v[1] = O[ps][4*r0+c0+1][3];
          v[2] = O[ps][4*(r0+1)+c0][3]; v[3] = O[ps][4*(r0+1)+c0+1][3];
          mx = v[0]; s = 0;
          for (int i = 0; i < 4; i++) begin if (v[i] > mx) mx = v[i]; s += v[i]; end
          expw[ps][34+m][0][8*q +: 8] = (m == 0) ? 8'(mx) : 8'((s + 2) >>> 2);
        end
      end
    end
  endtask

  // ------------------------------------------------------------ run
  int t_pp1, t_pp2, cyc;
  always @(posedge clk) cyc <= rst_n ? cyc + 1 : 0;
  always @(posedge clk) if (rst_n && dut.pproc_d) begin
    if (t_pp1 == 0) t_pp1 <= cyc; else t_pp2 <= cyc;
  end

  initial begin
    t_pp1 = 0; t_pp2 = 0;
    for (int t = 0; t < 16; t++) for (int k = 0; k < K; k++) X[t][k] = 8'(int'($urandom % 8) - 4);
    for (int k = 0; k < K; k++) for (int p = 0; p < 32; p++) W[k][p] = 8'($urandom);
    for (int i = 0; i < 16; i++) begin
      pa[i] = 12'(int'($urandom % 256) - 128); pb[i] = 12'(int'($urandom % 64) - 32);
    end
    build();
    model();
    repeat (2) @(negedge clk);
    for (int c = 0; c < 9; c++) for (int i = 0; i < 128; i++) begin
      prog_we = 1; prog_core = 4'(c); prog_addr = 16'(i); prog_data = prog[c][i]; @(negedge clk);
    end
    prog_we = 0;
    for (int k = 0; k < K; k++) for (int b = 0; b < 4; b++) begin
      h1_we = 1; h1_bank = 2'(b); h1_addr = 16'(k);
      for (int q = 0; q < 4; q++) h1_wdata[8*q +: 8] = X[4*b+q][k];
      @(negedge clk);
    end
    h1_we = 0;
    for (int k = 0; k < K; k++) for (int b = 0; b < 8; b++) begin
      h2_we = 1; h2_bank = 3'(b); h2_addr = 16'(k);
      for (int p = 0; p < 32; p++) h2_wdata[p] = W[k][p][b];
      @(negedge clk);
    end
    h2_we = 0;
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      pwl_we = 1; pwl_f = 3'(F_GELU); pwl_i = 4'(i); pwl_a_in = pa[i]; pwl_b_in = pb[i]; @(negedge clk);
    end
    pwl_we = 0;
    wait (pc0 == 16'(HALT) && n_sts == 2 * NOUT);
    repeat (10) @(negedge clk);
    // read back both passes
    for (int ps = 0; ps < 2; ps++)
      for (int j = 0; j < NOUT; j++)
        for (int b = 0; b < 4; b++) if (expen[ps][j][b]) begin
          h1_re = 1; h1_bank = 2'(b); h1_addr = 16'(BASE + ps * NOUT + j); @(negedge clk);
          h1_re = 0;
          chk($sformatf("pass %0d word %0d bank %0d", ps + 1, j, b), h1_rdata, expw[ps][j][b]);
        end
    for (int t = 0; t < 16; t++) begin
      int mx; mx = -128;
      for (int j = 0; j < 32; j++) if (O[1][t][j] > mx) mx = O[1][t][j];
      chk($sformatf("REDMAX tpa %0d", t), 32'(int'(red[t])), 32'(mx));
    end
    // timing: a row costs 11 cycles once the loop branch is predicted, plus
    // one mispredicted first pass through the branch and the I-cache misses
    chk("MACs issued", 32'(n_mac), 2 * K);
    checks++;
    if (t_pp2 - t_pp1 > 3 * DELAY + 11 * K + 40 || t_pp2 - t_pp1 < 3 * DELAY + 11 * K) begin
      failures++; $display("FAIL pass period %0d cycles", t_pp2 - t_pp1);
    end
    $display("pass period %0d cycles", t_pp2 - t_pp1);
    $display("mech: ihit=%0d imiss=%0d flush=%0d pred=%0d fwd=%0d intr=%0d blk=%0d bstall=%0d cp=%0d cwr=%0d crd=%0d bsel=%0d prec=%0d sts=%0d",
             n_ihit, n_imiss, n_flush, n_pred, n_fwd, n_intr, n_blk, n_bstall, n_cp, n_cwr, n_crd, n_bsel, n_prec, n_sts);
    chk("mech I-cache hit", 32'(n_ihit > 0), 1);
    chk("mech I-cache miss", 32'(n_imiss > 0), 1);
    chk("mech mispredict flush", 32'(n_flush > 0), 1);
    chk("mech predicted branch", 32'(n_pred > 0), 1);
    chk("mech forwarding", 32'(n_fwd > 0), 1);
    chk("mech interrupt", 32'(n_intr), 2);
    chk("mech blocking stall", 32'(n_blk > 0), 1);
    chk("mech port-B stall", 32'(n_bstall > 0), 1);
    chk("mech ld copy", 32'(n_cp > 0), 1);
    chk("mech cache write", 32'(n_cwr > 0), 1);
    chk("mech cache read", 32'(n_crd > 0), 1);
    chk("mech base subset switch", 32'(n_bsel), 1);
    chk("mech precision switch", 32'(n_prec), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("watchdog: pc0=%0d pc8=%0d sts=%0d", pc0, pc8, n_sts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
