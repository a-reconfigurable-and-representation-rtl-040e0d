// accel_top -- the reference instantiation of the ISA-programmed DNN accelerator
// in its RNS form.
//
// Nine mCores run cooperating programs. mCore-0 (type I) holds the control
// flow of a layer and issues mac/pproc to the 16 tensor processing arrays.
// mCore-1, -2, -3 (type II) follow mCore-0's PC in lockstep and generate the
// addresses of the three input data streams: OP1MEM -> TPAs (activations),
// OP2MEM -> TPAs (weights) and OP1CACHE -> TPAs (border cache). mCore-4..7
// (type III) follow the same PC one cycle later and form the scalar operands
// from the OP1MEM, auxiliary and cache registers into X0..X3. mCore-8 (type I)
// runs the decoupled post-processing program: it waits for the pproc interrupt,
// drives the 16 PPUs, reads OP1MEM for PPU parameters and stores results with
// st_simd through the write-back unit into OP1MEM or OP2MEM.
//
// Datapath: TPA t takes byte t%4 of X[t/4] as its scalar and the 32 packed
// OP2MEM weights as its vector operand. Both pass the FXP-to-RNS conversion
// register (one cycle), and the mac/pproc commands are delayed by the same
// register. Each TPA accumulates in RNS over the base subset selected in
// CTRL; pproc moves Z to Y and interrupts mCore-8; the TPA's PPU converts one
// Y entry at a time back to binary and writes the 8-bit output file O.
//
// Register address spaces (5-bit, local file first, shared after it):
//   mCore-0: L0 0-7, CTRL 8-11        mCore-1: L1 0-7, M1 8-15, S1 16-19
//   mCore-2: L2 0-7, M2 8-15           mCore-3: L3 0-3, M3 4-7, M1 8-15
//   mCore-4..7: M1 0-7, S1 8-11, M3 12-15, X(own) 16
//   mCore-8: L8 0-7, MB (OP1MEM port-B registers) 8-11
// The type-III map and the sizes of L/M/S/CTRL follow the paper's tables; the
// rest of the placement is this design's.
//
// External interface (none of it is specified by the paper): a programming
// port for the I-MEMs (prog_core selects the core 0..8), a port that fills
// the shared PWL coefficient table, host ports that load and read OP1MEM and
// OP2MEM, and the PCs of the two master cores for observation.
module accel_top
  import accel_pkg::*;
#(
  parameter int NTPA       = 16,
  parameter int NPE        = 32,
  parameter int OP1_WORDS  = 8192,
  parameter int OP2_WORDS  = 6144,
  parameter int OPC_WORDS  = 512,
  parameter int IMEM_WORDS = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  // program loading
  input  logic        prog_we,
  input  logic [3:0]  prog_core,
  input  logic [15:0] prog_addr,
  input  logic [31:0] prog_data,
  input  logic        prog_nc,
  // PWL coefficient table
  input  logic        pwl_we,
  input  logic [2:0]  pwl_f,
  input  logic [3:0]  pwl_i,
  input  logic signed [11:0] pwl_a_in,
  input  logic signed [11:0] pwl_b_in,
  // host access to OP1MEM and OP2MEM
  input  logic        h1_we,
  input  logic        h1_re,
  input  logic [1:0]  h1_bank,
  input  logic [15:0] h1_addr,
  input  logic [31:0] h1_wdata,
  output logic [31:0] h1_rdata,
  input  logic        h2_we,
  input  logic        h2_re,
  input  logic [2:0]  h2_bank,
  input  logic [15:0] h2_addr,
  input  logic [31:0] h2_wdata,
  output logic [31:0] h2_rdata,
  // observation
  output logic [15:0] pc0,
  output logic [15:0] pc8
);
  // ------------------------------------------------------------ shared state
  logic [31:0] m1 [8], m2 [8], m3 [4], mb [4];
  logic [31:0] s1 [4], xr [4];
  logic [15:0] ctrl [4];
  logic [3:0]  wprec;
  logic [2:0]  bsel;
  logic [15:0] tpa_en, pad;
  logic        act_hp, out_hp, cache_en;

  lockstep_t   ls0, ls0_d, ls_unused [9];
  logic [31:0] shr [9][32];
  logic        sh_we [9];
  logic [4:0]  sh_wa [9];
  logic [31:0] sh_wd [9];
  dmem_req_t   dm [9];
  simd_cmd_t   sc [9];
  stsimd_req_t ss [9];
  logic [2:0]  ack [9];
  logic        stall8, busy8;
  logic        pproc_d, mac_d;

  // ------------------------------------------------------------ mCores
  // register address spaces
  always_comb begin
    for (int c = 0; c < 9; c++) for (int a = 0; a < 32; a++) shr[c][a] = '0;
    for (int a = 0; a < 4; a++) shr[0][8+a]  = {16'h0, ctrl[a]};
    for (int a = 0; a < 8; a++) shr[1][8+a]  = m1[a];
    for (int a = 0; a < 4; a++) shr[1][16+a] = s1[a];
    for (int a = 0; a < 8; a++) shr[2][8+a]  = m2[a];
    for (int a = 0; a < 4; a++) shr[3][4+a]  = m3[a];
    for (int a = 0; a < 8; a++) shr[3][8+a]  = m1[a];
    for (int c = 4; c < 8; c++) begin
      for (int a = 0; a < 8; a++) shr[c][a]    = m1[a];
      for (int a = 0; a < 4; a++) shr[c][8+a]  = s1[a];
      for (int a = 0; a < 4; a++) shr[c][12+a] = m3[a];
      shr[c][16] = xr[c-4];
    end
    for (int a = 0; a < 4; a++) shr[8][8+a] = mb[a];
  end

  // type-III cores issue one cycle after the master
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ls0_d <= '0;
    else        ls0_d <= ls0;
  end

  localparam int CT [9] = '{1, 2, 2, 2, 3, 3, 3, 3, 1};
  localparam int NL [9] = '{8, 8, 8, 4, 0, 0, 0, 0, 8};

  for (genvar c = 0; c < 9; c++) begin : g_core
    lockstep_t lsi;
    lockstep_t lso;
    assign lsi = (c >= 4 && c <= 7) ? ls0_d : ls0;
    mcore #(.CTYPE(CT[c]), .NLOCAL(NL[c]), .IMEM_WORDS(IMEM_WORDS)) u_core (
      .clk, .rst_n,
      .prog_we(prog_we && prog_core == 4'(c)), .prog_addr, .prog_data, .prog_nc,
      .ls_in(lsi), .ls_out(lso),
      .sh_rdata(shr[c]), .sh_we(sh_we[c]), .sh_waddr(sh_wa[c]), .sh_wdata(sh_wd[c]),
      .dmem(dm[c]), .simd(sc[c]), .stsimd(ss[c]),
      .ext_busy(c == 8 ? busy8 : 1'b0),
      .ext_stall(c == 8 ? stall8 : 1'b0),
      .intr_req(c == 8 ? {2'b00, pproc_d} : 3'b000),
      .intr_ack(ack[c])
    );
    if (c == 0) begin : g_ls
      assign ls0 = lso;
    end
    assign ls_unused[c] = lso;
  end

  assign pc0 = ls0.pc;
  assign pc8 = ls_unused[8].pc;

  // ------------------------------------------------------------ shared registers
  ctrl_rf u_ctrl (
    .clk, .rst_n,
    .we(sh_we[0] && sh_wa[0] >= 5'd8 && sh_wa[0] <= 5'd11),
    .waddr(sh_wa[0][1:0]), .wdata(sh_wd[0][15:0]),
    .regs(ctrl), .wprec, .act_hp, .bsel, .out_hp, .pad, .tpa_en, .cache_en
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) begin s1[i] <= '0; xr[i] <= '0; end
    end else begin
      if (sh_we[1] && sh_wa[1] >= 5'd16 && sh_wa[1] <= 5'd19) s1[sh_wa[1][1:0]] <= sh_wd[1];
      for (int c = 4; c < 8; c++)
        if (sh_we[c] && sh_wa[c] == 5'd16) xr[c-4] <= sh_wd[c];
    end
  end

  // ------------------------------------------------------------ memories
  stsimd_req_t   wreq;
  logic signed [7:0] o_all [NTPA][NPE];
  logic [3:0]    wb1_we, wb2_we;
  logic [15:0]   wb1_addr, wb2_addr;
  logic [31:0]   wb1_data [4], wb2_data [4];
  logic          wb2_hi;
  logic [3:0]    b_we;
  logic [15:0]   b_waddr [4];
  logic [31:0]   b_wdata [4];
  logic          b_stall, w2_stall;
  logic signed [7:0] iv8 [NPE];
  logic signed [7:0] iv32 [32];

  assign wreq = ss[8];

  wb_unit #(.NTPA(NTPA), .NPE(NPE)) u_wb (
    .req(wreq), .o(o_all),
    .op1_we(wb1_we), .op1_addr(wb1_addr), .op1_data(wb1_data),
    .op2_we(wb2_we), .op2_hi(wb2_hi), .op2_addr(wb2_addr), .op2_data(wb2_data)
  );

  // port B of OP1MEM: st_simd words or a local st of mCore-8
  always_comb begin
    b_we = wb1_we | (dm[8].wr ? dm[8].ben : 4'b0);
    for (int i = 0; i < 4; i++) begin
      b_waddr[i] = wreq.valid ? wb1_addr : dm[8].addr[15:0];
      b_wdata[i] = wreq.valid ? wb1_data[i] : dm[8].wdata;
    end
  end

  op1mem #(.WORDS_PER_BANK(OP1_WORDS)) u_op1 (
    .clk, .rst_n,
    .a_rd(dm[1].rd), .a_cp(dm[1].cp), .a_ben(dm[1].ben), .a_addr(dm[1].addr),
    .b_rd(dm[8].rd), .b_ben(dm[8].ben), .b_addr(dm[8].addr),
    .b_we, .b_waddr, .b_wdata, .b_stall,
    .h_we(h1_we), .h_re(h1_re), .h_bank(h1_bank), .h_addr(h1_addr), .h_wdata(h1_wdata),
    .h_rdata(h1_rdata),
    .m1, .mb
  );

  op2mem #(.WORDS_PER_BANK(OP2_WORDS)) u_op2 (
    .clk, .rst_n, .prec(wprec),
    .a_rd(dm[2].rd), .a_addr(dm[2].addr),
    .w_en(wb2_we), .w_hi(wb2_hi), .w_addr(wb2_addr), .w_data(wb2_data), .w_stall(w2_stall),
    .h_we(h2_we), .h_re(h2_re), .h_bank(h2_bank), .h_addr(h2_addr), .h_wdata(h2_wdata),
    .h_rdata(h2_rdata),
    .m2, .iv(iv32)
  );

  op1cache #(.WORDS_PER_BANK(OPC_WORDS)) u_opc (
    .clk, .rst_n,
    .rd(dm[3].rd && cache_en), .wr(dm[3].wr && cache_en), .ben(dm[3].ben),
    .addr(dm[3].addr), .wdata(dm[3].wdata), .m3
  );

  assign stall8 = b_stall || w2_stall;

  // ------------------------------------------------------------ conversion + TPAs
  logic signed [7:0] cin  [NPE + NTPA];
  logic [ZW-1:0]     cout [NPE + NTPA];
  logic [ZW-1:0]     iv_r [NPE];
  logic [ZW-1:0]     z_all [NTPA][NPE];
  logic [ZW-1:0]     y_all [NTPA][NPE];

  always_comb begin
    for (int p = 0; p < NPE; p++) iv8[p] = iv32[p % 32];
    for (int p = 0; p < NPE; p++) cin[p] = iv8[p];
    for (int t = 0; t < NTPA; t++) cin[NPE+t] = xr[(t / 4) % 4][8*(t % 4) +: 8];
    for (int p = 0; p < NPE; p++) iv_r[p] = cout[p];
  end

  fxp_to_rns #(.N(NPE + NTPA)) u_conv (.clk, .rst_n, .x(cin), .r(cout));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_d <= 1'b0; pproc_d <= 1'b0;
    end else begin
      mac_d   <= sc[0].valid && sc[0].fn == SF_MAC;
      pproc_d <= sc[0].valid && sc[0].fn == SF_PPROC;
    end
  end

  for (genvar t = 0; t < NTPA; t++) begin : g_tpa
    tpa #(.NPE(NPE)) u_tpa (
      .clk, .rst_n, .en(tpa_en[t % 16]), .mac(mac_d), .pproc(pproc_d),
      .chan_en(base_mask(bsel)), .is(cout[NPE+t]), .iv(iv_r),
      .z(z_all[t]), .y(y_all[t])
    );
  end

  // ------------------------------------------------------------ PPUs
  logic signed [11:0] pwl_a [8][16];
  logic signed [11:0] pwl_b [8][16];
  logic [NTPA-1:0]    pbusy;
  logic signed [ZW-1:0] ppr_all [NTPA][4];
  simd_cmd_t          pcmd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < 8; f++) for (int i = 0; i < 16; i++) begin
        pwl_a[f][i] <= '0; pwl_b[f][i] <= '0;
      end
    end else if (pwl_we) begin
      pwl_a[pwl_f][pwl_i] <= pwl_a_in;
      pwl_b[pwl_f][pwl_i] <= pwl_b_in;
    end
  end

  assign pcmd = sc[8];

  for (genvar t = 0; t < NTPA; t++) begin : g_ppu
    ppu #(.NPE(NPE), .NINT(16), .CW(12)) u_ppu (
      .clk, .rst_n, .cmd(pcmd), .bsel, .y(y_all[t]),
      .mem(mb[(t / 4) % 4][8*(t % 4) +: 8]),
      .pwl_a, .pwl_b, .o(o_all[t]), .ppr(ppr_all[t]), .busy(pbusy[t])
    );
  end

  assign busy8 = |pbusy;

  // ------------------------------------------------------------ rules
  // only mCore-0 drives the TPAs and only mCore-8 the PPUs
  a_no_ppu_from_mc0: assert property (@(posedge clk) disable iff (!rst_n)
    sc[0].valid |-> sc[0].fn inside {SF_MAC, SF_PPROC});
  a_no_tpa_from_mc8: assert property (@(posedge clk) disable iff (!rst_n)
    sc[8].valid |-> !(sc[8].fn inside {SF_MAC, SF_PPROC}));

endmodule
