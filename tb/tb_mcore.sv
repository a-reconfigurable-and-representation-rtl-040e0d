// tb_mcore -- self-checking testbench of a type-I mCore.
//
// Loads a short program through the programming port and checks, through the
// shared-register write port, the results of a bnzd loop (taken/not-taken
// prediction and flush), byte pre-shift/masking with EX forwarding, subi/addic
// on the zero flag, ldid, add_hpl nibble expansion, SIMD issue, the blocking
// flag against ext_busy, and interrupt entry through wait/intra/intr_en.
// Expected values are worked out by hand from the ISA semantics.
module tb_mcore;
  import accel_pkg::*;
  import asm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        prog_we = 0, prog_nc = 0;
  logic [15:0] prog_addr = 0;
  logic [31:0] prog_data = 0;
  lockstep_t   ls_in, ls_out;
  logic [31:0] sh_rdata [32];
  logic        sh_we;
  logic [4:0]  sh_waddr;
  logic [31:0] sh_wdata;
  dmem_req_t   dmem;
  simd_cmd_t   simd;
  stsimd_req_t stsimd;
  logic        ext_busy = 0;
  logic [2:0]  intr_req = 0, intr_ack;

  mcore #(.CTYPE(1), .NLOCAL(8)) dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .prog_nc,
    .ls_in, .ls_out, .sh_rdata, .sh_we, .sh_waddr, .sh_wdata,
    .dmem, .simd, .stsimd, .ext_busy, .ext_stall(1'b0), .intr_req, .intr_ack
  );

  assign ls_in = '0;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] got [32];
  int          when [32];
  int          nsimd = 0, simd_cyc [4], acks = 0;

  always_comb for (int a = 0; a < 32; a++) sh_rdata[a] = (a == 10) ? 32'd1000 : 32'd0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && sh_we) begin got[sh_waddr] <= sh_wdata; when[sh_waddr] <= cyc; end
    if (rst_n && simd.valid) begin simd_cyc[nsimd % 4] <= cyc; nsimd <= nsimd + 1; end
    if (intr_ack[0]) acks <= acks + 1;
  end

  task automatic chk(input string what, input logic [31:0] g, input logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s: got %0h exp %0h", what, g, e); end
  endtask

  logic [31:0] prog [32];
  initial begin
    for (int i = 0; i < 32; i++) begin prog[i] = NOP(); got[i] = '0; end
    prog[0]  = I(OP_LDI, 1, 0, 5);
    prog[1]  = I(OP_LDI, 2, 0, 0);
    prog[2]  = I(OP_ADDI, 2, 2, 3);
    prog[3]  = R(OP_ADD, 6, 2, 6);                       // needs r2 from WB (forwarding)
    prog[4]  = BR(OP_BNZD, 1, 0, 2);
    prog[5]  = I(OP_LDID, 3, 0, 16'h1234);
    prog[6]  = R(OP_ADD, 4, 3, 2, 1, 4'b0001, 0, 15);   // 0x12 + 18
    prog[7]  = I(OP_SUBI, 5, 4, 36);                     // zero -> zf
    prog[8]  = I(OP_ADDIC, 16, 4, 100);                  // 136
    prog[9]  = R(OP_ADDHPL, 17, 3, 0, 0, 15, 0, 0);      // 0x01020304
    prog[10] = R(OP_ADD, 9, 4, 10);                      // 36 + 1000
    prog[11] = R(OP_ADD, 18, 2, 1);                      // r2 + r1 = 18 + 0
    prog[12] = SIMD(SF_MAC);
    prog[13] = SIMD(SF_QNT, 1);                          // blocking
    prog[14] = I(OP_LDI, 19, 0, 7);                      // waits for ext_busy
    prog[15] = INTREN(1);
    prog[16] = INTRA(0, 19);
    prog[17] = WAITI();
    prog[18] = I(OP_LDI, 20, 0, 99);                     // must be skipped
    prog[19] = I(OP_LDI, 21, 0, 77);                     // ISR
    prog[20] = R(OP_ADD, 22, 6, 0, 0, 15, 0, 0);         // r6 out
    prog[21] = BR(OP_B, 0, 0, 21);
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      prog_we = 1; prog_addr = 16'(i); prog_data = prog[i]; @(negedge clk);
    end
    prog_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // blocking: keep the PPU busy for 6 cycles after the second SIMD issue
    wait (nsimd == 2);
    ext_busy = 1; repeat (6) @(negedge clk); ext_busy = 0;
    repeat (20) @(negedge clk);
    intr_req = 3'b001; @(negedge clk); intr_req = 0;
    repeat (20) @(negedge clk);
    chk("bnzd loop sum", got[18], 32'd18);
    chk("masked byte add", got[9], 32'd1036);
    chk("addic on zf", got[16], 32'd136);
    chk("add_hpl", got[17], 32'h01020304);
    chk("simd issued", 32'(nsimd), 32'd2);
    chk("blocking hold", 32'(when[19] - simd_cyc[1] >= 6), 32'd1);
    chk("ldi after blocking", got[19], 32'd7);
    chk("isr reached", got[21], 32'd77);
    chk("wait skipped next", got[20], 32'd0);
    chk("intr ack", 32'(acks), 32'd1);
    chk("dependent chain in loop", got[22], 32'd63);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
