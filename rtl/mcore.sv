// mcore -- lightweight programmable control core (mCore), types I, II and III.
//
// A four-stage pipeline, IF / DEC / EX / WB, as in the paper's type-I block
// diagram. IF fetches from I-MEM through the I-cache (mcore_ifetch). DEC
// unpacks the 32-bit instruction and reads up to three registers of the
// 32-entry register address space: addresses below NLOCAL are the core's own
// local register file, the rest are shared registers (memory output registers,
// auxiliary registers, CTRL, X) that live outside the core and arrive on
// sh_rdata. EX runs the ALU (add/sub/logic with byte pre-shift and masking,
// add_hpl/add_hph nibble expansion, immediates, conditional addic on the zero
// flag), resolves branches, and issues D-MEM, SIMD and st_simd requests. WB
// writes the result to the local file or out on sh_we/sh_waddr/sh_wdata.
// A result in WB is forwarded to the instruction in EX and written through
// to the register read in DEC, so back-to-back dependent ALU instructions run
// without stalls. Loads have no interlock: a memory register is valid two
// cycles after the ld leaves EX, as the paper states.
//
// CTYPE=1 (master): owns the PC, branch unit, interrupts and SIMD issue, and
// broadcasts its fetch PC, cache hit and stall/flush on ls_out. A one-entry
// branch target buffer predicts the last taken branch, so a loop closing
// branch costs no bubble once trained; a misprediction flushes IF and DEC.
// CTYPE=2 (memory control) and CTYPE=3 (arithmetic) have no PC of their own:
// they follow ls_in and run their own program in lockstep with the master.
// Type-II issues loads/stores and arithmetic, type-III arithmetic only.
//
// Interrupts: intr_en sets a 3-bit mask, intra sets a vector per line.
// Requests are latched as pending; a 'wait' instruction holds EX until an
// enabled request is pending, then jumps to its vector and pulses intr_ack.
// (The paper's ISA has no return instruction, so an ISR ends with a branch.)
// A SIMD instruction with the blocking flag makes the next instruction wait
// in EX until ext_busy falls. ext_stall holds EX (memory port conflict).
//
// The pipeline, forwarding, register address space, lockstep PC and one-cycle
// miss follow the paper; the field encoding, the BTB form of branch
// prediction and the wait-based interrupt entry are this design's choices.
module mcore
  import accel_pkg::*;
#(
  parameter int CTYPE      = 1,
  parameter int NLOCAL     = 8,
  parameter int IMEM_WORDS = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        prog_we,
  input  logic [15:0] prog_addr,
  input  logic [31:0] prog_data,
  input  logic        prog_nc,
  input  lockstep_t   ls_in,
  output lockstep_t   ls_out,
  input  logic [31:0] sh_rdata [32],
  output logic        sh_we,
  output logic [4:0]  sh_waddr,
  output logic [31:0] sh_wdata,
  output dmem_req_t   dmem,
  output simd_cmd_t   simd,
  output stsimd_req_t stsimd,
  input  logic        ext_busy,
  input  logic        ext_stall,
  input  logic [2:0]  intr_req,
  output logic [2:0]  intr_ack
);
  localparam bit MASTER = (CTYPE == 1);

  // ---------------------------------------------------------------- IF
  logic [15:0] pc_f;
  logic        fetch, hit, nocache, ivalid;
  logic [31:0] instr_f;
  logic        hold, hold_int, flush;
  logic [15:0] redirect;
  logic        btb_v;
  logic [15:0] btb_pc, btb_tgt;
  wire         pred_f = MASTER && btb_v && (btb_pc == pc_f);

  assign fetch = MASTER ? (!hold && !flush) : ls_in.fetch;

  mcore_ifetch #(.IMEM_WORDS(IMEM_WORDS), .ICACHE_LINES(16), .HAS_TAGS(MASTER)) u_if (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .prog_nc,
    .pc(MASTER ? pc_f : ls_in.pc), .fetch,
    .ext_hit(ls_in.hit), .ext_nocache(ls_in.nocache),
    .instr(instr_f), .instr_valid(ivalid), .hit, .nocache
  );

  always_comb begin
    ls_out.pc      = pc_f;
    ls_out.fetch   = fetch;
    ls_out.hit     = hit;
    ls_out.nocache = nocache;
    ls_out.hold    = hold;
    ls_out.flush   = flush;
  end

  // ---------------------------------------------------------------- DEC
  logic        d_valid, d_pred;
  logic [31:0] d_ins;
  logic [15:0] d_pc;

  typedef struct packed {
    opcode_e     op;
    logic [4:0]  a1, a2, a3;   // register read addresses
    logic [4:0]  wa;           // write address
    logic        we;
  } dec_t;

  function automatic dec_t decode(input logic [31:0] ins);
    dec_t r;
    r.op = opcode_e'(ins[31:27]);
    r.a1 = ins[21:17]; r.a2 = ins[16:12]; r.a3 = ins[26:22];
    r.wa = ins[26:22]; r.we = 1'b0;
    case (r.op)
      OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ADDHPL, OP_ADDHPH,
      OP_ADDI, OP_SUBI, OP_ADDIC, OP_LDI, OP_LDID: r.we = 1'b1;
      OP_BNE:  begin r.a1 = ins[26:22]; r.a2 = ins[21:17]; end
      OP_BNZD: begin r.a1 = ins[26:22]; r.we = 1'b1; end
      OP_LD:   begin r.a3 = ins[26:22]; r.a1 = ins[16:12]; r.a2 = ins[11:7];
                     r.wa = ins[21:17]; r.we = ins[1]; end
      OP_ST:   begin r.a1 = ins[26:22]; r.a2 = ins[16:12]; r.a3 = ins[21:17];
                     r.we = ins[7]; end
      OP_STSIMD: begin r.a1 = ins[26:22]; r.a2 = ins[21:17]; r.we = 1'b1; end
      default: ;
    endcase
    // type-III runs arithmetic only, type-II has no branch/SIMD/interrupts
    if (CTYPE == 3 && r.op inside {OP_LD, OP_ST, OP_STSIMD, OP_BNZD}) r.we = 1'b0;
    if (CTYPE == 2 && r.op inside {OP_BNZD, OP_STSIMD}) r.we = 1'b0;
    return r;
  endfunction

  // ---------------------------------------------------------------- RF
  logic [31:0] lrf [NLOCAL > 0 ? NLOCAL : 1];
  logic        w_we;
  logic [4:0]  w_wa;
  logic [31:0] w_res;

  function automatic logic [31:0] rf_read(input logic [4:0] a);
    if (w_we && w_wa == a) return w_res;
    if (int'(a) < NLOCAL)  return lrf[a];
    return sh_rdata[a];
  endfunction

  dec_t d_dec;
  assign d_dec = decode(d_ins);

  // ---------------------------------------------------------------- EX
  logic        e_valid, e_pred;
  logic [31:0] e_ins;
  logic [15:0] e_pc;
  dec_t        e_dec;
  logic [31:0] e_v1, e_v2, e_v3;
  logic        zf, nf;
  logic [2:0]  imask, ipend;
  logic [15:0] ivec [3];
  logic        blk_pend;

  wire [31:0] v1 = (w_we && w_wa == e_dec.a1) ? w_res : e_v1;
  wire [31:0] v2 = (w_we && w_wa == e_dec.a2) ? w_res : e_v2;
  wire [31:0] v3 = (w_we && w_wa == e_dec.a3) ? w_res : e_v3;
  wire [31:0] imm_s = {{16{e_ins[15]}}, e_ins[15:0]};
  wire [31:0] imm_z = {16'h0, e_ins[15:0]};

  logic [31:0] alu_res, opa, opb;
  logic        taken, upd_flags, is_br;
  logic [15:0] br_tgt;
  logic        do_wait, wait_go;
  logic [1:0]  wait_line;

  always_comb begin
    opa = (v1 >> (8 * e_ins[11:10])) & bytemask(e_ins[9:6]);
    opb = (v2 >> (8 * e_ins[5:4]))   & bytemask(e_ins[3:0]);
    alu_res   = '0;
    upd_flags = 1'b0;
    taken     = 1'b0;
    is_br     = 1'b0;
    br_tgt    = e_ins[15:0];
    case (e_dec.op)
      OP_ADD:    begin alu_res = opa + opb; upd_flags = 1'b1; end
      OP_SUB:    begin alu_res = opa - opb; upd_flags = 1'b1; end
      OP_AND:    begin alu_res = opa & opb; upd_flags = 1'b1; end
      OP_OR:     begin alu_res = opa | opb; upd_flags = 1'b1; end
      OP_XOR:    begin alu_res = opa ^ opb; upd_flags = 1'b1; end
      OP_ADDHPL: alu_res = nib_expand(v1[15:0])  + opb;
      OP_ADDHPH: alu_res = nib_expand(v1[31:16]) + opb;
      OP_ADDI:   begin alu_res = v1 + imm_s; upd_flags = 1'b1; end
      OP_SUBI:   begin alu_res = v1 - imm_s; upd_flags = 1'b1; end
      OP_ADDIC:  alu_res = zf ? v1 + imm_s : v1;
      OP_LDI:    alu_res = imm_z;
      OP_LDID:   alu_res = {e_ins[15:0], e_ins[15:0]};
      OP_LD:     alu_res = v1 + v2;
      OP_ST:     alu_res = v1 + v2;
      OP_STSIMD: alu_res = v1 + v2;
      OP_B:      begin is_br = MASTER; taken = MASTER; end
      OP_BNE:    begin is_br = MASTER; taken = MASTER && (v1 != v2); end
      OP_BNZD:   begin is_br = MASTER; taken = MASTER && (v1 != 32'd0); alu_res = v1 - 32'd1; end
      default: ;
    endcase
  end

  // wait / interrupt entry
  always_comb begin
    do_wait   = MASTER && e_valid && e_dec.op == OP_WAIT;
    wait_go   = do_wait && |(ipend & imask);
    wait_line = (ipend[0] & imask[0]) ? 2'd0 : (ipend[1] & imask[1]) ? 2'd1 : 2'd2;
  end

  assign hold_int = MASTER ? ((do_wait && !wait_go) || (e_valid && blk_pend && ext_busy)) : 1'b0;
  assign hold     = MASTER ? (hold_int || ext_stall) : ls_in.hold;

  wire mispred = is_br && e_valid && (taken != e_pred);
  always_comb begin
    flush    = MASTER ? (!hold && ((e_valid && mispred) || wait_go)) : ls_in.flush;
    redirect = wait_go ? ivec[wait_line] : (taken ? br_tgt : e_pc + 16'd1);
  end

  // requests issued from EX
  wire e_go = e_valid && (MASTER ? !hold_int : !hold);
  always_comb begin
    dmem       = '0;
    dmem.rd    = (CTYPE != 3) && e_go && e_dec.op == OP_LD;
    dmem.wr    = (CTYPE != 3) && e_go && e_dec.op == OP_ST;
    dmem.cp    = e_ins[2] && e_dec.op == OP_LD;
    dmem.ben   = (e_dec.op == OP_LD) ? e_ins[6:3] : e_ins[11:8];
    dmem.addr  = (e_dec.op == OP_LD) ? v3 : v1;
    dmem.wdata = v3;
    simd       = decode_simd(e_ins, MASTER && e_go && e_dec.op == OP_SIMD && !ext_stall);
    stsimd.valid = MASTER && e_go && e_dec.op == OP_STSIMD;
    stsimd.addr  = v1;
    stsimd.tpa   = e_ins[16:13];
    stsimd.pe    = e_ins[12:8];
    stsimd.tr    = e_ins[7];
    stsimd.hp    = e_ins[6];
    stsimd.pool  = e_ins[5:4];
  end

  // ---------------------------------------------------------------- sequential
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_f <= '0;
      d_valid <= 1'b0; d_ins <= '0; d_pc <= '0; d_pred <= 1'b0;
      e_valid <= 1'b0; e_ins <= '0; e_pc <= '0; e_pred <= 1'b0;
      e_dec <= '0; e_v1 <= '0; e_v2 <= '0; e_v3 <= '0;
      w_we <= 1'b0; w_wa <= '0; w_res <= '0;
      zf <= 1'b0; nf <= 1'b0;
      btb_v <= 1'b0; btb_pc <= '0; btb_tgt <= '0;
      imask <= '0; ipend <= '0; intr_ack <= '0;
      ivec[0] <= '0; ivec[1] <= '0; ivec[2] <= '0;
      blk_pend <= 1'b0;
      for (int i = 0; i < (NLOCAL > 0 ? NLOCAL : 1); i++) lrf[i] <= '0;
    end else begin
      // write back
      if (w_we && int'(w_wa) < NLOCAL) lrf[w_wa] <= w_res;
      // PC
      if (MASTER) begin
        if (flush)       pc_f <= redirect;
        else if (!hold && ivalid) pc_f <= pred_f ? btb_tgt : pc_f + 16'd1;
      end
      // interrupt latch
      intr_ack <= '0;
      ipend <= ipend | intr_req;
      if (wait_go && !hold) begin
        ipend[wait_line]    <= 1'b0;
        intr_ack[wait_line] <= 1'b1;
      end
      if (MASTER && blk_pend && !ext_busy) blk_pend <= 1'b0;
      if (simd.valid && simd.blocking) blk_pend <= 1'b1;
      if (hold) begin
        w_we <= 1'b0;
        e_v1 <= v1; e_v2 <= v2; e_v3 <= v3;   // keep forwarded operands
      end else begin
        // EX -> WB
        w_we  <= e_valid && e_dec.we && !(e_dec.op == OP_BNZD && v1 == 32'd0);
        w_wa  <= e_dec.wa;
        w_res <= alu_res;
        if (e_valid && upd_flags) begin
          zf <= (alu_res == 32'd0);
          nf <= alu_res[31];
        end
        if (MASTER && e_valid && is_br && taken) begin
          btb_v <= 1'b1; btb_pc <= e_pc; btb_tgt <= br_tgt;
        end
        if (MASTER && e_valid && e_dec.op == OP_INTREN) imask <= e_ins[2:0];
        if (MASTER && e_valid && e_dec.op == OP_INTRA && e_ins[23:22] != 2'd3)
          ivec[e_ins[23:22]] <= e_ins[15:0];
        // DEC -> EX
        e_valid <= d_valid && !flush;
        e_ins   <= d_ins;
        e_pc    <= d_pc;
        e_pred  <= d_pred;
        e_dec   <= d_dec;
        e_v1    <= rf_read(d_dec.a1);
        e_v2    <= rf_read(d_dec.a2);
        e_v3    <= rf_read(d_dec.a3);
        // IF -> DEC
        d_valid <= ivalid && !flush;
        d_ins   <= instr_f;
        d_pc    <= MASTER ? pc_f : ls_in.pc;
        d_pred  <= pred_f;
      end
      if (prog_we) btb_v <= 1'b0;
    end
  end

  assign sh_we    = w_we && int'(w_wa) >= NLOCAL;
  assign sh_waddr = w_wa;
  assign sh_wdata = w_res;

  // type-III cores must never be handed memory or SIMD instructions
  a_t3_arith: assert property (@(posedge clk) disable iff (!rst_n)
    (CTYPE == 3 && e_valid) |-> !(e_dec.op inside {OP_LD, OP_ST, OP_STSIMD, OP_SIMD}));

endmodule
