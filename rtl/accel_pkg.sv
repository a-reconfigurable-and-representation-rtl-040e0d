// accel_pkg -- types and constants shared by the accelerator.
//
// Holds the 32-bit instruction encoding of the machine-learning ISA, the
// lockstep bundle a master (type-I) mCore broadcasts to the cores that follow
// its program counter, the SIMD/PPU sub-operation codes, the RNS base
// {5,7,9,31,32} with its five base subsets B0..B4, and helper functions
// (residue of a signed value, byte masking, saturating quantization).
//
// The instruction mnemonics and their semantics follow the paper's ISA table;
// the bit positions of every field are this design's own choice, since the
// paper fixes only the 32-bit width, 5-bit register addresses and a 16-bit
// immediate.
package accel_pkg;

  // ---------------------------------------------------------------- ISA
  // Major opcode, instr[31:27].
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_ADD    = 5'd1,   // rd = (rs1>>8*s1)&m1 + (rs2>>8*s2)&m2
    OP_SUB    = 5'd2,
    OP_AND    = 5'd3,
    OP_OR     = 5'd4,
    OP_XOR    = 5'd5,
    OP_ADDHPL = 5'd6,   // add_hpl: low 16 bits of rs1 nibble-expanded + rs2
    OP_ADDHPH = 5'd7,   // add_hph: high 16 bits of rs1 nibble-expanded + rs2
    OP_ADDI   = 5'd8,
    OP_ADDIC  = 5'd9,   // rd = zf ? rs1+imm : rs1
    OP_LDI    = 5'd10,
    OP_LDID   = 5'd11,
    OP_B      = 5'd12,
    OP_BNE    = 5'd13,
    OP_BNZD   = 5'd14,
    OP_LD     = 5'd15,  // ld / ld_add (optional add part)
    OP_ST     = 5'd16,  // st / st_add (optional post-increment)
    OP_STSIMD = 5'd17,
    OP_SIMD   = 5'd18,  // offloaded to TPAs or PPUs, sub-op in [26:22]
    OP_WAIT   = 5'd19,
    OP_INTREN = 5'd20,
    OP_INTRA  = 5'd21,
    OP_SUBI   = 5'd22
  } opcode_e;

  // SIMD sub-operation, instr[26:22] of OP_SIMD.
  typedef enum logic [4:0] {
    SF_MAC     = 5'd0,
    SF_PPROC   = 5'd1,
    SF_QNT     = 5'd2,   // O[a] = Q(Y[a], sf)
    SF_QFUNC   = 5'd3,   // O[a] = Q(F(Y[a]), sf)
    SF_AFUNC   = 5'd4,   // O[a] = F(O[a])
    SF_MUL     = 5'd5,   // O[a] = Q(Y[a]*PPR[s], sf)
    SF_PWL     = 5'd6,   // PPR[d] = PWL_F(sat8(PPR[s]))
    SF_PWLMEM  = 5'd7,   // O[a] = Q(PWL_F(sat8(mem - PPR[s])), R)
    SF_ADDPPR  = 5'd8,
    SF_SUBPPR  = 5'd9,
    SF_QNTPPR  = 5'd10,  // PPR[d] = Q(PPR[s], sf)
    SF_LDPPR   = 5'd11,  // PPR[d] = sext(mem byte)
    SF_REDMAX  = 5'd12,
    SF_REDSUM  = 5'd13,
    SF_REDDIS  = 5'd14,
    SF_SETR    = 5'd15   // R = sf field
  } simd_fn_e;

  // Activation function selector (F field, instr[10:8]).
  typedef enum logic [2:0] {
    F_ID   = 3'd0,
    F_RELU = 3'd1,
    F_GELU = 3'd2,
    F_TANH = 3'd3,
    F_SIGM = 3'd4,
    F_EXP  = 3'd5,
    F_LN   = 3'd6,
    F_USER = 3'd7
  } afunc_e;

  // Decoded SIMD instruction as seen by the TPAs, PPUs and write-back unit.
  typedef struct packed {
    logic        valid;
    simd_fn_e    fn;
    logic        blocking;
    logic [4:0]  a;     // PE / register index
    logic [4:0]  sf;    // signed scale exponent
    afunc_e      f;
    logic [1:0]  d;     // PPR destination
    logic [1:0]  s;     // PPR source
    logic [1:0]  t;     // PPR second source
  } simd_cmd_t;

  function automatic simd_cmd_t decode_simd(input logic [31:0] ins, input logic v);
    simd_cmd_t c;
    c.valid    = v;
    c.fn       = simd_fn_e'(ins[26:22]);
    c.blocking = ins[21];
    c.a        = ins[20:16];
    c.sf       = ins[15:11];
    c.f        = afunc_e'(ins[10:8]);
    c.d        = ins[7:6];
    c.s        = ins[5:4];
    c.t        = ins[3:2];
    return c;
  endfunction

  // Lockstep bundle (the "ifetch_ctrl" output of a type-I core).
  typedef struct packed {
    logic [15:0] pc;       // PC being fetched
    logic        fetch;    // a fetch happens this cycle
    logic        hit;      // I-cache hit for this PC
    logic        nocache;  // address marked non-cacheable
    logic        hold;     // freeze DEC/EX (EX stall)
    logic        flush;    // kill IF/DEC (taken branch / redirect)
  } lockstep_t;

  // D-MEM request of a type-I/II core (issued in EX).
  typedef struct packed {
    logic        rd;
    logic        wr;
    logic        cp;
    logic [3:0]  ben;
    logic [31:0] addr;
    logic [31:0] wdata;
  } dmem_req_t;

  // st_simd request to the write-back unit (issued in EX of mCore-8).
  typedef struct packed {
    logic        valid;
    logic [3:0]  tpa;
    logic [4:0]  pe;
    logic        tr;
    logic        hp;
    logic [1:0]  pool;   // 0 none, 1 max, 2 average
    logic [31:0] addr;
  } stsimd_req_t;

  // ---------------------------------------------------------------- RNS
  localparam int NCH = 5;
  localparam int MOD [NCH] = '{5, 7, 9, 31, 32};
  localparam int RW  [NCH] = '{3, 3, 4, 5, 5};   // residue widths, sum = 20
  localparam int ROFS[NCH] = '{0, 3, 6, 10, 15};  // bit offset of each residue
  localparam int ZW = 20;                          // Z/Y register width

  // Channel masks of the base subsets B0..B4 (bit i = modulus MOD[i]).
  function automatic logic [NCH-1:0] base_mask(input logic [2:0] b);
    case (b)
      3'd0:    return 5'b11111; // {5,7,9,31,32}
      3'd1:    return 5'b11110; // {7,9,31,32}
      3'd2:    return 5'b11011; // {5,7,31,32}
      3'd3:    return 5'b10111; // {5,7,9,32}
      3'd4:    return 5'b10011; // {5,7,32}
      default: return 5'b11111;
    endcase
  endfunction

  // Residue <x>_m of a signed value, result in [0, m).
  function automatic int unsigned smod(input longint x, input int m);
    longint r;
    r = x % m;
    if (r < 0) r = r + m;
    return int'(r);
  endfunction

  // Modular inverse of a modulo m (a, m coprime), by search.
  function automatic longint modinv(input longint a, input longint m);
    for (longint k = 1; k < m; k++)
      if (((a % m) * k) % m == 1) return k;
    return 0;
  endfunction

  // ------------------------------------------------------------ helpers
  function automatic logic [31:0] bytemask(input logic [3:0] m);
    return {{8{m[3]}}, {8{m[2]}}, {8{m[1]}}, {8{m[0]}}};
  endfunction

  // Nibble expansion of add_hpl / add_hph: 4 nibbles -> 4 bytes, zero upper nibbles.
  function automatic logic [31:0] nib_expand(input logic [15:0] h);
    return {4'h0, h[15:12], 4'h0, h[11:8], 4'h0, h[7:4], 4'h0, h[3:0]};
  endfunction

  // Quantize(v * 2^sf, 8): shift by a signed exponent, round half up, saturate.
  function automatic logic signed [7:0] quant8(input logic signed [31:0] v, input logic [4:0] sf);
    logic signed [63:0] r;
    int sh;
    sh = int'($signed(sf));
    if (sh >= 0) r = 64'(v) <<< sh;
    else         r = (64'(v) + (64'sd1 <<< (-sh - 1))) >>> (-sh);
    if (r > 127)       return 8'sd127;
    else if (r < -128) return -8'sd128;
    else               return r[7:0];
  endfunction

  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[7:0];
  endfunction

endpackage
