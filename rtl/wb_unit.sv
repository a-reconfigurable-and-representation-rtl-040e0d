// wb_unit -- write-back unit: packs the 8-bit output files O of all arrays
// into 32-bit memory words for st_simd and routes them to OP1MEM or OP2MEM.
//
// Store modes, chosen by the tr and hp flags of st_simd (j = PE index):
//  * default (tr=0, hp=0): bank i receives concat(O_j of arrays 4i..4i+3),
//    array 4i in the low byte; all four banks are written, 128 bits per cycle.
//  * half precision (hp=1, tr=0): only the upper nibble of each output is kept.
//    Bank i receives the nibbles of O_j (low 16 bits) and O_{j+1} (high 16
//    bits) of arrays 4i..4i+3, following the half-precision word layout of
//    the paper's figure (row n in the low half, row n+1 in the high half).
//  * transpose (tr=1): one 32-bit word concat(O of PEs 4j'..4j'+3 of array i),
//    with j' = j/4, i.e. registers concatenated inside one array; it is written
//    to bank i/4, 32 bits per cycle.
//  * pooling (pool = 1 max, 2 average, this design's encoding): the 16 arrays
//    are read as a 4x4 pixel tile (array 4*row+col) and pooled 2x2 at PE j;
//    the four results form one word written to bank 0.
// Router: an address with bit 15 clear goes to OP1MEM (row addr[12:0] in each
// bank), bit 15 set goes to OP2MEM (banks {addr[14], i}).
// Purely combinational: the request comes from mCore-8's EX stage and the
// memory performs it at the end of that cycle unless it reports a conflict,
// in which case mCore-8 holds and presents the request again.
// The modes and the address split follow the paper; the bank choice for
// transpose and pooling, the pooling window and the split bit are this
// design's choices.
module wb_unit
  import accel_pkg::*;
#(
  parameter int NTPA = 16,
  parameter int NPE  = 32
) (
  input  stsimd_req_t      req,
  input  logic signed [7:0] o [NTPA][NPE],
  output logic [3:0]       op1_we,
  output logic [15:0]      op1_addr,
  output logic [31:0]      op1_data [4],
  output logic [3:0]       op2_we,
  output logic             op2_hi,
  output logic [15:0]      op2_addr,
  output logic [31:0]      op2_data [4]
);
  logic [3:0]  we;
  logic [31:0] w [4];

  function automatic logic signed [7:0] pool4(input logic signed [7:0] a, b, c, d, input logic mx);
    logic signed [9:0] s;
    logic signed [7:0] m;
    m = a;
    if (b > m) m = b;
    if (c > m) m = c;
    if (d > m) m = d;
    s = 10'(a) + 10'(b) + 10'(c) + 10'(d) + 10'sd2;
    return mx ? m : 8'(s >>> 2);
  endfunction

  integer j, j1, i, r0, c0;   // 4-state: no implicit initial value

  always_comb begin
    r0 = 0; c0 = 0;
    j  = int'(req.pe);
    j1 = (j + 1) % NPE;
    i  = int'(req.tpa) % NTPA;
    we = '0;
    for (int b = 0; b < 4; b++) w[b] = '0;
    if (req.valid) begin
      if (req.pool != 2'd0) begin
        we[0] = 1'b1;
        for (int q = 0; q < 4; q++) begin
          r0 = 2 * (q / 2); c0 = 2 * (q % 2);
          w[0][8*q +: 8] = pool4(o[(4*r0+c0) % NTPA][j], o[(4*r0+c0+1) % NTPA][j],
                                 o[(4*(r0+1)+c0) % NTPA][j], o[(4*(r0+1)+c0+1) % NTPA][j],
                                 req.pool == 2'd1);
        end
      end else if (req.tr) begin
        we[i / 4] = 1'b1;
        for (int k = 0; k < 4; k++) w[i / 4][8*k +: 8] = o[i][(4 * (j / 4) + k) % NPE];
      end else if (req.hp) begin
        we = 4'hF;
        for (int b = 0; b < 4; b++)
          for (int k = 0; k < 4; k++) begin
            w[b][4*k +: 4]      = o[(4*b + k) % NTPA][j][7:4];
            w[b][16 + 4*k +: 4] = o[(4*b + k) % NTPA][j1][7:4];
          end
      end else begin
        we = 4'hF;
        for (int b = 0; b < 4; b++)
          for (int k = 0; k < 4; k++) w[b][8*k +: 8] = o[(4*b + k) % NTPA][j];
      end
    end
    op1_we   = req.addr[15] ? 4'b0 : we;
    op2_we   = req.addr[15] ? we : 4'b0;
    op1_addr = {3'b0, req.addr[12:0]};
    op2_addr = {3'b0, req.addr[12:0]};
    op2_hi   = req.addr[14];
    op1_data = w;
    op2_data = w;
  end

endmodule
