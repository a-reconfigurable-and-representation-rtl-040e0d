// op2mem -- OP2MEM, the 192 KB weight memory with fine-grained dynamic precision.
//
// Weights are stored bit-interleaved: bank b (b = 0..7) holds bit b of 32
// weights in each 32-bit word, so one address across the banks holds 32
// weights of up to 8 bits. A read with precision k (3..8, from CTRL; other values are clamped)
// activates only banks 0..k-1, so the energy of a weight read scales with the
// precision. The read words land in the memory registers M2[0..7] and the
// packer turns them into 32 signed k-bit weights, sign-extended to 8 bits,
// which form the vector operand I_v of every TPA (weight p goes to PE p).
//
// The memory is pseudo-1R1W: each bank is two single-port halves; a write
// (from the write-back unit) that hits the half being read is refused with
// w_stall. Written 32-bit words go to banks {w_hi, i} as they are (the paper stores
// K, Q, V tensors here but does not say how they are laid out in the bit
// planes; this design writes raw words). Timing: a read issued in cycle t is in
// M2 at the end of t+1; the packed weights follow M2 combinationally. The host
// port (h_*) has no counterpart in the paper.
module op2mem #(
  parameter int WORDS_PER_BANK = 6144
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  prec,          // weight precision k, 3..8
  // port A: mCore-2 reads
  input  logic        a_rd,
  input  logic [31:0] a_addr,
  // write port (write-back unit): word i goes to bank {w_hi, i}
  input  logic [3:0]  w_en,
  input  logic        w_hi,
  input  logic [15:0] w_addr,
  input  logic [31:0] w_data [4],
  output logic        w_stall,
  // host port
  input  logic        h_we,
  input  logic        h_re,
  input  logic [2:0]  h_bank,
  input  logic [15:0] h_addr,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  // memory registers and packed weights
  output logic [31:0] m2 [8],
  output logic signed [7:0] iv [32]
);
  localparam int AW = $clog2(WORDS_PER_BANK);

  logic [31:0] mem [8][WORDS_PER_BANK];
  logic [31:0] q [8];
  logic [7:0]  act, v, wen8;
  int          k;

  always_comb begin
    k = (prec < 4'd3) ? 3 : (prec > 4'd8) ? 8 : int'(prec);
    act = '0;
    for (int b = 0; b < 8; b++) act[b] = (b < k);
    wen8 = w_hi ? {w_en, 4'b0} : {4'b0, w_en};
    w_stall = a_rd && |(wen8 & act) && (w_addr[AW-1] == a_addr[AW-1]);
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < 8; b++) begin
      if (a_rd && act[b]) q[b] <= mem[b][a_addr[AW-1:0]];
      if (h_we && h_bank == 3'(b))
        mem[b][h_addr[AW-1:0]] <= h_wdata;
      else if (wen8[b] && !w_stall)
        mem[b][w_addr[AW-1:0]] <= w_data[b % 4];
    end
    if (h_re) h_rdata <= mem[h_bank][h_addr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int b = 0; b < 8; b++) m2[b] <= '0;
    end else begin
      v <= a_rd ? act : 8'b0;
      for (int b = 0; b < 8; b++) if (v[b]) m2[b] <= q[b];
    end
  end

  // packer: weight p = sign-extend(bits k-1..0 taken from planes k-1..0)
  always_comb begin
    for (int p = 0; p < 32; p++) begin
      logic [7:0] raw;
      for (int b = 0; b < 8; b++) raw[b] = m2[b][p];
      iv[p] = '0;
      for (int b = 0; b < 8; b++)
        iv[p][b] = (b < k) ? raw[b] : raw[k - 1];
    end
  end

endmodule
