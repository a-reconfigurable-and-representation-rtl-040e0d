// op1mem -- OP1MEM, the 128 KB feature-map memory, with its memory registers.
//
// Four 32-bit banks of WORDS_PER_BANK words. Each bank is a pseudo dual-port
// (pseudo-1R1W) memory made of two single-port macros: the lower half of the
// bank's address range is one macro, the upper half the other. Port A belongs
// to mCore-1 (the OP1MEM -> TPA input stream) and only reads. Port B belongs to
// the post-processing side: mCore-8 reads it (OP1MEM -> PPU stream) and the
// write-back unit writes it. Both ports run in the same cycle when they touch
// different halves; when port B wants the half port A is reading, port A wins
// and b_stall asks the post-processing side to retry next cycle.
//
// Address mapping for port A (the designer-customised mapping the paper
// allows): bank 0 is addressed by a_addr[15:0] and banks 1-3 by
// a_addr[31:16], so one 32-bit register carries the two addresses the 3x3
// convolution needs; ldid gives all banks the same address.
//
// Timing: a read issued in cycle t (request from the core's EX stage) lands
// in the memory register M1 at the end of t+1, so it is usable two cycles
// after the load, as the paper states. With cp set, M1[0..3] are first copied
// to M1[4..7] (the ldcp behaviour). Port B reads land in mb[0..3] the same way.
// The host port (h_*) loads and inspects the memory from outside; it has no
// counterpart in the paper and takes precedence over port B.
module op1mem #(
  parameter int WORDS_PER_BANK = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  // port A: mCore-1 reads
  input  logic        a_rd,
  input  logic        a_cp,
  input  logic [3:0]  a_ben,
  input  logic [31:0] a_addr,
  // port B: mCore-8 reads and write-back writes
  input  logic        b_rd,
  input  logic [3:0]  b_ben,
  input  logic [31:0] b_addr,
  input  logic [3:0]  b_we,
  input  logic [15:0] b_waddr [4],
  input  logic [31:0] b_wdata [4],
  output logic        b_stall,
  // host port
  input  logic        h_we,
  input  logic        h_re,
  input  logic [1:0]  h_bank,
  input  logic [15:0] h_addr,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  // memory registers
  output logic [31:0] m1 [8],
  output logic [31:0] mb [4]
);
  localparam int AW = $clog2(WORDS_PER_BANK);

  logic [31:0] mem [4][WORDS_PER_BANK];
  logic [31:0] qa [4], qb [4];
  logic [3:0]  va, vb;
  logic [AW-1:0] aa [4];

  always_comb begin
    aa[0] = a_addr[AW-1:0];
    for (int i = 1; i < 4; i++) aa[i] = a_addr[16+AW-1:16];
  end

  // conflict: port B touches the half of a bank that port A reads
  always_comb begin
    b_stall = 1'b0;
    for (int i = 0; i < 4; i++) begin
      if (a_rd && a_ben[i]) begin
        if (b_rd && b_ben[i] && (b_addr[AW-1] == aa[i][AW-1])) b_stall = 1'b1;
        if (b_we[i] && (b_waddr[i][AW-1] == aa[i][AW-1]))     b_stall = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) begin
      if (a_rd && a_ben[i]) qa[i] <= mem[i][aa[i]];
      if (b_rd && b_ben[i] && !b_stall) qb[i] <= mem[i][b_addr[AW-1:0]];
      if (h_we && h_bank == 2'(i))
        mem[i][h_addr[AW-1:0]] <= h_wdata;
      else if (b_we[i] && !b_stall)
        mem[i][b_waddr[i][AW-1:0]] <= b_wdata[i];
    end
    if (h_re) h_rdata <= mem[h_bank][h_addr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va <= '0; vb <= '0;
      for (int i = 0; i < 8; i++) m1[i] <= '0;
      for (int i = 0; i < 4; i++) mb[i] <= '0;
    end else begin
      va <= a_rd ? a_ben : 4'b0;
      vb <= (b_rd && !b_stall) ? b_ben : 4'b0;
      if (a_rd && a_cp)
        for (int i = 0; i < 4; i++) m1[4+i] <= m1[i];
      for (int i = 0; i < 4; i++) begin
        if (va[i]) m1[i] <= qa[i];
        if (vb[i]) mb[i] <= qb[i];
      end
    end
  end

endmodule
