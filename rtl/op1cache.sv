// op1cache -- OP1CACHE, the 8 KB software-managed border cache.
//
// Four 32-bit banks of WORDS_PER_BANK words, controlled by the type-II
// mCore-3. In the 3x3 convolution the row buffer and the column buffer of the
// border cache sit in two of the banks: pixels on the top and left border of
// the current 4x4 block were fetched for earlier blocks, so mCore-3 stores them
// here and reads them back instead of reading OP1MEM again. Reads and writes
// use one address for all enabled banks (ben). Write data comes from the
// core's store (st) data. Read timing matches the other memories: a read
// issued in cycle t lands in the memory registers M3[0..3] at the end of t+1.
// The paper gives the size, the owner core and the use; the single shared
// address and single-port banks are this design's choice.
module op1cache #(
  parameter int WORDS_PER_BANK = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd,
  input  logic        wr,
  input  logic [3:0]  ben,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] m3 [4]
);
  localparam int AW = $clog2(WORDS_PER_BANK);

  logic [31:0] mem [4][WORDS_PER_BANK];
  logic [31:0] q [4];
  logic [3:0]  v;

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) begin
      if (ben[i] && wr)      mem[i][addr[AW-1:0]] <= wdata;
      else if (ben[i] && rd) q[i] <= mem[i][addr[AW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int i = 0; i < 4; i++) m3[i] <= '0;
    end else begin
      v <= (rd && !wr) ? ben : 4'b0;
      for (int i = 0; i < 4; i++) if (v[i]) m3[i] <= q[i];
    end
  end

endmodule
