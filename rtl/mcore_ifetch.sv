// mcore_ifetch -- instruction fetch stage of an mCore: I-MEM plus I-cache.
//
// I-MEM is a 128 x 32-bit memory with a synchronous read (0.5 KB, as in the
// reference architecture). In front of it sits a 16-entry direct-mapped
// I-cache built from registers (64 B). A fetch that hits returns the
// instruction in the same cycle; a miss reads I-MEM and returns the word one
// cycle later, filling the cache line, so a miss costs exactly one extra cycle.
// Every I-MEM word carries a non-cacheable bit, written with the instruction
// during programming; a fetch of such a word always goes to I-MEM and never
// fills the cache.
//
// A type-I (master) core instantiates this with HAS_TAGS=1 and computes the
// hit itself. Type-II/III cores follow the master's PC and use HAS_TAGS=0:
// they keep only the data lines and take the hit decision from the master
// (ext_hit), as the paper prescribes that cache control is computed only in
// the type-I core and broadcast.
//
// Interface: prog_* writes I-MEM (and invalidates the cache); pc/fetch request
// a fetch, instr/instr_valid return it. Timing: hit 0 cycles, miss 1 cycle.
// Sizes and the one-cycle miss follow the paper; the per-word non-cacheable
// bit as the form of the "cache-address-enable" signal is this design's choice.
module mcore_ifetch #(
  parameter int IMEM_WORDS   = 128,
  parameter int ICACHE_LINES = 16,
  parameter bit HAS_TAGS     = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // programming port
  input  logic        prog_we,
  input  logic [15:0] prog_addr,
  input  logic [31:0] prog_data,
  input  logic        prog_nc,
  // fetch request
  input  logic [15:0] pc,
  input  logic        fetch,
  input  logic        ext_hit,      // used when HAS_TAGS == 0
  input  logic        ext_nocache,  // used when HAS_TAGS == 0
  output logic [31:0] instr,
  output logic        instr_valid,
  output logic        hit,
  output logic        nocache
);
  localparam int AW = $clog2(IMEM_WORDS);
  localparam int CW = $clog2(ICACHE_LINES);

  logic [31:0] imem    [IMEM_WORDS];
  logic        imem_nc [IMEM_WORDS];
  logic [31:0] imem_q;
  logic [31:0] line    [ICACHE_LINES];
  logic [15:0] tag     [ICACHE_LINES];
  logic        lvalid  [ICACHE_LINES];
  logic        miss_q;

  wire [AW-1:0] ia  = pc[AW-1:0];
  wire [CW-1:0] idx = pc[CW-1:0];

  always_ff @(posedge clk) begin
    if (prog_we) begin
      imem[prog_addr[AW-1:0]]    <= prog_data;
      imem_nc[prog_addr[AW-1:0]] <= prog_nc;
    end
    imem_q <= imem[ia];
  end

  always_comb begin
    if (HAS_TAGS) begin
      nocache = imem_nc[ia];
      hit     = lvalid[idx] && (tag[idx] == pc) && !nocache;
    end else begin
      nocache = ext_nocache;
      hit     = ext_hit;
    end
    instr_valid = fetch && (hit || miss_q);
    instr       = hit ? line[idx] : imem_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      miss_q <= 1'b0;
      for (int i = 0; i < ICACHE_LINES; i++) begin
        lvalid[i] <= 1'b0;
        tag[i]    <= '0;
      end
    end else begin
      miss_q <= fetch && !hit && !miss_q;
      if (prog_we) begin
        for (int i = 0; i < ICACHE_LINES; i++) lvalid[i] <= 1'b0;
      end else if (fetch && miss_q && !hit && !nocache) begin
        lvalid[idx] <= 1'b1;
        tag[idx]    <= pc;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fetch && miss_q && !hit && !nocache) line[idx] <= imem_q;
  end

endmodule
