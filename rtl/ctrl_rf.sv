// ctrl_rf -- CTRL, the shared control and configuration register file.
//
// Four 16-bit registers, written only by mCore-0 and read by mCore-0 and by
// the datapath. set_prcs is an ldi into CTRL0. Field layout (this design's):
//   CTRL0 [3:0] weight precision k (3..8), [4] activation half precision,
//         [7:5] RNS base subset B0..B4, [8] output half precision
//   CTRL1 padding control bits (written by the convolution template)
//   CTRL2 TPA enable mask, one bit per array (SIMD enables)
//   CTRL3 cache configuration (bit 0: OP1CACHE stream enabled)
// Reset: 8-bit weights, full precision, base B0, all arrays enabled. The paper
// names the file, its size (4 x 16), its writer and what it holds; the bit
// positions and reset values are this design's. Writes land at the clock
// edge; outputs are the registers.
module ctrl_rf (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [1:0]  waddr,
  input  logic [15:0] wdata,
  output logic [15:0] regs [4],
  output logic [3:0]  wprec,
  output logic        act_hp,
  output logic [2:0]  bsel,
  output logic        out_hp,
  output logic [15:0] pad,
  output logic [15:0] tpa_en,
  output logic        cache_en
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs[0] <= 16'h0008;
      regs[1] <= 16'h0000;
      regs[2] <= 16'hFFFF;
      regs[3] <= 16'h0001;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb begin
    wprec    = (regs[0][3:0] < 4'd3) ? 4'd3 : (regs[0][3:0] > 4'd8) ? 4'd8 : regs[0][3:0];
    act_hp   = regs[0][4];
    bsel     = (regs[0][7:5] > 3'd4) ? 3'd0 : regs[0][7:5];
    out_hp   = regs[0][8];
    pad      = regs[1];
    tpa_en   = regs[2];
    cache_en = regs[3][0];
  end

endmodule
