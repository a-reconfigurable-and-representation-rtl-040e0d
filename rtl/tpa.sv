// tpa -- tensor processing array: NPE RNS processing elements and their Y file.
//
// Every PE gets the same scalar operand is (broadcast) and its own element of
// the vector operand iv, both already in residue form. The Z register file is
// the set of PE accumulators; pproc copies Z to the result file Y and clears
// Z, so the next accumulation can start while the post-processing units read
// Y. The array only acts when its enable bit (CTRL, SIMD enable) is set.
// Timing: mac and pproc act at the clock edge that ends the cycle in which
// they are presented (the top level presents them one cycle after mCore-0
// issues them, behind the conversion register). Y stays stable until the next
// pproc. Sizes (32 PEs, 20-bit Z/Y) are the paper's; clearing Z on pproc is
// this design's reading of how a new accumulation starts.
module tpa
  import accel_pkg::*;
#(
  parameter int NPE = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          mac,
  input  logic          pproc,
  input  logic [NCH-1:0] chan_en,
  input  logic [ZW-1:0] is,
  input  logic [ZW-1:0] iv [NPE],
  output logic [ZW-1:0] z  [NPE],
  output logic [ZW-1:0] y  [NPE]
);
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    rns_pe u_pe (
      .clk, .rst_n, .mac(en && mac), .clr(en && pproc), .chan_en,
      .a(is), .b(iv[p]), .z(z[p])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          for (int p = 0; p < NPE; p++) y[p] <= '0;
    else if (en && pproc) for (int p = 0; p < NPE; p++) y[p] <= z[p];
  end

endmodule
