// fxp_to_rns -- forward conversion stage, fixed point to residues.
//
// Operands are kept in memory as 8-bit two's-complement integers and turned
// into RNS on the fly, between the SIMD input registers (X for the scalar
// operand, the packed M2 weights for the vector operand) and the TPAs. Each of
// the N lanes maps a signed byte x to the residues <x>_m for the base
// {5,7,9,31,32}, packed into 20 bits (3+3+4+5+5, channel 5 in the low bits).
// A negative x maps to m - (|x| mod m). The stage is registered, so it adds
// one cycle of latency to every input stream and none to the throughput, as
// in the paper; the command that goes with the data (mac/pproc) is delayed by
// the same register in the top level. The paper gives the stage and its
// one-cycle delay; the residue packing and the use of plain modulo logic
// instead of special low-cost converters are this design's choices.
module fxp_to_rns
  import accel_pkg::*;
#(
  parameter int N = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic signed [7:0] x [N],
  output logic [ZW-1:0]     r [N]
);
  function automatic logic [ZW-1:0] to_rns(input logic signed [7:0] v);
    logic [ZW-1:0] o;
    o = '0;
    for (int c = 0; c < NCH; c++)
      o[ROFS[c] +: 5] = 5'(smod(longint'(v), MOD[c]));
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < N; i++) r[i] <= '0;
    else        for (int i = 0; i < N; i++) r[i] <= to_rns(x[i]);
  end

endmodule
