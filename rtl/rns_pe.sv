// rns_pe -- one processing element of an RNS tensor processing array.
//
// The PE keeps its accumulator z as five independent residue channels for the
// base {5,7,9,31,32} (3+3+4+5+5 = 20 bits, the width of the Z and Y register
// files). A mac multiplies the scalar operand a by the vector operand b and
// adds the product to z, channel by channel, each modulo its own modulus, so
// no carry crosses a channel. Only the channels of the active base subset
// (chan_en, from the precision setting) are updated; the others hold their
// value, which stands in for the clock gating of inactive channels. clr zeroes
// z (used when pproc moves z to y); when clr and mac come together z restarts
// from the new product. Timing: one mac per cycle, result in z the next cycle.
// The paper gives the channel structure and the subset activation; the
// channels here use plain modulo logic rather than end-around-carry or
// diminished-1 adders.
module rns_pe
  import accel_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          mac,
  input  logic          clr,
  input  logic [NCH-1:0] chan_en,
  input  logic [ZW-1:0] a,
  input  logic [ZW-1:0] b,
  output logic [ZW-1:0] z
);
  function automatic logic [ZW-1:0] step(input logic [ZW-1:0] zz, input logic [ZW-1:0] aa,
                                         input logic [ZW-1:0] bb, input logic [NCH-1:0] ce);
    logic [ZW-1:0] o;
    o = zz;
    for (int c = 0; c < NCH; c++) begin
      int unsigned za, xa, xb;
      za = 32'(zz[ROFS[c] +: 5]) & ((1 << RW[c]) - 1);
      xa = 32'(aa[ROFS[c] +: 5]) & ((1 << RW[c]) - 1);
      xb = 32'(bb[ROFS[c] +: 5]) & ((1 << RW[c]) - 1);
      if (ce[c]) begin
        int unsigned s;
        s = (za + xa * xb) % 32'(MOD[c]);
        for (int k = 0; k < RW[c]; k++) o[ROFS[c] + k] = s[k];
      end
    end
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    z <= '0;
    else if (clr)  z <= mac ? step('0, a, b, chan_en) : '0;
    else if (mac)  z <= step(z, a, b, chan_en);
  end

endmodule
