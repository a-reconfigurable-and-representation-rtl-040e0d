// rns_to_bin -- reverse conversion of a residue vector to a signed integer.
//
// Chinese-remainder reconstruction for the active base subset B0..B4:
// X = ( sum_j c_j * x_j ) mod M, with M the product of the active moduli and
// c_j = (M/m_j) * |(M/m_j)^-1|_{m_j}; X above M/2 is read as X - M, which
// gives the signed value. The coefficients of all five subsets are computed at
// elaboration time from the moduli. Purely combinational. The paper's PPUs use
// a dynamic base-extension unit whose design it takes from elsewhere; this
// module is this design's stand-in that gives the PPU a binary value for
// scaling, sign detection and interval selection.
module rns_to_bin
  import accel_pkg::*;
(
  input  logic [2:0]         bsel,
  input  logic [ZW-1:0]      r,
  output logic signed [31:0] x
);
  typedef longint tab_t [5*NCH];
  typedef longint mtab_t [5];

  function automatic mtab_t mk_m();
    mtab_t t;
    for (int s = 0; s < 5; s++) begin
      logic [NCH-1:0] msk;
      msk = base_mask(3'(s));
      t[s] = 1;
      for (int c = 0; c < NCH; c++) if (msk[c]) t[s] = t[s] * MOD[c];
    end
    return t;
  endfunction

  function automatic tab_t mk_c();
    tab_t t;
    mtab_t m;
    m = mk_m();
    for (int s = 0; s < 5; s++) begin
      logic [NCH-1:0] msk;
      msk = base_mask(3'(s));
      for (int c = 0; c < NCH; c++) begin
        longint mj;
        mj = m[s] / longint'(MOD[c]);
        t[s*NCH+c] = msk[c] ? mj * modinv(mj % longint'(MOD[c]), longint'(MOD[c])) : 0;
      end
    end
    return t;
  endfunction

  localparam mtab_t MT = mk_m();
  localparam tab_t  CT = mk_c();

  always_comb begin
    longint acc, rem;
    int s;
    s = (bsel > 3'd4) ? 0 : int'(bsel);
    acc = 0;
    for (int c = 0; c < NCH; c++)
      acc = acc + CT[s*NCH+c] * longint'(r[ROFS[c] +: 5] & 5'((1 << RW[c]) - 1));
    rem = acc % MT[s];
    if (rem > MT[s] / 2) rem = rem - MT[s];
    x = 32'(rem);
  end

endmodule
