// ppu -- post-processing unit of one tensor processing array.
//
// The PPU owns the array's 8-bit output file O (NPE entries) and a small
// post-processing register file PPR (4 x 20 bits), and executes the PPU
// instructions that mCore-8 broadcasts (cmd). Its parts are the ones the paper
// lists: a reverse converter that reads one Y register in residue form and
// gives its signed value (rns_to_bin), a quantization/scaling unit
// (Quantize(v*2^sf, 8): shift by a signed exponent, round, saturate), a
// dedicated ReLU, a piecewise-linear unit, a multiplier, a comparator and an
// accumulator for the reductions.
//
// PWL unit: 16 equal intervals over the signed 8-bit input, selected by its
// top four bits; f(x) = a_i*x + b_i*2^7 with 12-bit signed a_i, b_i read from
// the shared coefficient table (pwl_a/pwl_b, one set of 16 per function
// code), giving a 20-bit result. The PWL output is brought back to 8 bits
// with the shift held in the control register R (set by SF_SETR).
//
// Operations (a = PE index, s/t/d = PPR indices): QNT O[a]=Q(Y[a],sf);
// QFUNC O[a]=Q(F(Y[a]),sf) (for PWL functions Q(PWL(Q(Y,sf)),R)); AFUNC
// O[a]=F(O[a]); MUL O[a]=Q(Y[a]*PPR[s],sf); PWL PPR[d]=PWL(sat8(PPR[s]));
// PWLMEM O[a]=Q(PWL(sat8(mem-PPR[s])),R); ADDPPR/SUBPPR; QNTPPR; LDPPR
// PPR[d]=mem; REDMAX/REDSUM start a max/sum reduction into PPR[d] over every
// later O result, REDDIS stops it; SETR.
//
// Timing: two-stage pipeline, one instruction accepted per cycle. Stage 1
// registers the command and the converted Y[a]; stage 2 computes and writes O
// or PPR. busy is high while an instruction is in flight, which is what the
// blocking flag of mCore-8 waits on. What follows the paper: the parts, the
// instruction set, 16 intervals, 12-bit coefficients, 8-bit in / 20-bit out
// PWL. This design's own: the operand encoding, the b_i*2^7 alignment, the
// use of R as the PWL output scale, the reduction initial values, and the
// binary (CRT) post-processing in place of RNS base extension.
module ppu
  import accel_pkg::*;
#(
  parameter int NPE  = 32,
  parameter int NINT = 16,
  parameter int CW   = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  simd_cmd_t            cmd,
  input  logic [2:0]           bsel,
  input  logic [ZW-1:0]        y [NPE],
  input  logic signed [7:0]    mem,
  input  logic signed [CW-1:0] pwl_a [8][NINT],
  input  logic signed [CW-1:0] pwl_b [8][NINT],
  output logic signed [7:0]    o [NPE],
  output logic signed [ZW-1:0] ppr [4],
  output logic                 busy
);
  localparam int IW = $clog2(NINT);

  // stage 1: command and reverse-converted Y[a]
  simd_cmd_t          c1;
  logic signed [31:0] yb, yb1;

  rns_to_bin u_crt (.bsel, .r(y[cmd.a]), .x(yb));

  wire is_ppu_op = cmd.valid && !(cmd.fn inside {SF_MAC, SF_PPROC});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1  <= '0;
      yb1 <= '0;
    end else begin
      c1       <= cmd;
      c1.valid <= is_ppu_op;
      yb1      <= yb;
    end
  end

  // PWL evaluation
  function automatic logic signed [ZW-1:0] pwl(input afunc_e f, input logic signed [7:0] x);
    logic [IW-1:0] i;
    logic signed [31:0] r;
    i = {~x[7], x[6:8-IW]};
    r = 32'(pwl_a[f][i]) * 32'(x) + (32'(pwl_b[f][i]) <<< 7);
    return r[ZW-1:0];
  endfunction

  // stage 2
  logic [4:0]         rreg;     // R: PWL output scale
  logic               red_on, red_max;
  logic [1:0]         red_dst;
  logic signed [7:0]  res8;
  logic               wr_o, wr_p;
  logic signed [ZW-1:0] resp;

  always_comb begin
    logic signed [31:0] ps, pt, yr;
    ps   = 32'(ppr[c1.s]);
    pt   = 32'(ppr[c1.t]);
    yr   = (c1.f == F_RELU && yb1 < 0) ? 32'sd0 : yb1;
    res8 = '0; resp = '0; wr_o = 1'b0; wr_p = 1'b0;
    if (c1.valid) begin
      case (c1.fn)
        SF_QNT:   begin res8 = quant8(yb1, c1.sf); wr_o = 1'b1; end
        SF_QFUNC: begin
          wr_o = 1'b1;
          if (c1.f inside {F_ID, F_RELU}) res8 = quant8(yr, c1.sf);
          else res8 = quant8(32'(pwl(c1.f, quant8(yb1, c1.sf))), rreg);
        end
        SF_AFUNC: begin
          wr_o = 1'b1;
          if (c1.f == F_ID)        res8 = o[c1.a];
          else if (c1.f == F_RELU) res8 = (o[c1.a] < 0) ? 8'sd0 : o[c1.a];
          else                     res8 = quant8(32'(pwl(c1.f, o[c1.a])), rreg);
        end
        SF_MUL:    begin res8 = quant8(yb1 * ps, c1.sf); wr_o = 1'b1; end
        SF_PWL:    begin resp = pwl(c1.f, sat8(ps)); wr_p = 1'b1; end
        SF_PWLMEM: begin res8 = quant8(32'(pwl(c1.f, sat8(32'(mem) - ps))), rreg); wr_o = 1'b1; end
        SF_ADDPPR: begin resp = ZW'(ps + pt); wr_p = 1'b1; end
        SF_SUBPPR: begin resp = ZW'(ps - pt); wr_p = 1'b1; end
        SF_QNTPPR: begin resp = ZW'(quant8(ps, c1.sf)); wr_p = 1'b1; end
        SF_LDPPR:  begin resp = ZW'(mem); wr_p = 1'b1; end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rreg <= '0; red_on <= 1'b0; red_max <= 1'b0; red_dst <= '0;
      for (int i = 0; i < NPE; i++) o[i] <= '0;
      for (int i = 0; i < 4; i++) ppr[i] <= '0;
    end else if (c1.valid) begin
      if (wr_o) o[c1.a] <= res8;
      if (wr_p) ppr[c1.d] <= resp;
      if (wr_o && red_on) begin
        if (red_max) begin
          if (ZW'(res8) > ppr[red_dst]) ppr[red_dst] <= ZW'(res8);
        end else begin
          ppr[red_dst] <= ppr[red_dst] + ZW'(res8);
        end
      end
      case (c1.fn)
        SF_SETR:   rreg <= c1.sf;
        SF_REDMAX: begin red_on <= 1'b1; red_max <= 1'b1; red_dst <= c1.d; ppr[c1.d] <= -ZW'(128); end
        SF_REDSUM: begin red_on <= 1'b1; red_max <= 1'b0; red_dst <= c1.d; ppr[c1.d] <= '0; end
        SF_REDDIS: red_on <= 1'b0;
        default: ;
      endcase
    end
  end

  assign busy = c1.valid;

endmodule
