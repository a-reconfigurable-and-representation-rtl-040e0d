// tb_wb_unit -- self-checking testbench of the write-back unit.
//
// Fills the 16 x 32 output files with random bytes and checks, for random
// st_simd requests, the words and bank enables of the four layouts: default
// (bank i gets O_j of TPAs 4i..4i+3), half precision (upper nibbles of O_j and
// O_j+1), transposed (four consecutive PEs of one TPA into bank tpa/4), and
// 2x2 max/average pooling over the 4x4 TPA tile; plus the address routing of
// bit 15 to OP2MEM and bit 14 to its upper bank group. The unit is
// combinational, so results are checked in the same cycle.
module tb_wb_unit;
  import accel_pkg::*;
  stsimd_req_t req;
  logic signed [7:0] o [16][32];
  logic [3:0] op1_we, op2_we; logic [15:0] op1_addr, op2_addr; logic op2_hi;
  logic [31:0] op1_data [4], op2_data [4];
  wb_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask
  initial begin
    for (int n = 0; n < 400; n++) begin
      int j, t, mode; logic [31:0] e [4]; logic [3:0] ew;
      for (int a = 0; a < 16; a++) for (int p = 0; p < 32; p++) o[a][p] = 8'($urandom);
      j = $urandom % 32; t = $urandom % 16; mode = $urandom % 5;
      req = '0; req.valid = 1; req.pe = 5'(j); req.tpa = 4'(t);
      req.addr = 32'($urandom) & 32'h0000_DFFF; if (n % 4 == 0) req.addr[15] = 1'b1;
      req.tr = (mode == 1); req.hp = (mode == 2); req.pool = (mode >= 3) ? 2'(mode - 2) : 2'd0;
      for (int b = 0; b < 4; b++) e[b] = 0;
      ew = 4'hF;
      case (mode)
        0: for (int b = 0; b < 4; b++) for (int k = 0; k < 4; k++) e[b][8*k +: 8] = o[4*b+k][j];
        1: begin ew = 4'b1 << (t / 4); for (int k = 0; k < 4; k++) e[t/4][8*k +: 8] = o[t][4*(j/4)+k]; end
        2: for (int b = 0; b < 4; b++) for (int k = 0; k < 4; k++) begin
             e[b][4*k +: 4] = o[4*b+k][j][7:4]; e[b][16+4*k +: 4] = o[4*b+k][(j+1)%32][7:4];
           end
        default: begin
          ew = 4'b0001;
          for (int q = 0; q < 4; q++) begin
            int r0, c0, v [4], m, s;
            r0 = 2*(q/2); c0 = 2*(q%2);
            v[0] = o[4*r0+c0][j]; v[1] = o[4*r0+c0+1][j]; v[2] = o[4*(r0+1)+c0][j]; v[3] = o[4*(r0+1)+c0+1][j];
            m = v[0]; s = 0;
            for (int i = 0; i < 4; i++) begin if (v[i] > m) m = v[i]; s += v[i]; end
            e[0][8*q +: 8] = (mode == 3) ? 8'(m) : 8'((s + 2) >>> 2);
          end
        end
      endcase
      #1;
      chk("op1_we", 32'(op1_we), req.addr[15] ? 0 : 32'(ew));
      chk("op2_we", 32'(op2_we), req.addr[15] ? 32'(ew) : 0);
      chk("op2_hi", 32'(op2_hi), 32'(req.addr[14]));
      chk("addr", 32'(op1_addr), 32'(req.addr[12:0]));
      for (int b = 0; b < 4; b++) if (ew[b]) chk("data", req.addr[15] ? op2_data[b] : op1_data[b], e[b]);
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    #100000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
