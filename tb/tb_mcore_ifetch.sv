// tb_mcore_ifetch -- self-checking testbench of the instruction memory and
// instruction cache.
//
// Loads random instructions, some marked non-cacheable, and fetches random PC
// sequences. A fetch that hits must deliver the instruction in the same cycle
// (zero-cycle hit); a miss must deliver it one cycle later (one-cycle
// penalty) and fill the line; a non-cacheable word must never hit. The
// returned instruction is checked against the loaded program every time, and
// the hit and miss counts must both be non-zero. Also checks the slave mode
// (HAS_TAGS = 0) that follows the master's hit signal.
module tb_mcore_ifetch;
  localparam int IW = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_we = 0, prog_nc = 0; logic [15:0] prog_addr = 0; logic [31:0] prog_data = 0;
  logic [15:0] pc = 0; logic fetch = 0;
  logic [31:0] instr, instr_s; logic instr_valid, hit, nocache, iv_s, hit_s, nc_s;
  mcore_ifetch #(.IMEM_WORDS(IW)) dut (.clk, .rst_n, .prog_we, .prog_addr, .prog_data, .prog_nc,
    .pc, .fetch, .ext_hit(1'b0), .ext_nocache(1'b0), .instr, .instr_valid, .hit, .nocache);
  mcore_ifetch #(.IMEM_WORDS(IW), .HAS_TAGS(0)) slave (.clk, .rst_n, .prog_we, .prog_addr,
    .prog_data, .prog_nc, .pc, .fetch, .ext_hit(hit), .ext_nocache(nocache), .instr(instr_s),
    .instr_valid(iv_s), .hit(hit_s), .nocache(nc_s));
  int checks = 0, failures = 0, hits = 0, misses = 0;
  logic [31:0] prog [IW]; logic nc [IW];
  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %0h exp %0h", w, g, e); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < IW; i++) begin
      prog[i] = $urandom; nc[i] = ($urandom % 8 == 0);
      prog_we = 1; prog_addr = 16'(i); prog_data = prog[i]; prog_nc = nc[i]; @(negedge clk);
    end
    prog_we = 0;
    for (int n = 0; n < 600; n++) begin
      int a, wait_c;
      a = (n % 3 == 0) ? $urandom % IW : $urandom % 24;   // a hot loop region and random jumps
      pc = 16'(a); fetch = 1; wait_c = 0;
      #1;
      while (!instr_valid) begin
        @(negedge clk); wait_c++; #1;
        if (wait_c > 3) break;
      end
      if (wait_c == 0) begin hits++; chk("hit not nc", 32'(nc[a]), 0); end
      else begin misses++; chk("miss penalty is one cycle", 32'(wait_c), 1); end
      chk("instr", instr, prog[a]);
      chk("slave instr", instr_s, prog[a]);
      chk("slave valid", 32'(iv_s), 1);
      @(negedge clk);
      fetch = 0;
      if (n % 5 == 0) @(negedge clk);
    end
    chk("hits seen", 32'(hits > 100), 1);
    chk("misses seen", 32'(misses > 10), 1);
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
