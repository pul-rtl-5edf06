// tb_pul_scratchpad: self-checking test of the 64 KiB dual-port scratchpad.
// Random byte-masked writes and reads on both ports against a byte-array
// reference; checks the one-cycle read latency on both ports, read-first
// behaviour, port B winning a same-byte collision, and the highest address.
module tb_pul_scratchpad;
  import pul_pkg::*;
  localparam int BYTES = 65536;
  localparam int WORDS = BYTES / 8;
  localparam int AW    = $clog2(WORDS);

  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [63:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [7:0] a_wstrb, b_wstrb;

  pul_scratchpad #(.BYTES(BYTES)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] ref_mem [WORDS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] merge(input logic [63:0] old, input logic [63:0] d, input logic [7:0] s);
    for (int i = 0; i < 8; i++) if (s[i]) old[8*i +: 8] = d[8*i +: 8];
    return old;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp_a, exp_b;
    logic        rd_a, rd_b;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0;
    a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0; a_wstrb = 0; b_wstrb = 0;
    // initialise both the memory and the reference through port A
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = {$urandom, $urandom}; a_wstrb = 8'hff;
      ref_mem[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    // random traffic, addresses drawn from a small window to force collisions
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      a_en = $urandom_range(1); a_we = $urandom_range(1);
      b_en = $urandom_range(1); b_we = $urandom_range(1);
      a_addr = (n % 3 == 0) ? AW'($urandom_range(3)) : AW'($urandom);
      b_addr = (n % 3 == 0) ? AW'($urandom_range(3)) : AW'($urandom);
      if (n == 100) begin a_addr = AW'(WORDS - 1); b_addr = AW'(WORDS - 1); end
      a_wdata = {$urandom, $urandom}; b_wdata = {$urandom, $urandom};
      a_wstrb = 8'($urandom); b_wstrb = 8'($urandom);
      rd_a = a_en; rd_b = b_en;
      exp_a = ref_mem[a_addr];            // read-first
      exp_b = ref_mem[b_addr];
      if (a_en && a_we) ref_mem[a_addr] = merge(ref_mem[a_addr], a_wdata, a_wstrb);
      if (b_en && b_we) ref_mem[b_addr] = merge(ref_mem[b_addr], b_wdata, b_wstrb);
      @(posedge clk); #1;
      if (rd_a) check(a_rdata == exp_a, $sformatf("port A read %0d", n));
      if (rd_b) check(b_rdata == exp_b, $sformatf("port B read %0d", n));
    end
    // final sweep: every word read back on port B, one cycle after the request
    a_en = 0; b_we = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      b_en = 1; b_addr = AW'(i);
      @(posedge clk); #1;
      check(b_rdata == ref_mem[i], $sformatf("sweep word %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
