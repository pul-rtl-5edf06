// tb_pul_regs: self-checking test of the PUL register interface.
// Writes the address/size registers and reads them back, rings the GO
// registers and checks the queued request, checks that a GO is held off while
// its queue reports full (stall) and goes through when room appears, that an
// unchanged register is reused by a second GO (register value buffering), the
// STATUS layout, and the one-cycle read latency.
module tb_pul_regs;
  import pul_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bus_valid, bus_ready, bus_we, rsp_valid;
  logic [6:0] bus_addr;
  logic [63:0] bus_wdata, rsp_rdata;
  logic pl_push_valid, pl_push_ready, ul_push_valid, ul_push_ready;
  pul_req_t pl_push, ul_push;
  logic pl_busy, ul_busy;
  logic [7:0] pl_count, ul_count;

  pul_regs dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  pul_req_t pl_seen[$], ul_seen[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (pl_push_valid && pl_push_ready) pl_seen.push_back(pl_push);
    if (ul_push_valid && ul_push_ready) ul_seen.push_back(ul_push);
    if (bus_valid && !bus_ready) stalls++;
  end

  task automatic wr(input logic [6:0] a, input logic [63:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(posedge clk);
    while (!bus_ready) @(posedge clk);
    #1 bus_valid = 0;
  endtask

  task automatic rd(input logic [6:0] a, output logic [63:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 0; bus_addr = a;
    @(posedge clk); #1;
    bus_valid = 0;
    check(rsp_valid, "read response one cycle after the request");
    d = rsp_rdata;
    @(posedge clk); #1;
    check(!rsp_valid, "single response per read");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    logic [63:0] src;
    bus_valid = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0;
    pl_push_ready = 1; ul_push_ready = 1;
    pl_busy = 0; ul_busy = 0; pl_count = 0; ul_count = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // read back after reset and after writes
    rd(REG_PL_SIZE, d); check(d == 0, "PL_SIZE resets to 0");
    for (int n = 0; n < 20; n++) begin
      src = {$urandom, $urandom};
      wr(REG_PL_MEM, src);
      wr(REG_PL_SPM, 64'($urandom));
      wr(REG_PL_SIZE, 64'($urandom_range(1, 4096)));
      wr(REG_UL_SPM, 64'($urandom));
      wr(REG_UL_MEM, ~src);
      wr(REG_UL_SIZE, 64'($urandom_range(1, 65536)));
      rd(REG_PL_MEM, d);  check(d == src, "PL_MEM readback");
      rd(REG_UL_MEM, d);  check(d == ~src, "UL_MEM readback");
      rd(REG_PL_SPM, d);  check(d == 64'(dut.pl_spm), "PL_SPM readback");
      rd(REG_UL_SIZE, d); check(d == 64'(dut.ul_size) && d != 0, "UL_SIZE readback");
      // two preloads sharing size and destination, one unload
      wr(REG_PL_GO, 0);
      wr(REG_PL_MEM, src + 64);
      wr(REG_PL_GO, 0);
      wr(REG_UL_GO, 0);
      check(pl_seen.size() == 2 && ul_seen.size() == 1, "one push per GO");
      if (pl_seen.size() == 2) begin
        check(pl_seen[0].mem_addr == src && pl_seen[1].mem_addr == src + 64, "preload sources");
        check(pl_seen[0].nbytes == pl_seen[1].nbytes && pl_seen[0].nbytes == dut.pl_size,
              "size register reused by second GO");
        check(pl_seen[0].spm_addr == dut.pl_spm, "preload destination");
      end
      if (ul_seen.size() == 1)
        check(ul_seen[0].mem_addr == ~src && ul_seen[0].spm_addr == dut.ul_spm &&
              ul_seen[0].nbytes == dut.ul_size, "unload request");
      pl_seen.delete(); ul_seen.delete();
    end
    // stall on a full queue
    pl_push_ready = 0;
    fork
      wr(REG_PL_GO, 0);
      begin
        repeat (7) @(posedge clk);
        check(pl_seen.size() == 0, "no push while full");
        #1 pl_push_ready = 1;
      end
    join
    check(pl_seen.size() == 1, "push after room appears");
    check(stalls >= 6, $sformatf("bus held off while full (%0d cycles)", stalls));
    // status register
    for (int n = 0; n < 16; n++) begin
      pl_busy = $urandom_range(1); ul_busy = $urandom_range(1);
      pl_count = 8'($urandom_range(64)); ul_count = 8'($urandom_range(64));
      ul_push_ready = $urandom_range(1); pl_push_ready = $urandom_range(1);
      rd(REG_STATUS, d);
      check(d[0] == pl_busy && d[1] == ul_busy && d[2] == !pl_push_ready &&
            d[3] == !ul_push_ready && d[15:8] == pl_count && d[23:16] == ul_count &&
            d[7:4] == 0 && d[63:24] == 0, $sformatf("STATUS %h", d));
    end
    rd(7'h48, d); check(d == 0, "undefined offset reads 0");
    $display("stalled cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
