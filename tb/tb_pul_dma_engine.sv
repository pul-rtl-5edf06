// tb_pul_dma_engine: self-checking test of the DMA engine with its two
// 64-entry queues, the real scratchpad on its DMA port and the behavioural
// memory (NVM latencies, random back-pressure). Preloads (memory region A ->
// lower scratchpad half) and unloads (upper scratchpad half -> memory region
// B) are queued at the same time so both channels compete for the scratchpad
// port. The queues are filled past 64 entries to see them refuse requests.
// Results are read back through the scratchpad's PE port and from memory and
// compared byte by byte with reference images; port contention and full
// queues are counted and must have happened.
module tb_pul_dma_engine;
  import pul_pkg::*;
  localparam int SPM  = 65536;
  localparam int MEMB = 1 << 17;
  localparam int HALF = SPM / 2;
  localparam int BREG = 1 << 16;   // memory region B starts here

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pl_push_valid, pl_push_ready, ul_push_valid, ul_push_ready, pl_busy, ul_busy;
  pul_req_t pl_push, ul_push;
  logic [6:0] pl_count, ul_count;
  logic ar_valid, ar_ready, r_valid, r_ready, w_valid, w_ready, b_valid;
  mem_ar_t ar; mem_r_t r; mem_w_t w; mem_b_t b;
  logic spm_en, spm_we;
  logic [12:0] spm_addr;
  logic [63:0] spm_wdata, spm_rdata;
  logic [7:0] spm_wstrb;
  logic a_en, a_we;
  logic [12:0] a_addr;
  logic [63:0] a_wdata, a_rdata;
  logic [7:0] a_wstrb;

  pul_dma_engine #(.SPM_BYTES(SPM), .FIFO_DEPTH(64), .ID(4'd5)) dut (.*);
  pul_scratchpad #(.BYTES(SPM)) spm (
    .clk, .a_en, .a_we, .a_addr, .a_wdata, .a_wstrb, .a_rdata,
    .b_en (spm_en), .b_we (spm_we), .b_addr (spm_addr), .b_wdata (spm_wdata),
    .b_wstrb (spm_wstrb), .b_rdata (spm_rdata));
  pul_mem_model #(.MEM_BYTES(MEMB), .RD_LAT(53), .WR_LAT(26), .STALL_PCT(10)) mem (.*);

  int checks = 0, failures = 0, contention = 0, pl_full_seen = 0, ul_full_seen = 0;
  logic [7:0] ref_spm [SPM];
  logic [7:0] ref_mem [MEMB];
  pul_req_t pl_q[$], ul_q[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // feeders change their outputs on the falling edge, away from the DUT's sampling edge
  always @(negedge clk) begin
    pl_push_valid <= pl_q.size() > 0;
    pl_push       <= pl_q.size() > 0 ? pl_q[0] : '0;
    ul_push_valid <= ul_q.size() > 0;
    ul_push       <= ul_q.size() > 0 ? ul_q[0] : '0;
  end
  always @(posedge clk) begin
    if (pl_push_valid && pl_push_ready) void'(pl_q.pop_front());
    if (ul_push_valid && ul_push_ready) void'(ul_q.pop_front());
    if (dut.pl_spm_req && dut.ul_spm_req) contention++;
    if (pl_push_valid && !pl_push_ready) pl_full_seen++;
    if (ul_push_valid && !ul_push_ready) ul_full_seen++;
    if (ar_valid) check(ar.id == 4'd5, "read tagged with unit id");
    if (w_valid)  check(w.id == 4'd5, "write tagged with unit id");
  end

  task automatic spm_write(input int word, input logic [63:0] d);
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = 13'(word); a_wdata = d; a_wstrb = 8'hff;
    @(negedge clk);
    a_en = 0; a_we = 0;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pul_req_t q;
    int bad;
    a_en = 0; a_we = 0; a_addr = 0; a_wdata = 0; a_wstrb = 0; pl_push_valid = 0; ul_push_valid = 0;
    for (int i = 0; i < MEMB; i++) begin ref_mem[i] = 8'($urandom); mem.poke(i, ref_mem[i]); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill the scratchpad through the PE port
    for (int wd = 0; wd < SPM / 8; wd++) begin
      logic [63:0] d = {$urandom, $urandom};
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 13'(wd); a_wdata = d; a_wstrb = 8'hff;
      for (int k = 0; k < 8; k++) ref_spm[wd * 8 + k] = d[8*k +: 8];
    end
    @(negedge clk); a_en = 0; a_we = 0;
    // queue 100 preloads and 100 unloads at once; the reference applies them
    // in queue order, which is the order each channel executes them in.
    for (int n = 0; n < 100; n++) begin
      q.mem_addr = 64'($urandom_range(BREG - 600));
      q.spm_addr = 16'($urandom_range(HALF - 600));
      q.nbytes   = 17'($urandom_range(1, 512));
      pl_q.push_back(q);
      for (int i = 0; i < int'(q.nbytes); i++) ref_spm[q.spm_addr + i] = ref_mem[q.mem_addr + i];
    end
    for (int n = 0; n < 100; n++) begin
      q.mem_addr = 64'(BREG + $urandom_range(BREG - 600));
      q.spm_addr = 16'(HALF + $urandom_range(HALF - 600));
      q.nbytes   = 17'($urandom_range(1, 512));
      ul_q.push_back(q);
      for (int i = 0; i < int'(q.nbytes); i++) ref_mem[q.mem_addr + i] = ref_spm[q.spm_addr + i];
    end
    repeat (3) @(posedge clk);
    check(pl_busy && ul_busy, "both channels busy");
    do @(posedge clk); while (pl_q.size() || ul_q.size() || pl_push_valid || ul_push_valid || pl_busy || ul_busy);
    check(pl_count == 0 && ul_count == 0, "queues empty at the end");
    // compare scratchpad through port A
    bad = 0;
    for (int wd = 0; wd < SPM / 8; wd++) begin
      @(negedge clk);
      a_en = 1; a_we = 0; a_addr = 13'(wd);
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) if (a_rdata[8*k +: 8] !== ref_spm[wd * 8 + k]) bad++;
    end
    a_en = 0;
    check(bad == 0, $sformatf("scratchpad: %0d bytes differ", bad));
    bad = 0;
    for (int i = 0; i < MEMB; i++) if (mem.peek(i) !== ref_mem[i]) bad++;
    check(bad == 0, $sformatf("memory: %0d bytes differ", bad));
    $display("port contention cycles %0d, preload queue full %0d, unload queue full %0d",
             contention, pl_full_seen, ul_full_seen);
    check(contention > 0, "channels competed for the scratchpad port");
    check(pl_full_seen > 0 && ul_full_seen > 0, "queues filled up");
    check(mem.reads == 100 && mem.writes == 100, $sformatf("one burst per request: %0d reads, %0d writes", mem.reads, mem.writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
