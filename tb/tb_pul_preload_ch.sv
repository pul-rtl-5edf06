// tb_pul_preload_ch: self-checking test of the preload channel.
// The channel reads from the behavioural memory model (RD_LAT cycles to the
// first beat) and writes a byte array standing in for the scratchpad, whose
// port is granted at random. Random byte-aligned and misaligned requests of
// 1..600 bytes, including 0-byte ones, are compared byte by byte with a
// reference copy. A batch of 16 back-to-back 64-byte preloads with the port
// always granted checks overlap: it must end within one memory latency plus
// the data beats (plus two cycles per request for the realigner to
// restart), far below 16 serial latencies.
module tb_pul_preload_ch;
  import pul_pkg::*;
  localparam int SPM   = 65536;
  localparam int MEMB  = 65536;
  localparam int LAT   = 53;
  localparam int OUTST = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready;
  pul_req_t req;
  logic ar_valid, ar_ready, r_valid, r_ready;
  mem_ar_t ar;
  mem_r_t r;
  logic spm_req, spm_gnt, busy;
  logic [12:0] spm_addr;
  logic [63:0] spm_wdata;
  logic [7:0] spm_wstrb;
  logic w_valid_unused = 0, w_ready, b_valid;
  mem_w_t w_unused = '0;
  mem_b_t b;

  pul_preload_ch #(.SPM_BYTES(SPM), .OUTSTANDING(OUTST)) dut (.*);
  pul_mem_model #(.MEM_BYTES(MEMB), .RD_LAT(LAT), .WR_LAT(10)) mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .w_valid (w_valid_unused), .w_ready, .w (w_unused), .b_valid, .b);

  int checks = 0, failures = 0;
  logic [7:0] spm_bytes [SPM];
  logic [7:0] ref_spm [SPM];
  int gnt_pct = 70;
  pul_req_t pending[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // scratchpad stand-in
  always @(posedge clk) begin
    if (spm_req && spm_gnt)
      for (int i = 0; i < 8; i++)
        if (spm_wstrb[i]) spm_bytes[{spm_addr, 3'(i)}] <= spm_wdata[8*i +: 8];
    spm_gnt <= ($urandom_range(99) < gnt_pct);
  end

  // request feeder
  // the feeder changes its outputs on the falling edge, away from the DUT's sampling edge
  always @(negedge clk) begin
    req_valid <= pending.size() > 0;
    req       <= (pending.size() > 0) ? pending[0] : '0;
  end
  always @(posedge clk) if (req_valid && req_ready) void'(pending.pop_front());

  task automatic add(input pul_req_t q);
    pending.push_back(q);
    for (int i = 0; i < int'(q.nbytes); i++)
      ref_spm[(int'(q.spm_addr) + i) % SPM] = mem.peek(q.mem_addr + 64'(i));
  endtask

  task automatic wait_idle();
    do @(posedge clk); while (busy || req_valid || pending.size() > 0);
  endtask

  task automatic compare(input string tag);
    int bad = 0;
    for (int i = 0; i < SPM; i++) if (spm_bytes[i] !== ref_spm[i]) bad++;
    check(bad == 0, $sformatf("%s: %0d scratchpad bytes differ", tag, bad));
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pul_req_t q;
    int t0, cyc;
    spm_gnt = 0; req_valid = 0;
    for (int i = 0; i < MEMB; i++) mem.poke(i, 8'($urandom));
    for (int i = 0; i < SPM; i++) begin spm_bytes[i] = 8'($urandom); ref_spm[i] = spm_bytes[i]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random requests
    for (int n = 0; n < 300; n++) begin
      q.mem_addr = 64'($urandom_range(MEMB - 1));
      q.spm_addr = 16'($urandom_range(SPM - 700));
      q.nbytes   = (n % 37 == 5) ? '0 : 17'($urandom_range(1, 600));
      add(q);
      if (n % 50 == 49) begin
        wait_idle();
        compare($sformatf("batch %0d", n / 50));
      end
    end
    // latency hiding: 16 aligned 64-byte preloads, port always granted
    gnt_pct = 100;
    repeat (5) @(posedge clk);
    t0 = $time / 10;
    for (int n = 0; n < 16; n++) begin
      q.mem_addr = 64'(n * 256 + 1024);
      q.spm_addr = 16'(n * 64);
      q.nbytes   = 17'd64;
      add(q);
    end
    wait_idle();
    cyc = $time / 10 - t0;
    compare("distance 16");
    $display("16 x 64 B preloads took %0d cycles (memory latency %0d)", cyc, LAT);
    check(cyc <= LAT + 16 * (8 + 2) + 16, $sformatf("preloads overlap: %0d cycles", cyc));
    check(cyc >= LAT + 16 * 8, "cannot beat latency plus data beats");
    // single preload latency
    t0 = $time / 10;
    q.mem_addr = 64'h100; q.spm_addr = 16'h2000; q.nbytes = 17'd64;
    add(q);
    wait_idle();
    cyc = $time / 10 - t0;
    $display("one 64 B preload took %0d cycles", cyc);
    check(cyc <= LAT + 8 + 6, $sformatf("single preload latency %0d", cyc));
    compare("single");
    check(mem.reads == 16 + 1 + 300 - 8, $sformatf("one burst per non-empty request (%0d)", mem.reads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
