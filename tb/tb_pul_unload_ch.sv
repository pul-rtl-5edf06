// tb_pul_unload_ch: self-checking test of the unload channel.
// A byte array with a one-cycle read stands in for the scratchpad (port
// granted at random); the behavioural memory refuses write beats at random
// and acknowledges bursts WR_LAT cycles after their last beat. Random aligned
// and misaligned unloads of 0..700 bytes are compared byte by byte with a
// reference image of memory. Also checks that busy stays high until the
// last acknowledgement has arrived, and that each non-empty unload is one
// burst.
module tb_pul_unload_ch;
  import pul_pkg::*;
  localparam int SPM  = 65536;
  localparam int MEMB = 65536;
  localparam int WLAT = 26;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready;
  pul_req_t req;
  logic spm_req, spm_gnt, busy;
  logic [12:0] spm_addr;
  logic [63:0] spm_rdata;
  logic w_valid, w_ready, b_valid;
  mem_w_t w;
  mem_b_t b;
  logic ar_valid_unused = 0, ar_ready, r_valid, r_ready_unused = 0;
  mem_ar_t ar_unused = '0;
  mem_r_t r;

  pul_unload_ch #(.SPM_BYTES(SPM), .MAX_ACKS(64)) dut (.*);
  pul_mem_model #(.MEM_BYTES(MEMB), .RD_LAT(10), .WR_LAT(WLAT), .STALL_PCT(25)) mem (
    .clk, .rst_n, .ar_valid (ar_valid_unused), .ar_ready, .ar (ar_unused), .r_valid,
    .r_ready (r_ready_unused), .r, .w_valid, .w_ready, .w, .b_valid, .b);

  int checks = 0, failures = 0, nonempty = 0;
  logic [7:0] spm_bytes [SPM];
  logic [7:0] ref_mem [MEMB];
  int gnt_pct = 70;
  pul_req_t pending[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // scratchpad stand-in: one-cycle read
  always @(posedge clk) begin
    if (spm_req && spm_gnt)
      for (int i = 0; i < 8; i++) spm_rdata[8*i +: 8] <= spm_bytes[{spm_addr, 3'(i)}];
    spm_gnt <= ($urandom_range(99) < gnt_pct);
  end

  // the feeder changes its outputs on the falling edge, away from the DUT's sampling edge
  always @(negedge clk) begin
    req_valid <= pending.size() > 0;
    req       <= (pending.size() > 0) ? pending[0] : '0;
  end
  always @(posedge clk) if (req_valid && req_ready) void'(pending.pop_front());

  task automatic add(input pul_req_t q);
    pending.push_back(q);
    if (q.nbytes != 0) nonempty++;
    for (int i = 0; i < int'(q.nbytes); i++)
      ref_mem[(q.mem_addr + 64'(i)) % MEMB] = spm_bytes[(int'(q.spm_addr) + i) % SPM];
  endtask

  task automatic wait_idle();
    do @(posedge clk); while (busy || req_valid || pending.size() > 0);
  endtask

  task automatic compare(input string tag);
    int bad = 0;
    for (int i = 0; i < MEMB; i++) if (mem.peek(i) !== ref_mem[i]) bad++;
    check(bad == 0, $sformatf("%s: %0d memory bytes differ", tag, bad));
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pul_req_t q;
    int t_last, t_idle;
    spm_gnt = 0; spm_rdata = 0; req_valid = 0;
    for (int i = 0; i < SPM; i++) spm_bytes[i] = 8'($urandom);
    for (int i = 0; i < MEMB; i++) begin ref_mem[i] = 8'($urandom); mem.poke(i, ref_mem[i]); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      q.mem_addr = 64'($urandom_range(MEMB - 701));
      q.spm_addr = 16'($urandom_range(SPM - 1));
      q.nbytes   = (n % 41 == 3) ? '0 : 17'($urandom_range(1, 700));
      add(q);
      if (n % 60 == 59) begin
        wait_idle();
        compare($sformatf("batch %0d", n / 60));
      end
    end
    // busy must cover the acknowledgement of the last burst
    q.mem_addr = 64'h800; q.spm_addr = 16'h10; q.nbytes = 17'd64;
    add(q);
    @(posedge clk);
    while (!(w_valid && w_ready && w.last)) @(posedge clk);
    t_last = $time / 10;
    wait_idle();
    t_idle = $time / 10;
    $display("busy cleared %0d cycles after the last beat (write latency %0d)", t_idle - t_last, WLAT);
    check(t_idle - t_last >= WLAT, "busy held until acknowledgement");
    check(t_idle - t_last <= WLAT + 3, "busy clears soon after acknowledgement");
    compare("final");
    check(mem.writes == nonempty, $sformatf("one burst per unload: %0d vs %0d", mem.writes, nonempty));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
