// tb_pul_ndp_top: end-to-end test of the PE-array side of the NDP device at
// its default size: 14 PUL units with 64 KiB scratchpads and 64-entry queues,
// sharing one behavioural memory with NVM latencies (350 ns read, 170 ns
// write at 150 MHz). Each unit is driven by a PE model running the batch-wise
// kernel (random 64-byte records from a shared dataset, sum of K words per
// record, sums unloaded to a PE-private result area) with its own preload
// distance, intensity and alignment. PE 13 waits for every preload at once
// (no interleaving) and PE 12 uses a distance of 128, past the queue depth.
// Checks every PE's sum and every unloaded result against values worked out
// from the memory image, and counts how often each mechanism of the design
// happened; one that never happened counts as a failure. (Both channels of a
// unit asking for the scratchpad port in the same cycle is rare with this
// traffic; it is reported here and forced in the DMA engine's own test.)
module tb_pul_ndp_top;
  import pul_pkg::*;
  localparam int NUM_PE = 14;
  localparam int NRECS  = 128;
  localparam int NREC   = 2048;
  localparam int MEMB   = 1 << 22;
  localparam longint RES = 'h200000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [NUM_PE-1:0] bus_valid, bus_ready, bus_we, rsp_valid, pe_spm_en, pe_spm_we;
  logic [6:0]  bus_addr [NUM_PE];
  logic [63:0] bus_wdata [NUM_PE], rsp_rdata [NUM_PE], pe_spm_wdata [NUM_PE], pe_spm_rdata [NUM_PE];
  logic [12:0] pe_spm_addr [NUM_PE];
  logic [7:0]  pe_spm_wstrb [NUM_PE];
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_w_valid, m_w_ready, m_b_valid;
  mem_ar_t m_ar; mem_r_t m_r; mem_w_t m_w; mem_b_t m_b;

  pul_ndp_top dut (.*);

  pul_mem_model #(.MEM_BYTES(MEMB), .RD_LAT(53), .WR_LAT(26)) mem (
    .clk, .rst_n, .ar_valid (m_ar_valid), .ar_ready (m_ar_ready), .ar (m_ar),
    .r_valid (m_r_valid), .r_ready (m_r_ready), .r (m_r),
    .w_valid (m_w_valid), .w_ready (m_w_ready), .w (m_w),
    .b_valid (m_b_valid), .b (m_b));

  int checks = 0, failures = 0;
  logic [NUM_PE-1:0] done, verified = '0;
  int unsigned cycles [NUM_PE], stalls [NUM_PE], reg_writes [NUM_PE];
  longint unsigned result [NUM_PE];

  // mechanism counters
  int n_ar_contend = 0, n_w_wait = 0, n_spm_contend = 0, n_outstanding = 0,
      n_pl_ul_overlap = 0, n_queue_full = 0, n_misaligned = 0, n_stall = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] data_byte(input longint unsigned a);
    logic [31:0] x = 32'(a) * 32'h01000193 ^ 32'h5bd1e995;
    return x[23:16] ^ x[7:0];
  endfunction

  function automatic int unsigned rec_index(input int p, input int i);
    int unsigned x;
    x = 32'(p) * 32'h9E3779B9 + 32'(i) * 32'h85EBCA6B + 32'h1234567;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 13);
    return x % NREC;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.ar_valid) > 1) n_ar_contend++;
    if (dut.u_arb.w_locked && |(dut.w_valid & ~(NUM_PE'(1) << dut.u_arb.w_owner))) n_w_wait++;
  end

  for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
    localparam int     DIST = (g == 12) ? 128 : (1 << (g % 7));     // 1 .. 64
    localparam int     K    = 1 + (g % 4);
    localparam bit     SYNC = (g == 13);
    localparam longint BASE = (g % 3 == 1) ? 5 : 0;
    localparam longint RESB = RES + g * 'h10000;

    pul_pe_model #(.PE_ID(g), .NRECS(NRECS), .DIST(DIST), .K(K), .NREC(NREC),
                   .DATA_BASE(BASE), .RES_BASE(RESB), .SYNC(SYNC)) pe (
      .clk, .rst_n, .start, .done (done[g]), .result (result[g]), .cycles (cycles[g]),
      .stalls (stalls[g]), .reg_writes (reg_writes[g]),
      .bus_valid (bus_valid[g]), .bus_ready (bus_ready[g]), .bus_we (bus_we[g]),
      .bus_addr (bus_addr[g]), .bus_wdata (bus_wdata[g]),
      .rsp_valid (rsp_valid[g]), .rsp_rdata (rsp_rdata[g]),
      .spm_en (pe_spm_en[g]), .spm_we (pe_spm_we[g]), .spm_addr (pe_spm_addr[g]),
      .spm_wdata (pe_spm_wdata[g]), .spm_wstrb (pe_spm_wstrb[g]), .spm_rdata (pe_spm_rdata[g]));

    always @(posedge clk) if (rst_n) begin
      if (dut.g_pe[g].u_unit.u_dma.pl_spm_req && dut.g_pe[g].u_unit.u_dma.ul_spm_req) n_spm_contend++;
      if (dut.g_pe[g].u_unit.u_dma.u_pl.inf_count > 1) n_outstanding++;
      if (dut.g_pe[g].u_unit.pl_busy && dut.g_pe[g].u_unit.ul_busy) n_pl_ul_overlap++;
      if (!dut.g_pe[g].u_unit.pl_push_ready) n_queue_full++;
      if (bus_valid[g] && !bus_ready[g]) n_stall++;
      if (dut.g_pe[g].u_unit.pl_push_valid && dut.g_pe[g].u_unit.pl_push_ready &&
          dut.g_pe[g].u_unit.pl_push.mem_addr[2:0] != 0) n_misaligned++;
    end

    initial begin
      longint unsigned total, s, v, got;
      int bad;
      total = 0; bad = 0;
      wait (done[g]);
      @(posedge clk);
      for (int i = 0; i < NRECS; i++) begin
        s = 0;
        for (int k = 0; k < K; k++) begin
          v = 0;
          for (int j = 0; j < 8; j++)
            v[8*j +: 8] = data_byte(BASE + longint'(rec_index(g, i)) * 64 + k * 8 + j);
          s += v;
        end
        total += s;
        got = 0;
        for (int j = 0; j < 8; j++) got[8*j +: 8] = mem.peek(RESB + i * 8 + j);
        if (got != s) bad++;
      end
      check(result[g] == total, $sformatf("PE %0d: sum %h expected %h", g, result[g], total));
      check(bad == 0, $sformatf("PE %0d: %0d unloaded sums wrong", g, bad));
      $display("PE %2d: distance %3d, K %0d%s: %6d cycles, %0d stalled", g, DIST, K,
               SYNC ? ", no interleaving" : "", cycles[g], stalls[g]);
      verified[g] = 1'b1;
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    for (int i = 0; i < NREC * 64 + 64; i++) mem.poke(i, data_byte(i));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start = 1;
    wait (&verified);
    $display("mechanisms: read arbitration %0d, write burst lock %0d, scratchpad port sharing %0d,",
             n_ar_contend, n_w_wait, n_spm_contend);
    $display("  preloads in flight %0d, preload+unload overlap %0d, queue full %0d, PE stalled %0d, misaligned %0d",
             n_outstanding, n_pl_ul_overlap, n_queue_full, n_stall, n_misaligned);
    check(n_ar_contend > 0,   "read requests of several units arbitrated");
    check(n_w_wait > 0,       "a write burst held the memory port against another unit");
    check(n_outstanding > 0,  "several preloads in flight in one unit");
    check(n_pl_ul_overlap > 0,"preload and unload ran concurrently");
    check(n_queue_full > 0,   "a request queue filled up");
    check(n_stall > 0 && stalls[12] > 0, "a PE was stalled on a full queue");
    check(n_misaligned > 0,   "misaligned byte-addressed transfers");
    check(cycles[13] > cycles[4], "interleaved preloading beats waiting for each preload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
