// tb_pul_workload_unload: the unloading workload run on the full-size PE
// array (14 PUL units, 64 KiB scratchpads, 64-entry queues, one memory with
// NVM latencies of 53 read / 26 write cycles).
//
// Each PE computes 2048 result words, WORK cycles each, in its scratchpad
// and flushes them to scattered memory blocks whenever FLUSH bytes have
// collected. WORK keeps the 14 PEs together below the bandwidth of the one
// memory port, so that the test measures flush latency, not port sharing. PEs 0-4 flush
// at 32, 128, 512, 2048 and 8192 bytes with interleaved unloads; PEs 5-9 use
// the same sizes but wait for each flush to be written and acknowledged;
// PEs 10-13 flush 64-byte blocks with interleaving. The flush sizes follow the
// paper's NDP unloading experiment; the word count and PE split are this
// test's own choice.
//
// Checks every word in memory against the value the PE wrote. It also checks
// that interleaving beats waiting at every size, that waiting costs more the
// smaller the flushes (32 > 128 > 512 bytes), and that interleaving gains
// the most at 32-byte flushes.
module tb_pul_workload_unload;
  import pul_pkg::*;
  localparam int NUM_PE = 14;
  localparam int NWORDS = 2048;
  localparam int WORK   = 24;
  localparam int MEMB   = 1 << 20;
  localparam longint RES = 'h10000;

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

  int checks = 0, failures = 0, n_ul_full = 0;
  logic [NUM_PE-1:0] done, verified = '0;
  int unsigned cycles [NUM_PE], stalls [NUM_PE], unloads [NUM_PE];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] val(input int p, input int i);
    logic [63:0] x;
    x = 64'(p) * 64'h9E3779B97F4A7C15 + 64'(i) * 64'hBF58476D1CE4E5B9;
    return x ^ (x >> 29);
  endfunction

  for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
    localparam int     FLUSH = (g < 10) ? (32 << (2 * (g % 5))) : 64;
    localparam bit     SYNC  = (g >= 5 && g < 10);
    localparam longint RESB  = RES + g * 'h8000;
    localparam int     NBLK  = NWORDS * 8 / FLUSH;

    pul_pe_flush_model #(.PE_ID(g), .NWORDS(NWORDS), .FLUSH(FLUSH), .WORK(WORK),
                         .RES_BASE(RESB), .SYNC(SYNC)) pe (
      .clk, .rst_n, .start, .done (done[g]), .cycles (cycles[g]), .stalls (stalls[g]),
      .unloads (unloads[g]),
      .bus_valid (bus_valid[g]), .bus_ready (bus_ready[g]), .bus_we (bus_we[g]),
      .bus_addr (bus_addr[g]), .bus_wdata (bus_wdata[g]),
      .rsp_valid (rsp_valid[g]), .rsp_rdata (rsp_rdata[g]),
      .spm_en (pe_spm_en[g]), .spm_we (pe_spm_we[g]), .spm_addr (pe_spm_addr[g]),
      .spm_wdata (pe_spm_wdata[g]), .spm_wstrb (pe_spm_wstrb[g]), .spm_rdata (pe_spm_rdata[g]));

    always @(posedge clk) if (rst_n && !dut.g_pe[g].u_unit.ul_push_ready) n_ul_full++;

    initial begin
      longint unsigned got;
      int bad, n, w;
      bad = 0;
      wait (done[g]);
      @(posedge clk);
      for (int i = 0; i < NWORDS; i++) begin
        n = i * 8 / FLUSH;
        w = (i * 8) % FLUSH;
        got = 0;
        for (int j = 0; j < 8; j++)
          got[8*j +: 8] = mem.peek(RESB + ((n * 5) % NBLK) * FLUSH + w + j);
        if (got != val(g, i)) bad++;
      end
      check(bad == 0, $sformatf("PE %0d: %0d flushed words wrong", g, bad));
      check(unloads[g] == NBLK, $sformatf("PE %0d: %0d flushes", g, unloads[g]));
      $display("PE %2d: flush %4d B%s: %6d cycles, %0d flushes", g, FLUSH,
               SYNC ? ", waiting    " : ", interleaved", cycles[g], unloads[g]);
      verified[g] = 1'b1;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    for (int i = 0; i < MEMB; i++) mem.poke(i, 8'h00);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start = 1;
    wait (&verified);
    for (int s = 0; s < 5; s++)
      check(cycles[s] < cycles[s + 5],
            $sformatf("flush %0d B: interleaved %0d cycles not faster than waiting %0d",
                      32 << (2 * s), cycles[s], cycles[s + 5]));
    check(cycles[5] > cycles[6] && cycles[6] > cycles[7],
          "waiting for flushes costs more the smaller they are");
    check(cycles[5] - cycles[0] > cycles[9] - cycles[4],
          "interleaving gains more at 32-byte than at 8192-byte flushes");
    $display("unload queue full: %0d cycles", n_ul_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
