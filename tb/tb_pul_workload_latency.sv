// tb_pul_workload_latency: the same preload workload on two full-size PE
// arrays side by side, one behind NVM latencies (350 ns read, 170 ns write:
// 53 and 26 cycles at 150 MHz) and one behind DRAM latencies 3.5 times
// shorter (100 ns and 49 ns: 15 and 7 cycles).
//
// In each array, six PEs run one after another, each alone on the memory:
// PEs 0-2 run the batch-wise kernel with preload distance 64 on random
// 64-byte records at three operational intensities (K = 1, 4 and 8 words
// summed per record, WORK cycles per word); PEs 3-5 run the same work but wait
// for every preload (no interleaving). PEs 6-13 stay idle. Running one PE at
// a time keeps the shared memory port out of the comparison: with several
// PEs at once, the in-order read channel rather than the latency sets the
// pace. The NVM latencies and the 3.5x gap come from the
// paper; the DRAM numbers are derived from that ratio. The record count and
// the intensities are this test's own choice. Run time: about 50 000 cycles.
//
// Checks every sum and unloaded result in both arrays. It also checks that
// with interleaving NVM runs within 10 % of DRAM at every intensity, that
// without it NVM is at least 1.3 times slower, and that interleaving gains
// more on NVM than on DRAM.
module tb_pul_workload_latency;
  import pul_pkg::*;
  localparam int NUM_PE = 14;
  localparam int NRECS  = 128;
  localparam int NREC   = 2048;
  localparam int MEMB   = 1 << 22;
  localparam longint RES = 'h200000;
  localparam int WORK   = 4;

  localparam int NRUN   = 6;
  localparam int KS [3] = '{1, 4, 8};

  logic clk = 0, rst_n = 0;
  logic [NUM_PE-1:0] start = '0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [NUM_PE-1:0] verified [2];
  int unsigned cycles [2][NUM_PE];

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

  for (genvar m = 0; m < 2; m++) begin : g_mem
    localparam int RD = (m == 0) ? 53 : 15;
    localparam int WR = (m == 0) ? 26 : 7;

    logic [NUM_PE-1:0] bus_valid, bus_ready, bus_we, rsp_valid, pe_spm_en, pe_spm_we, done;
    logic [6:0]  bus_addr [NUM_PE];
    logic [63:0] bus_wdata [NUM_PE], rsp_rdata [NUM_PE], pe_spm_wdata [NUM_PE], pe_spm_rdata [NUM_PE];
    logic [12:0] pe_spm_addr [NUM_PE];
    logic [7:0]  pe_spm_wstrb [NUM_PE];
    logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_w_valid, m_w_ready, m_b_valid;
    mem_ar_t m_ar; mem_r_t m_r; mem_w_t m_w; mem_b_t m_b;
    int unsigned stalls [NUM_PE], reg_writes [NUM_PE];
    longint unsigned result [NUM_PE];

    pul_ndp_top dut (.*);

    pul_mem_model #(.MEM_BYTES(MEMB), .RD_LAT(RD), .WR_LAT(WR)) mem (
      .clk, .rst_n, .ar_valid (m_ar_valid), .ar_ready (m_ar_ready), .ar (m_ar),
      .r_valid (m_r_valid), .r_ready (m_r_ready), .r (m_r),
      .w_valid (m_w_valid), .w_ready (m_w_ready), .w (m_w),
      .b_valid (m_b_valid), .b (m_b));

    initial begin
      #1;
      for (int i = 0; i < NREC * 64; i++) mem.poke(i, data_byte(i));
    end

    for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
      localparam int     K    = (g % 3 == 0) ? 1 : (g % 3 == 1) ? 4 : 8;
      localparam bit     SYNC = (g >= 3);
      localparam longint RESB = RES + g * 'h10000;

      pul_pe_model #(.PE_ID(g), .NRECS(NRECS), .DIST(64), .K(K), .WORK(WORK), .NREC(NREC),
                     .DATA_BASE(0), .RES_BASE(RESB), .SYNC(SYNC)) pe (
        .clk, .rst_n, .start (start[g]), .done (done[g]), .result (result[g]), .cycles (cycles[m][g]),
        .stalls (stalls[g]), .reg_writes (reg_writes[g]),
        .bus_valid (bus_valid[g]), .bus_ready (bus_ready[g]), .bus_we (bus_we[g]),
        .bus_addr (bus_addr[g]), .bus_wdata (bus_wdata[g]),
        .rsp_valid (rsp_valid[g]), .rsp_rdata (rsp_rdata[g]),
        .spm_en (pe_spm_en[g]), .spm_we (pe_spm_we[g]), .spm_addr (pe_spm_addr[g]),
        .spm_wdata (pe_spm_wdata[g]), .spm_wstrb (pe_spm_wstrb[g]), .spm_rdata (pe_spm_rdata[g]));

      initial begin
        longint unsigned total, s, v, got;
        int bad;
        total = 0; bad = 0;
        verified[m][g] = 1'b0;
        wait (done[g]);
        @(posedge clk);
        for (int i = 0; i < NRECS; i++) begin
          s = 0;
          for (int k = 0; k < K; k++) begin
            v = 0;
            for (int j = 0; j < 8; j++)
              v[8*j +: 8] = data_byte(longint'(rec_index(g, i)) * 64 + k * 8 + j);
            s += v;
          end
          total += s;
          got = 0;
          for (int j = 0; j < 8; j++) got[8*j +: 8] = mem.peek(RESB + i * 8 + j);
          if (got != s) bad++;
        end
        check(result[g] == total, $sformatf("%s PE %0d: wrong sum", m ? "DRAM" : "NVM", g));
        check(bad == 0, $sformatf("%s PE %0d: %0d unloaded sums wrong", m ? "DRAM" : "NVM", g, bad));
        verified[m][g] = 1'b1;
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real gain [2];
    #2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int g = 0; g < NRUN; g++) begin
      start[g] = 1'b1;
      wait (verified[0][g] && verified[1][g]);
      @(posedge clk);
    end
    $display("K  interleaved NVM / DRAM   waiting NVM / DRAM   gain NVM / DRAM");
    for (int k = 0; k < 3; k++) begin
      for (int m = 0; m < 2; m++) gain[m] = real'(cycles[m][k + 3]) / real'(cycles[m][k]);
      $display("%0d  %7d / %7d      %7d / %7d      %4.2f / %4.2f", KS[k],
               cycles[0][k], cycles[1][k], cycles[0][k + 3], cycles[1][k + 3], gain[0], gain[1]);
      check(real'(cycles[0][k]) < 1.10 * real'(cycles[1][k]),
            $sformatf("K %0d: interleaved NVM %0d not within 10%% of DRAM %0d",
                      KS[k], cycles[0][k], cycles[1][k]));
      check(real'(cycles[0][k + 3]) > 1.3 * real'(cycles[1][k + 3]),
            $sformatf("K %0d: waiting NVM %0d not 1.3x DRAM %0d",
                      KS[k], cycles[0][k + 3], cycles[1][k + 3]));
      check(gain[0] > gain[1], $sformatf("K %0d: interleaving gains less on NVM", KS[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
