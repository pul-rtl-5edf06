// tb_pul_workload_sizes: the transfer-size workload run on the full-size PE
// array (14 PUL units, 64 KiB scratchpads, 64-entry queues, one memory with
// NVM latencies of 53 read / 26 write cycles).
//
// Each PE sums one word of each of NRECS random records of RECB bytes (the
// SUM with minimal compute) and unloads the sums. PEs 0-4 use record sizes
// 32, 64, 128, 256 and 512 bytes with interleaved preloading; PEs 5-9 run the
// same sizes but wait for every preload (no interleaving); PEs 10-13 run the
// default 64-byte, distance-64 case with more compute (K = 4). The preload
// distance is 64, except 32 for 512-byte records: with double buffering,
// 2 x 64 x 512 bytes would fill the whole scratchpad and leave no room for the
// output buffer. The sizes follow the paper's experiment; the record counts,
// intensities and PE split are this test's own choice.
//
// Checks every PE's sum and unloaded results against the memory image, that
// interleaving beats waiting at every size, and that 512-byte records move
// more bytes per cycle than 32-byte ones. Prints cycles and bytes per cycle.
module tb_pul_workload_sizes;
  import pul_pkg::*;
  localparam int NUM_PE = 14;
  localparam int NRECS  = 96;
  localparam int NREC   = 1024;
  localparam int MEMB   = 1 << 22;
  localparam longint RES = 'h300000;

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

  for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
    localparam int     RECB = (g < 10) ? (32 << (g % 5)) : 64;
    localparam int     DIST = (RECB == 512) ? 32 : 64;
    localparam int     K    = (g < 10) ? 1 : 4;
    localparam bit     SYNC = (g >= 5 && g < 10);
    localparam longint RESB = RES + g * 'h4000;

    pul_pe_model #(.PE_ID(g), .NRECS(NRECS), .DIST(DIST), .K(K), .RECB(RECB), .NREC(NREC),
                   .DATA_BASE(0), .RES_BASE(RESB), .SYNC(SYNC)) pe (
      .clk, .rst_n, .start, .done (done[g]), .result (result[g]), .cycles (cycles[g]),
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
      wait (done[g]);
      @(posedge clk);
      for (int i = 0; i < NRECS; i++) begin
        s = 0;
        for (int k = 0; k < K; k++) begin
          v = 0;
          for (int j = 0; j < 8; j++)
            v[8*j +: 8] = data_byte(longint'(rec_index(g, i)) * RECB + k * 8 + j);
          s += v;
        end
        total += s;
        got = 0;
        for (int j = 0; j < 8; j++) got[8*j +: 8] = mem.peek(RESB + i * 8 + j);
        if (got != s) bad++;
      end
      check(result[g] == total, $sformatf("PE %0d: sum %h expected %h", g, result[g], total));
      check(bad == 0, $sformatf("PE %0d: %0d unloaded sums wrong", g, bad));
      $display("PE %2d: %3d B records, distance %2d, K %0d%s: %6d cycles, %0.2f bytes/cycle",
               g, RECB, DIST, K, SYNC ? ", no interleaving" : "                ",
               cycles[g], real'(NRECS * RECB) / real'(cycles[g]));
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
    for (int i = 0; i < NREC * 512; i++) mem.poke(i, data_byte(i));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start = 1;
    wait (&verified);
    for (int s = 0; s < 5; s++)
      check(cycles[s] < cycles[s + 5],
            $sformatf("%0d B: interleaved %0d cycles not faster than waiting %0d",
                      32 << s, cycles[s], cycles[s + 5]));
    check(real'(NRECS * 512) / real'(cycles[4]) > real'(NRECS * 32) / real'(cycles[0]),
          "512-byte transfers move more bytes per cycle than 32-byte ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
