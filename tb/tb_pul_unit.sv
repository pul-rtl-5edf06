// tb_pul_unit: self-checking test of one PUL unit driven by a PE model
// running the batch-wise preload/compute/unload kernel over NVM-like memory
// (350 ns read, 170 ns write at 150 MHz). Three copies run side by side, each
// with its own memory:
//   A  preload distance 16, dataset misaligned by 3 bytes
//   B  the same work with every preload waited for at once (no interleaving)
//   C  distance 128, more requests per batch than the 64-entry queue holds,
//      so the PE is stalled on a full queue
// Checks the sums the PE computed and the sums unloaded to memory against
// values worked out from the memory image, that A beats B by at least 2x,
// that C was stalled, and that the size register was written only once.
module tb_pul_unit;
  import pul_pkg::*;
  localparam int N      = 3;
  localparam int NRECS  = 256;
  localparam int K      = 2;
  localparam int NREC   = 512;
  localparam int MEMB   = 1 << 21;
  localparam longint RES = 'h100000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [N-1:0] done;
  int unsigned cycles [N], stalls [N], reg_writes [N];
  longint unsigned result [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] data_byte(input longint unsigned a);
    logic [31:0] x = 32'(a) * 32'h01000193 ^ 32'h5bd1e995;
    return x[23:16] ^ x[7:0];
  endfunction

  // trace of the PE model, restated here to work out expected values
  function automatic int unsigned rec_index(input int p, input int i);
    int unsigned x;
    x = 32'(p) * 32'h9E3779B9 + 32'(i) * 32'h85EBCA6B + 32'h1234567;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 13);
    return x % NREC;
  endfunction

  logic [N-1:0] verified = '0;

  for (genvar g = 0; g < N; g++) begin : g_inst
    localparam int     DIST = (g == 2) ? 128 : 16;
    localparam bit     SYNC = (g == 1);
    localparam longint BASE = (g == 2) ? 0 : 3;
    logic bus_valid, bus_ready, bus_we, rsp_valid, spm_en, spm_we;
    logic [6:0] bus_addr;
    logic [63:0] bus_wdata, rsp_rdata, spm_wdata, spm_rdata;
    logic [12:0] spm_addr;
    logic [7:0] spm_wstrb;
    logic ar_valid, ar_ready, r_valid, r_ready, w_valid, w_ready, b_valid;
    mem_ar_t ar; mem_r_t r; mem_w_t w; mem_b_t b;

    pul_unit #(.ID(ID_W'(g))) dut (
      .clk, .rst_n, .bus_valid, .bus_ready, .bus_we, .bus_addr, .bus_wdata, .rsp_valid, .rsp_rdata,
      .pe_spm_en (spm_en), .pe_spm_we (spm_we), .pe_spm_addr (spm_addr),
      .pe_spm_wdata (spm_wdata), .pe_spm_wstrb (spm_wstrb), .pe_spm_rdata (spm_rdata),
      .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r, .w_valid, .w_ready, .w, .b_valid, .b);

    pul_pe_model #(.PE_ID(0), .NRECS(NRECS), .DIST(DIST), .K(K), .NREC(NREC),
                   .DATA_BASE(BASE), .RES_BASE(RES), .SYNC(SYNC)) pe (
      .clk, .rst_n, .start, .done (done[g]), .result (result[g]), .cycles (cycles[g]),
      .stalls (stalls[g]), .reg_writes (reg_writes[g]),
      .bus_valid, .bus_ready, .bus_we, .bus_addr, .bus_wdata, .rsp_valid, .rsp_rdata,
      .spm_en, .spm_we, .spm_addr, .spm_wdata, .spm_wstrb, .spm_rdata);

    pul_mem_model #(.MEM_BYTES(MEMB), .RD_LAT(53), .WR_LAT(26)) mem (.*);

    initial begin
      for (int i = 0; i < NREC * 64 + 64; i++) mem.poke(i, data_byte(i));
    end

    // expected values, from the memory image
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
            v[8*j +: 8] = data_byte(BASE + longint'(rec_index(0, i)) * 64 + k * 8 + j);
          s += v;
        end
        total += s;
        got = 0;
        for (int j = 0; j < 8; j++) got[8*j +: 8] = mem.peek(RES + i * 8 + j);
        if (got != s) bad++;
      end
      check(result[g] == total, $sformatf("inst %0d: PE sum %h expected %h", g, result[g], total));
      check(bad == 0, $sformatf("inst %0d: %0d unloaded sums wrong", g, bad));
      verified[g] = 1'b1;
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start = 1;
    wait (&verified);
    $display("cycles: distance 16 = %0d, no interleaving = %0d, distance 128 = %0d",
             cycles[0], cycles[1], cycles[2]);
    $display("stalled cycles: %0d %0d %0d; register writes %0d %0d %0d",
             stalls[0], stalls[1], stalls[2], reg_writes[0], reg_writes[1], reg_writes[2]);
    check(cycles[1] >= 2 * cycles[0], "preloading at distance 16 at least 2x faster");
    check(stalls[2] > 0, "full queue stalled the PE");
    check(stalls[0] == 0 && stalls[1] == 0, "no stall while the queue has room");
    // 2 size writes + 3 per preload + 3 per unload
    check(reg_writes[0] == 2 + 3 * NRECS + 3 * (NRECS / 16), "size register written once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
