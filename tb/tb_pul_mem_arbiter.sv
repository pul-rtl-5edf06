// tb_pul_mem_arbiter: self-checking test of the memory arbiter with 4 units
// on the behavioural memory model (random back-pressure). Each unit issues
// random read requests and random write bursts; the test checks that every
// request reaches memory once and unchanged, in each unit's order, that write
// bursts are never interleaved, that read data and acknowledgements come back
// only to the unit whose id they carry, and that under full load the read
// grants are shared evenly (round robin).
module tb_pul_mem_arbiter;
  import pul_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] s_ar_valid, s_ar_ready, s_r_valid, s_r_ready, s_w_valid, s_w_ready, s_b_valid;
  mem_ar_t s_ar [N];
  mem_w_t  s_w [N];
  mem_r_t  s_r;
  mem_b_t  s_b;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_w_valid, m_w_ready, m_b_valid;
  mem_ar_t m_ar;
  mem_r_t  m_r;
  mem_w_t  m_w;
  mem_b_t  m_b;

  pul_mem_arbiter #(.N(N)) dut (.*);
  pul_mem_model #(.MEM_BYTES(4096), .RD_LAT(7), .WR_LAT(5), .STALL_PCT(20)) mem (
    .clk, .rst_n, .ar_valid (m_ar_valid), .ar_ready (m_ar_ready), .ar (m_ar),
    .r_valid (m_r_valid), .r_ready (m_r_ready), .r (m_r),
    .w_valid (m_w_valid), .w_ready (m_w_ready), .w (m_w),
    .b_valid (m_b_valid), .b (m_b));

  int checks = 0, failures = 0;
  mem_ar_t ar_q [N][$];       // per unit: requests still to issue
  mem_ar_t ar_exp [N][$];     // issued, expected at memory
  mem_w_t  w_q [N][$];
  mem_w_t  w_exp [N][$];
  int      rbeats_exp [N], rbeats_got [N], b_exp [N], b_got [N], ar_grants [N];
  logic    w_open;
  logic [ID_W-1:0] w_open_id;
  bit      load_phase;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_comb
    for (int i = 0; i < N; i++) begin
      s_ar_valid[i] = ar_q[i].size() > 0;
      s_ar[i]       = (ar_q[i].size() > 0) ? ar_q[i][0] : '0;
      s_w_valid[i]  = w_q[i].size() > 0;
      s_w[i]        = (w_q[i].size() > 0) ? w_q[i][0] : '0;
    end

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      s_r_ready[i] <= ($urandom_range(99) < 80);
      if (s_ar_valid[i] && s_ar_ready[i]) begin
        ar_exp[i].push_back(ar_q[i][0]);
        void'(ar_q[i].pop_front());
        if (load_phase) ar_grants[i]++;
      end
      if (s_w_valid[i] && s_w_ready[i]) begin
        w_exp[i].push_back(w_q[i][0]);
        void'(w_q[i].pop_front());
      end
      if (s_r_valid[i]) check(s_r.id == ID_W'(i), "read data routed by id");
      if (s_r_valid[i] && s_r_ready[i]) rbeats_got[i]++;
      if (s_b_valid[i]) begin
        check(s_b.id == ID_W'(i), "ack routed by id");
        b_got[i]++;
      end
    end
    check($countones(s_r_valid) <= 1 && $countones(s_b_valid) <= 1, "one-hot routing");
    if (m_ar_valid && m_ar_ready) begin
      if (ar_exp[m_ar.id].size() == 0) check(0, "unexpected read request");
      else begin
        check(m_ar == ar_exp[m_ar.id][0], "read request unchanged, in order");
        void'(ar_exp[m_ar.id].pop_front());
      end
    end
    if (m_w_valid && m_w_ready) begin
      if (w_open) check(m_w.id == w_open_id, "write bursts not interleaved");
      w_open    <= !m_w.last;
      w_open_id <= m_w.id;
      if (w_exp[m_w.id].size() == 0) check(0, "unexpected write beat");
      else begin
        check(m_w == w_exp[m_w.id][0], "write beat unchanged, in order");
        void'(w_exp[m_w.id].pop_front());
      end
    end
  end

  task automatic gen(input int i, input int nreq, input int nwr);
    mem_ar_t a;
    mem_w_t  w;
    int len;
    for (int k = 0; k < nreq; k++) begin
      len = $urandom_range(0, 7);
      a = '{addr: 64'($urandom_range(511) * 8), len: LEN_W'(len), id: ID_W'(i)};
      ar_q[i].push_back(a);
      rbeats_exp[i] += len + 1;
    end
    for (int k = 0; k < nwr; k++) begin
      len = $urandom_range(1, 6);
      for (int j = 0; j < len; j++) begin
        w = '{addr: 64'($urandom_range(511) * 8), data: {$urandom, $urandom}, strb: 8'($urandom),
              last: (j == len - 1), id: ID_W'(i)};
        w_q[i].push_back(w);
      end
      b_exp[i]++;
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy_left;
    w_open = 0; w_open_id = 0; load_phase = 0; s_r_ready = '0;
    for (int i = 0; i < N; i++) begin
      rbeats_exp[i] = 0; rbeats_got[i] = 0; b_exp[i] = 0; b_got[i] = 0; ar_grants[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // sparse, uneven traffic
    for (int round = 0; round < 20; round++) begin
      gen($urandom_range(N - 1), $urandom_range(0, 3), $urandom_range(0, 2));
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    // full load: every unit has many requests
    @(negedge clk);
    for (int i = 0; i < N; i++) gen(i, 40, 20);
    load_phase = 1;
    repeat (60) @(posedge clk);
    load_phase = 0;
    for (int i = 0; i < N; i++)
      check(ar_grants[i] >= 5 && (ar_grants[i] - ar_grants[0]) <= 1 && (ar_grants[0] - ar_grants[i]) <= 1,
            $sformatf("round robin share unit %0d: %0d vs %0d", i, ar_grants[i], ar_grants[0]));
    // drain
    busy_left = 20000;
    while (busy_left > 0) begin
      @(posedge clk);
      busy_left--;
      if (busy_left > 50) begin
        bit done = 1;
        for (int i = 0; i < N; i++)
          if (ar_q[i].size() || w_q[i].size() || rbeats_got[i] != rbeats_exp[i] || b_got[i] != b_exp[i]) done = 0;
        if (done) busy_left = 50;
      end
    end
    for (int i = 0; i < N; i++) begin
      check(rbeats_got[i] == rbeats_exp[i], $sformatf("unit %0d read beats %0d/%0d", i, rbeats_got[i], rbeats_exp[i]));
      check(b_got[i] == b_exp[i], $sformatf("unit %0d acks %0d/%0d", i, b_got[i], b_exp[i]));
      check(ar_exp[i].size() == 0 && w_exp[i].size() == 0, "everything reached memory");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
