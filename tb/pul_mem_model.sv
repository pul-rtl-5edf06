// pul_mem_model: behavioural model of the device memory behind the PUL units
// (testbench only, not synthesizable).
//
// It stands in for the DRAM / NVM of the NDP device and for the latency
// emulator placed in front of it: a read burst returns its first beat
// RD_LAT cycles after it was accepted, then one beat per cycle (when the
// receiver is ready); bursts return in request order. Write beats update the
// memory when they are accepted and a burst is acknowledged on B WR_LAT cycles
// after its last beat. Memory content is a byte array of MEM_BYTES bytes; the
// address wraps. It starts with arbitrary content: testbenches load it with
// poke() and read it with peek(). With STALL_PCT > 0, AR and W are refused at random in that
// share of the cycles, to exercise back-pressure.
// Counters: reads, writes (bursts), rd_beats, wr_beats.
module pul_mem_model #(
  parameter int unsigned MEM_BYTES = 1 << 20,
  parameter int unsigned RD_LAT    = 53,   // 350 ns at 150 MHz
  parameter int unsigned WR_LAT    = 26,   // 170 ns at 150 MHz
  parameter int unsigned STALL_PCT = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ar_valid,
  output logic             ar_ready,
  input  pul_pkg::mem_ar_t ar,
  output logic             r_valid,
  input  logic             r_ready,
  output pul_pkg::mem_r_t  r,
  input  logic             w_valid,
  output logic             w_ready,
  input  pul_pkg::mem_w_t  w,
  output logic             b_valid,
  output pul_pkg::mem_b_t  b
);
  import pul_pkg::*;

  logic [7:0] mem [MEM_BYTES];

  typedef struct {
    longint unsigned due;
    logic [MEM_ADDR_W-1:0] addr;
    int unsigned beats;
    logic [ID_W-1:0] id;
  } rd_job_t;
  typedef struct {
    longint unsigned due;
    logic [ID_W-1:0] id;
  } ack_t;

  rd_job_t rq[$];
  ack_t    bq[$];
  longint unsigned now;
  int unsigned beat;          // beat index inside the head read burst
  int unsigned reads, writes, rd_beats, wr_beats;
  logic stall_ar, stall_w;

  function automatic logic [DATA_W-1:0] rd_word(input logic [MEM_ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < STRB_W; i++) d[8*i +: 8] = mem[(a + MEM_ADDR_W'(i)) % MEM_BYTES];
    return d;
  endfunction

  // test benches call these to set up and inspect memory
  function automatic void poke(input longint unsigned a, input logic [7:0] v);
    mem[a % MEM_BYTES] = v;
  endfunction
  function automatic logic [7:0] peek(input longint unsigned a);
    return mem[a % MEM_BYTES];
  endfunction

  assign ar_ready = rst_n && !stall_ar;
  assign w_ready  = rst_n && !stall_w;

  initial begin
    now = 0; beat = 0; reads = 0; writes = 0; rd_beats = 0; wr_beats = 0;
    stall_ar = 1'b0; stall_w = 1'b0;
    r_valid = 1'b0; r = '0; b_valid = 1'b0; b = '0;
  end

  always @(posedge clk) begin
    now = now + 1;
    if (!rst_n) begin
      rq.delete();
      bq.delete();
      beat = 0;
    end else begin
      if (ar_valid && ar_ready) begin
        rq.push_back('{due: now + RD_LAT, addr: ar.addr, beats: int'(ar.len) + 1, id: ar.id});
        reads++;
      end
      if (r_valid && r_ready) begin
        rd_beats++;
        if (r.last) begin
          void'(rq.pop_front());
          beat = 0;
        end else beat++;
      end
      if (w_valid && w_ready) begin
        for (int i = 0; i < STRB_W; i++)
          if (w.strb[i]) mem[(w.addr + MEM_ADDR_W'(i)) % MEM_BYTES] = w.data[8*i +: 8];
        wr_beats++;
        if (w.last) begin
          bq.push_back('{due: now + WR_LAT, id: w.id});
          writes++;
        end
      end
      if (b_valid) void'(bq.pop_front());
    end
    // outputs for the next cycle
    if (rst_n && rq.size() > 0 && rq[0].due <= now) begin
      r_valid <= 1'b1;
      r       <= '{data: rd_word(rq[0].addr + MEM_ADDR_W'(beat * STRB_W)),
                   last: (beat == rq[0].beats - 1), id: rq[0].id};
    end else begin
      r_valid <= 1'b0;
      r       <= '0;
    end
    if (rst_n && bq.size() > 0 && bq[0].due <= now) begin
      b_valid <= 1'b1;
      b       <= '{id: bq[0].id};
    end else begin
      b_valid <= 1'b0;
      b       <= '0;
    end
    stall_ar <= (STALL_PCT != 0) && ($urandom_range(99) < STALL_PCT);
    stall_w  <= (STALL_PCT != 0) && ($urandom_range(99) < STALL_PCT);
  end
endmodule
