// pul_mem_arbiter: shares one device-memory port among the N PUL units of the
// PE array.
//
// The paper's NDP device runs 14 PEs, each with its own PUL unit, on one
// device memory; it does not describe how their traffic is merged. This is
// the simplest arbiter that keeps every unit's transfers correct:
//   AR  round robin among requesting units, one burst request per cycle;
//   W   round robin at burst granularity: a unit that wins keeps the channel
//       until it sends the beat marked last, so bursts are not interleaved;
//   R/B routed back by the id field each unit places in its requests.
// Responses are not buffered: R waits for the addressed unit's r_ready.
//
// Timing: AR and W are combinational paths from the units to the memory
// (one cycle per request / beat); the round-robin pointers move after each
// grant.
module pul_mem_arbiter #(
  parameter int unsigned N = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // unit side
  input  logic [N-1:0]            s_ar_valid,
  output logic [N-1:0]            s_ar_ready,
  input  pul_pkg::mem_ar_t        s_ar [N],
  output logic [N-1:0]            s_r_valid,
  input  logic [N-1:0]            s_r_ready,
  output pul_pkg::mem_r_t         s_r,
  input  logic [N-1:0]            s_w_valid,
  output logic [N-1:0]            s_w_ready,
  input  pul_pkg::mem_w_t         s_w [N],
  output logic [N-1:0]            s_b_valid,
  output pul_pkg::mem_b_t         s_b,
  // memory side
  output logic                    m_ar_valid,
  input  logic                    m_ar_ready,
  output pul_pkg::mem_ar_t        m_ar,
  input  logic                    m_r_valid,
  output logic                    m_r_ready,
  input  pul_pkg::mem_r_t         m_r,
  output logic                    m_w_valid,
  input  logic                    m_w_ready,
  output pul_pkg::mem_w_t         m_w,
  input  logic                    m_b_valid,
  input  pul_pkg::mem_b_t         m_b
);
  import pul_pkg::*;
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  // round-robin pick: first requester at or after `start`
  function automatic logic [IW:0] rr_pick(input logic [N-1:0] req, input logic [IW-1:0] start);
    logic [IW:0] res;
    int unsigned k;
    res = {1'b1, IW'(0)};              // MSB set: nobody requests
    for (int unsigned i = 0; i < N; i++) begin
      k = (int'(start) + i) % N;
      if (req[k] && res[IW]) res = {1'b0, IW'(k)};
    end
    return res;
  endfunction

  // ---------------- AR ----------------
  logic [IW-1:0] ar_ptr;
  logic [IW:0]   ar_pick;
  assign ar_pick    = rr_pick(s_ar_valid, ar_ptr);
  assign m_ar_valid = !ar_pick[IW];
  assign m_ar       = s_ar[ar_pick[IW-1:0]];
  always_comb begin
    s_ar_ready = '0;
    if (!ar_pick[IW]) s_ar_ready[ar_pick[IW-1:0]] = m_ar_ready;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) ar_ptr <= '0;
    else if (m_ar_valid && m_ar_ready)
      ar_ptr <= (ar_pick[IW-1:0] == IW'(N - 1)) ? '0 : ar_pick[IW-1:0] + 1'b1;
  end

  // ---------------- W (burst lock) ----------------
  logic [IW-1:0] w_ptr, w_owner, w_sel;
  logic          w_locked;
  logic [IW:0]   w_pick;
  assign w_pick    = rr_pick(s_w_valid, w_ptr);
  assign w_sel     = w_locked ? w_owner : w_pick[IW-1:0];
  assign m_w_valid = w_locked ? s_w_valid[w_owner] : !w_pick[IW];
  assign m_w       = s_w[w_sel];
  always_comb begin
    s_w_ready = '0;
    if (m_w_valid) s_w_ready[w_sel] = m_w_ready;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_ptr    <= '0;
      w_owner  <= '0;
      w_locked <= 1'b0;
    end else if (m_w_valid && m_w_ready) begin
      if (m_w.last) begin
        w_locked <= 1'b0;
        w_ptr    <= (w_sel == IW'(N - 1)) ? '0 : w_sel + 1'b1;
      end else begin
        w_locked <= 1'b1;
        w_owner  <= w_sel;
      end
    end
  end

  // ---------------- R / B routing ----------------
  assign s_r = m_r;
  assign s_b = m_b;
  always_comb begin
    s_r_valid = '0;
    s_b_valid = '0;
    if (int'(m_r.id) < int'(N)) s_r_valid[IW'(m_r.id)] = m_r_valid;
    if (int'(m_b.id) < int'(N)) s_b_valid[IW'(m_b.id)] = m_b_valid;
  end
  assign m_r_ready = (int'(m_r.id) < int'(N)) ? s_r_ready[IW'(m_r.id)] : 1'b1;

`ifndef SYNTHESIS
  a_w_no_interleave: assert property (@(posedge clk) disable iff (!rst_n)
    (m_w_valid && m_w_ready && !m_w.last) |=> (w_locked && w_owner == $past(w_sel)));
`endif
endmodule
