// pul_preload_ch: preload channel of the PUL DMA engine (memory -> scratchpad).
//
// The channel takes requests from the preload queue and copies nbytes bytes
// from a byte address in device memory to a byte address in the scratchpad.
// It is split in two decoupled stages so that several preloads are in flight
// at once, which is what lets a large preload distance hide memory latency:
//   issue stage : pops a request, sends one read burst covering the source
//                 bytes (word aligned) and records the request in an
//                 in-flight list of OUTSTANDING entries;
//   data stage  : takes the oldest in-flight request, realigns its read data
//                 to the destination byte offset and writes it into the
//                 scratchpad through the DMA port, one word per cycle.
// Memory returns read bursts in the order they were requested.
// A request of 0 bytes is dropped at issue.
//
// Interface: req_* from the preload queue; ar_*/r_* to the memory port (id is
// filled in by the owning unit); spm_* write requests to the scratchpad DMA
// port, performed in the cycle spm_gnt is high; busy is high while any
// accepted request has not been written completely into the scratchpad.
// Timing: a request popped in cycle t has its read burst on AR in cycle t
// (AR is driven combinationally from the queue head); the first word reaches
// the scratchpad about two cycles after its read data arrives.
// OUTSTANDING is this design's choice; the paper only requires that the engine
// keeps accepting requests while earlier ones are being processed.
module pul_preload_ch #(
  parameter int unsigned SPM_BYTES   = 65536,
  parameter int unsigned OUTSTANDING = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // preload queue
  input  logic                               req_valid,
  output logic                               req_ready,
  input  pul_pkg::pul_req_t                  req,
  // memory read
  output logic                               ar_valid,
  input  logic                               ar_ready,
  output pul_pkg::mem_ar_t                   ar,
  input  logic                               r_valid,
  output logic                               r_ready,
  input  pul_pkg::mem_r_t                    r,
  // scratchpad DMA port, write side
  output logic                               spm_req,
  input  logic                               spm_gnt,
  output logic [$clog2(SPM_BYTES/8)-1:0]     spm_addr,
  output logic [pul_pkg::DATA_W-1:0]         spm_wdata,
  output logic [pul_pkg::STRB_W-1:0]         spm_wstrb,
  output logic                               busy
);
  import pul_pkg::*;
  localparam int unsigned SW = $clog2(SPM_BYTES / STRB_W);

  // ---------------- issue stage ----------------
  logic     inf_push_ready, inf_pop_valid, inf_pop_ready;
  pul_req_t inf_head;
  logic     zero_len;
  logic [LEN_W:0] nbeats;
  logic [$clog2(OUTSTANDING+1)-1:0] inf_count;

  assign zero_len  = (req.nbytes == '0);
  assign nbeats    = beats(req.mem_addr[OFF_W-1:0], req.nbytes);
  assign ar_valid  = req_valid && !zero_len && inf_push_ready;
  assign ar.addr   = {req.mem_addr[MEM_ADDR_W-1:OFF_W], OFF_W'(0)};
  assign ar.len    = LEN_W'(nbeats - 1'b1);
  assign ar.id     = '0;
  assign req_ready = zero_len || (ar_ready && inf_push_ready);

  pul_req_fifo #(.T(pul_req_t), .DEPTH(OUTSTANDING)) u_inflight (
    .clk, .rst_n,
    .push_valid (ar_valid && ar_ready),
    .push_ready (inf_push_ready),
    .push_data  (req),
    .pop_valid  (inf_pop_valid),
    .pop_ready  (inf_pop_ready),
    .pop_data   (inf_head),
    .count      (inf_count)
  );

  // ---------------- data stage ----------------
  logic          al_start_ready, al_busy;
  logic          al_out_valid, al_out_ready, al_out_last;
  logic [DATA_W-1:0] al_out_data;
  logic [STRB_W-1:0] al_out_strb;
  logic [SW-1:0] wptr;

  assign inf_pop_ready = al_start_ready;

  pul_realign u_align (
    .clk, .rst_n,
    .start_valid (inf_pop_valid),
    .start_ready (al_start_ready),
    .src_off     (inf_head.mem_addr[OFF_W-1:0]),
    .dst_off     (inf_head.spm_addr[OFF_W-1:0]),
    .nbytes      (inf_head.nbytes),
    .in_valid    (r_valid),
    .in_ready    (r_ready),
    .in_data     (r.data),
    .out_valid   (al_out_valid),
    .out_ready   (al_out_ready),
    .out_data    (al_out_data),
    .out_strb    (al_out_strb),
    .out_last    (al_out_last),
    .busy        (al_busy)
  );

  assign spm_req      = al_out_valid;
  assign al_out_ready = spm_gnt;
  assign spm_addr     = wptr;
  assign spm_wdata    = al_out_data;
  assign spm_wstrb    = al_out_strb;

  always_ff @(posedge clk) begin
    if (!rst_n)
      wptr <= '0;
    else if (inf_pop_valid && al_start_ready)
      wptr <= inf_head.spm_addr[SPM_ADDR_W-1:OFF_W];
    else if (al_out_valid && al_out_ready)
      wptr <= wptr + 1'b1;
  end

  assign busy = req_valid || inf_pop_valid || al_busy;

`ifndef SYNTHESIS
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (ar_valid && !ar_ready) |=> ar_valid && $stable(ar));
`endif
  // The realigner counts beats itself, so r.last and r.id are not needed here.
  wire unused_ok = &{1'b0, r.last, r.id, al_out_last, inf_count, inf_head.mem_addr[MEM_ADDR_W-1:OFF_W]};
endmodule
