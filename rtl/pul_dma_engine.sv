// pul_dma_engine: the custom PUL DMA engine of one PE.
//
// Two request queues of FIFO_DEPTH entries (64 in the paper), one for preloads
// and one for unloads, feed two channels that run concurrently: the preload
// channel moves data from device memory into the scratchpad, the unload
// channel from the scratchpad out to memory. Queues accept new requests while
// the channels work on earlier ones, so the PE never blocks on a transfer
// unless a queue is full.
//
// Both channels share the scratchpad's DMA port. When both want it in the
// same cycle, the port alternates between them (round robin); the paper does
// not say how the port is shared.
//
// Interface: pl_push_*/ul_push_* into the queues; busy and queue counts for
// the status register; the memory port (preload uses AR/R, unload W/B; the
// unit's ID is placed in every request); the scratchpad DMA port (word
// address, write data and strobes, read data one cycle after a read).
module pul_dma_engine #(
  parameter int unsigned SPM_BYTES   = 65536,
  parameter int unsigned FIFO_DEPTH  = 64,
  parameter int unsigned OUTSTANDING = 16,
  parameter int unsigned MAX_ACKS    = 64,
  parameter logic [pul_pkg::ID_W-1:0] ID = '0
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               pl_push_valid,
  output logic                               pl_push_ready,
  input  pul_pkg::pul_req_t                  pl_push,
  input  logic                               ul_push_valid,
  output logic                               ul_push_ready,
  input  pul_pkg::pul_req_t                  ul_push,
  output logic                               pl_busy,
  output logic                               ul_busy,
  output logic [$clog2(FIFO_DEPTH+1)-1:0]    pl_count,
  output logic [$clog2(FIFO_DEPTH+1)-1:0]    ul_count,
  // memory port
  output logic                               ar_valid,
  input  logic                               ar_ready,
  output pul_pkg::mem_ar_t                   ar,
  input  logic                               r_valid,
  output logic                               r_ready,
  input  pul_pkg::mem_r_t                    r,
  output logic                               w_valid,
  input  logic                               w_ready,
  output pul_pkg::mem_w_t                    w,
  input  logic                               b_valid,
  input  pul_pkg::mem_b_t                    b,
  // scratchpad DMA port
  output logic                               spm_en,
  output logic                               spm_we,
  output logic [$clog2(SPM_BYTES/8)-1:0]     spm_addr,
  output logic [pul_pkg::DATA_W-1:0]         spm_wdata,
  output logic [pul_pkg::STRB_W-1:0]         spm_wstrb,
  input  logic [pul_pkg::DATA_W-1:0]         spm_rdata
);
  import pul_pkg::*;
  localparam int unsigned SW = $clog2(SPM_BYTES / STRB_W);

  logic     plq_valid, plq_ready, ulq_valid, ulq_ready;
  pul_req_t plq, ulq;
  mem_ar_t  ch_ar;
  mem_w_t   ch_w;
  logic     pl_ch_busy, ul_ch_busy;

  pul_req_fifo #(.T(pul_req_t), .DEPTH(FIFO_DEPTH)) u_pl_q (
    .clk, .rst_n,
    .push_valid (pl_push_valid), .push_ready (pl_push_ready), .push_data (pl_push),
    .pop_valid  (plq_valid),     .pop_ready  (plq_ready),     .pop_data  (plq),
    .count      (pl_count)
  );

  pul_req_fifo #(.T(pul_req_t), .DEPTH(FIFO_DEPTH)) u_ul_q (
    .clk, .rst_n,
    .push_valid (ul_push_valid), .push_ready (ul_push_ready), .push_data (ul_push),
    .pop_valid  (ulq_valid),     .pop_ready  (ulq_ready),     .pop_data  (ulq),
    .count      (ul_count)
  );

  // scratchpad DMA port sharing
  logic          pl_spm_req, pl_spm_gnt, ul_spm_req, ul_spm_gnt, prio_ul;
  logic [SW-1:0] pl_spm_addr, ul_spm_addr;

  assign pl_spm_gnt = pl_spm_req && (!ul_spm_req || !prio_ul);
  assign ul_spm_gnt = ul_spm_req && (!pl_spm_req ||  prio_ul);
  assign spm_en     = pl_spm_gnt || ul_spm_gnt;
  assign spm_we     = pl_spm_gnt;
  assign spm_addr   = pl_spm_gnt ? pl_spm_addr : ul_spm_addr;

  always_ff @(posedge clk) begin
    if (!rst_n)                        prio_ul <= 1'b0;
    else if (pl_spm_req && ul_spm_req) prio_ul <= !prio_ul;
  end

  pul_preload_ch #(.SPM_BYTES(SPM_BYTES), .OUTSTANDING(OUTSTANDING)) u_pl (
    .clk, .rst_n,
    .req_valid (plq_valid), .req_ready (plq_ready), .req (plq),
    .ar_valid, .ar_ready, .ar (ch_ar),
    .r_valid, .r_ready, .r,
    .spm_req (pl_spm_req), .spm_gnt (pl_spm_gnt), .spm_addr (pl_spm_addr),
    .spm_wdata, .spm_wstrb,
    .busy (pl_ch_busy)
  );

  pul_unload_ch #(.SPM_BYTES(SPM_BYTES), .MAX_ACKS(MAX_ACKS)) u_ul (
    .clk, .rst_n,
    .req_valid (ulq_valid), .req_ready (ulq_ready), .req (ulq),
    .spm_req (ul_spm_req), .spm_gnt (ul_spm_gnt), .spm_addr (ul_spm_addr),
    .spm_rdata,
    .w_valid, .w_ready, .w (ch_w),
    .b_valid, .b,
    .busy (ul_ch_busy)
  );

  always_comb begin
    ar    = ch_ar;
    ar.id = ID;
    w     = ch_w;
    w.id  = ID;
  end

  assign pl_busy = pl_ch_busy;
  assign ul_busy = ul_ch_busy;

`ifndef SYNTHESIS
  a_port_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(pl_spm_gnt && ul_spm_gnt));
`endif
endmodule
