// pul_unit: one PUL hardware module, as attached to one processing element.
//
// It bundles the three parts the PE sees: the register interface (pul_regs),
// the DMA engine with its preload and unload queues (pul_dma_engine) and the
// PE-local scratchpad (pul_scratchpad). The PE programs transfers through the
// register bus, computes on the scratchpad through its own single-cycle port,
// and polls STATUS to synchronise; the DMA engine reaches device memory
// through the memory port, tagging every request with this unit's ID.
// The unit assumes nothing about the PE beyond these two ports.
//
// Timing: register writes take effect at the clock edge that accepts them; a
// GO write is held off while its queue is full. Scratchpad reads by the PE
// return data one cycle after pe_spm_en.
module pul_unit #(
  parameter int unsigned SPM_BYTES   = 65536,
  parameter int unsigned FIFO_DEPTH  = 64,
  parameter int unsigned OUTSTANDING = 16,
  parameter int unsigned MAX_ACKS    = 64,
  parameter logic [pul_pkg::ID_W-1:0] ID = '0
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // PE register bus
  input  logic                               bus_valid,
  output logic                               bus_ready,
  input  logic                               bus_we,
  input  logic [6:0]                         bus_addr,
  input  logic [pul_pkg::DATA_W-1:0]         bus_wdata,
  output logic                               rsp_valid,
  output logic [pul_pkg::DATA_W-1:0]         rsp_rdata,
  // PE scratchpad port
  input  logic                               pe_spm_en,
  input  logic                               pe_spm_we,
  input  logic [$clog2(SPM_BYTES/8)-1:0]     pe_spm_addr,
  input  logic [pul_pkg::DATA_W-1:0]         pe_spm_wdata,
  input  logic [pul_pkg::STRB_W-1:0]         pe_spm_wstrb,
  output logic [pul_pkg::DATA_W-1:0]         pe_spm_rdata,
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
  input  pul_pkg::mem_b_t                    b
);
  import pul_pkg::*;
  localparam int unsigned SW = $clog2(SPM_BYTES / STRB_W);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic     pl_push_valid, pl_push_ready, ul_push_valid, ul_push_ready;
  pul_req_t pl_push, ul_push;
  logic     pl_busy, ul_busy;
  logic [CW-1:0] pl_count, ul_count;

  logic              dma_en, dma_we;
  logic [SW-1:0]     dma_addr;
  logic [DATA_W-1:0] dma_wdata, dma_rdata;
  logic [STRB_W-1:0] dma_wstrb;

  pul_regs u_regs (
    .clk, .rst_n,
    .bus_valid, .bus_ready, .bus_we, .bus_addr, .bus_wdata, .rsp_valid, .rsp_rdata,
    .pl_push_valid, .pl_push_ready, .pl_push,
    .ul_push_valid, .ul_push_ready, .ul_push,
    .pl_busy, .ul_busy,
    .pl_count (8'(pl_count)),
    .ul_count (8'(ul_count))
  );

  pul_dma_engine #(
    .SPM_BYTES (SPM_BYTES), .FIFO_DEPTH (FIFO_DEPTH), .OUTSTANDING (OUTSTANDING),
    .MAX_ACKS (MAX_ACKS), .ID (ID)
  ) u_dma (
    .clk, .rst_n,
    .pl_push_valid, .pl_push_ready, .pl_push,
    .ul_push_valid, .ul_push_ready, .ul_push,
    .pl_busy, .ul_busy, .pl_count, .ul_count,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .w_valid, .w_ready, .w, .b_valid, .b,
    .spm_en (dma_en), .spm_we (dma_we), .spm_addr (dma_addr),
    .spm_wdata (dma_wdata), .spm_wstrb (dma_wstrb), .spm_rdata (dma_rdata)
  );

  pul_scratchpad #(.BYTES (SPM_BYTES)) u_spm (
    .clk,
    .a_en (pe_spm_en), .a_we (pe_spm_we), .a_addr (pe_spm_addr),
    .a_wdata (pe_spm_wdata), .a_wstrb (pe_spm_wstrb), .a_rdata (pe_spm_rdata),
    .b_en (dma_en), .b_we (dma_we), .b_addr (dma_addr),
    .b_wdata (dma_wdata), .b_wstrb (dma_wstrb), .b_rdata (dma_rdata)
  );
endmodule
