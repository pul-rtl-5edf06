// pul_ndp_top: the PE-array side of the NDP storage device.
//
// In the paper's near-data-processing prototype, an array of NUM_PE (14)
// soft-core PEs runs the offloaded operations, and a PUL unit - register
// interface, preload/unload DMA engine and 64 KiB scratchpad - is attached to
// each PE. This module instantiates the NUM_PE PUL units and merges their
// memory traffic onto one device-memory port through pul_mem_arbiter. The PEs
// themselves (MicroBlaze cores) and the device memory with its latency
// emulation are outside: each PE's register bus and scratchpad port, and the
// shared memory port, are ports of this module.
//
// Unit i tags its memory requests with id i; the memory side must return read
// data in request order and echo the id on R and B.
module pul_ndp_top #(
  parameter int unsigned NUM_PE      = 14,
  parameter int unsigned SPM_BYTES   = 65536,
  parameter int unsigned FIFO_DEPTH  = 64,
  parameter int unsigned OUTSTANDING = 16,
  parameter int unsigned MAX_ACKS    = 64
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // PE register buses
  input  logic [NUM_PE-1:0]                  bus_valid,
  output logic [NUM_PE-1:0]                  bus_ready,
  input  logic [NUM_PE-1:0]                  bus_we,
  input  logic [6:0]                         bus_addr     [NUM_PE],
  input  logic [pul_pkg::DATA_W-1:0]         bus_wdata    [NUM_PE],
  output logic [NUM_PE-1:0]                  rsp_valid,
  output logic [pul_pkg::DATA_W-1:0]         rsp_rdata    [NUM_PE],
  // PE scratchpad ports
  input  logic [NUM_PE-1:0]                  pe_spm_en,
  input  logic [NUM_PE-1:0]                  pe_spm_we,
  input  logic [$clog2(SPM_BYTES/8)-1:0]     pe_spm_addr  [NUM_PE],
  input  logic [pul_pkg::DATA_W-1:0]         pe_spm_wdata [NUM_PE],
  input  logic [pul_pkg::STRB_W-1:0]         pe_spm_wstrb [NUM_PE],
  output logic [pul_pkg::DATA_W-1:0]         pe_spm_rdata [NUM_PE],
  // device memory port
  output logic                               m_ar_valid,
  input  logic                               m_ar_ready,
  output pul_pkg::mem_ar_t                   m_ar,
  input  logic                               m_r_valid,
  output logic                               m_r_ready,
  input  pul_pkg::mem_r_t                    m_r,
  output logic                               m_w_valid,
  input  logic                               m_w_ready,
  output pul_pkg::mem_w_t                    m_w,
  input  logic                               m_b_valid,
  input  pul_pkg::mem_b_t                    m_b
);
  import pul_pkg::*;

  logic [NUM_PE-1:0] ar_valid, ar_ready, r_valid, r_ready, w_valid, w_ready, b_valid;
  mem_ar_t           ar [NUM_PE];
  mem_w_t            w  [NUM_PE];
  mem_r_t            r;
  mem_b_t            b;

  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    pul_unit #(
      .SPM_BYTES (SPM_BYTES), .FIFO_DEPTH (FIFO_DEPTH), .OUTSTANDING (OUTSTANDING),
      .MAX_ACKS (MAX_ACKS), .ID (ID_W'(i))
    ) u_unit (
      .clk, .rst_n,
      .bus_valid (bus_valid[i]), .bus_ready (bus_ready[i]), .bus_we (bus_we[i]),
      .bus_addr (bus_addr[i]), .bus_wdata (bus_wdata[i]),
      .rsp_valid (rsp_valid[i]), .rsp_rdata (rsp_rdata[i]),
      .pe_spm_en (pe_spm_en[i]), .pe_spm_we (pe_spm_we[i]), .pe_spm_addr (pe_spm_addr[i]),
      .pe_spm_wdata (pe_spm_wdata[i]), .pe_spm_wstrb (pe_spm_wstrb[i]),
      .pe_spm_rdata (pe_spm_rdata[i]),
      .ar_valid (ar_valid[i]), .ar_ready (ar_ready[i]), .ar (ar[i]),
      .r_valid (r_valid[i]), .r_ready (r_ready[i]), .r (r),
      .w_valid (w_valid[i]), .w_ready (w_ready[i]), .w (w[i]),
      .b_valid (b_valid[i]), .b (b)
    );
  end

  pul_mem_arbiter #(.N (NUM_PE)) u_arb (
    .clk, .rst_n,
    .s_ar_valid (ar_valid), .s_ar_ready (ar_ready), .s_ar (ar),
    .s_r_valid (r_valid), .s_r_ready (r_ready), .s_r (r),
    .s_w_valid (w_valid), .s_w_ready (w_ready), .s_w (w),
    .s_b_valid (b_valid), .s_b (b),
    .m_ar_valid, .m_ar_ready, .m_ar,
    .m_r_valid, .m_r_ready, .m_r,
    .m_w_valid, .m_w_ready, .m_w,
    .m_b_valid, .m_b
  );

`ifndef SYNTHESIS
  initial assert (NUM_PE <= (1 << ID_W)) else $error("NUM_PE exceeds the id space");
`endif
endmodule
