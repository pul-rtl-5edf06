// pul_regs: the register interface through which a PE drives its PUL unit.
//
// Following the paper, the PE issues a preload or unload by writing the
// physical source and destination addresses and the transfer size into
// exposed registers, and synchronises by reading a status register that says
// whether requests are still pending. The registers keep their values after a
// request is queued, so software that repeats a transfer with, for example,
// the same size skips rewriting that register ("register value buffering").
//
// Register map (64-bit registers, byte offsets, see pul_pkg):
//   0x00 PL_MEM   0x08 PL_SPM   0x10 PL_SIZE   0x18 PL_GO (write queues a preload)
//   0x20 UL_SPM   0x28 UL_MEM   0x30 UL_SIZE   0x38 UL_GO (write queues an unload)
//   0x40 STATUS   read only: [0] preload busy, [1] unload busy, [2] preload
//                 queue full, [3] unload queue full, [15:8] / [23:16] entries
//                 in the preload / unload queue.
// The separate GO registers, the offsets and the STATUS layout are this
// design's choices; the paper does not give a register map.
//
// Bus: a simple valid/ready register port. Writes to a GO register are held
// off (bus_ready low) while that queue is full, which stalls the PE until the
// engine frees an entry; every other access is accepted at once. Read data
// is returned with rsp_valid in the cycle after the read was accepted.
// Reads of undefined offsets return 0 and writes to them are ignored.
module pul_regs (
  input  logic                          clk,
  input  logic                          rst_n,
  // PE register bus
  input  logic                          bus_valid,
  output logic                          bus_ready,
  input  logic                          bus_we,
  input  logic [6:0]                    bus_addr,
  input  logic [pul_pkg::DATA_W-1:0]    bus_wdata,
  output logic                          rsp_valid,
  output logic [pul_pkg::DATA_W-1:0]    rsp_rdata,
  // queue pushes
  output logic                          pl_push_valid,
  input  logic                          pl_push_ready,
  output pul_pkg::pul_req_t             pl_push,
  output logic                          ul_push_valid,
  input  logic                          ul_push_ready,
  output pul_pkg::pul_req_t             ul_push,
  // status inputs
  input  logic                          pl_busy,
  input  logic                          ul_busy,
  input  logic [7:0]                    pl_count,
  input  logic [7:0]                    ul_count
);
  import pul_pkg::*;

  logic [MEM_ADDR_W-1:0] pl_mem, ul_mem;
  logic [SPM_ADDR_W-1:0] pl_spm, ul_spm;
  logic [SIZE_W-1:0]     pl_size, ul_size;
  logic [DATA_W-1:0]     status, rdata_d;
  logic                  wr_pl_go, wr_ul_go, acc;

  assign wr_pl_go      = bus_valid && bus_we && (bus_addr == REG_PL_GO);
  assign wr_ul_go      = bus_valid && bus_we && (bus_addr == REG_UL_GO);
  assign pl_push_valid = wr_pl_go;
  assign ul_push_valid = wr_ul_go;
  assign pl_push       = '{mem_addr: pl_mem, spm_addr: pl_spm, nbytes: pl_size};
  assign ul_push       = '{mem_addr: ul_mem, spm_addr: ul_spm, nbytes: ul_size};
  assign bus_ready     = wr_pl_go ? pl_push_ready : (wr_ul_go ? ul_push_ready : 1'b1);
  assign acc           = bus_valid && bus_ready;

  always_comb begin
    status = '0;
    status[ST_PL_BUSY] = pl_busy;
    status[ST_UL_BUSY] = ul_busy;
    status[ST_PL_FULL] = !pl_push_ready;
    status[ST_UL_FULL] = !ul_push_ready;
    status[ST_PL_CNT +: 8] = pl_count;
    status[ST_UL_CNT +: 8] = ul_count;
    case (bus_addr)
      REG_PL_MEM:  rdata_d = DATA_W'(pl_mem);
      REG_PL_SPM:  rdata_d = DATA_W'(pl_spm);
      REG_PL_SIZE: rdata_d = DATA_W'(pl_size);
      REG_UL_SPM:  rdata_d = DATA_W'(ul_spm);
      REG_UL_MEM:  rdata_d = DATA_W'(ul_mem);
      REG_UL_SIZE: rdata_d = DATA_W'(ul_size);
      REG_STATUS:  rdata_d = status;
      default:     rdata_d = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pl_mem    <= '0;
      pl_spm    <= '0;
      pl_size   <= '0;
      ul_mem    <= '0;
      ul_spm    <= '0;
      ul_size   <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= acc && !bus_we;
      if (acc && !bus_we) rsp_rdata <= rdata_d;
      if (acc && bus_we) begin
        case (bus_addr)
          REG_PL_MEM:  pl_mem  <= bus_wdata[MEM_ADDR_W-1:0];
          REG_PL_SPM:  pl_spm  <= bus_wdata[SPM_ADDR_W-1:0];
          REG_PL_SIZE: pl_size <= bus_wdata[SIZE_W-1:0];
          REG_UL_SPM:  ul_spm  <= bus_wdata[SPM_ADDR_W-1:0];
          REG_UL_MEM:  ul_mem  <= bus_wdata[MEM_ADDR_W-1:0];
          REG_UL_SIZE: ul_size <= bus_wdata[SIZE_W-1:0];
          default: ;
        endcase
      end
    end
  end

`ifndef SYNTHESIS
  a_bus_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (bus_valid && !bus_ready) |=> bus_valid);
`endif
endmodule
