// pul_pe_flush_model: behavioural model of one processing element that
// materialises results through unloads (testbench only, not synthesizable).
//
// The PE produces NWORDS 64-bit result values, spending WORK cycles of
// compute on each (the update), writes each into its scratchpad and, every time FLUSH bytes have collected,
// queues one unload of that block to a scattered location in memory: block n
// goes to RES_BASE + ((n * 5) mod nblocks) * FLUSH. Blocks are filled in
// a ring of scratchpad buffers (32 KiB in total, or fewer when there are
// fewer blocks). Before the ring wraps onto a buffer that may still be
// unloading, the PE polls STATUS until no unload is pending. With SYNC = 1
// the PE waits for every flush right after queuing it, which is the flush
// without interleaving that the paper compares with. The unload size
// register is written once and reused. Value i is val(PE_ID, i) below. The
// flush pattern follows the paper's description of its NDP unloading
// experiment. The ring, the scatter formula and the value hash are this
// model's own choices.
module pul_pe_flush_model #(
  parameter int          PE_ID     = 0,
  parameter int          SPM_BYTES = 65536,
  parameter int          NWORDS    = 2048,      // results produced
  parameter int          FLUSH     = 512,       // flush threshold in bytes
  parameter int          WORK      = 0,         // compute cycles per result
  parameter longint      RES_BASE  = 'h100000,
  parameter bit          SYNC      = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     done,
  output int unsigned              cycles,
  output int unsigned              stalls,       // cycles a GO write was held off
  output int unsigned              unloads,
  // register bus
  output logic                     bus_valid,
  input  logic                     bus_ready,
  output logic                     bus_we,
  output logic [6:0]               bus_addr,
  output logic [63:0]              bus_wdata,
  input  logic                     rsp_valid,
  input  logic [63:0]              rsp_rdata,
  // scratchpad port
  output logic                     spm_en,
  output logic                     spm_we,
  output logic [$clog2(SPM_BYTES/8)-1:0] spm_addr,
  output logic [63:0]              spm_wdata,
  output logic [7:0]               spm_wstrb,
  input  logic [63:0]              spm_rdata
);
  import pul_pkg::*;
  localparam int NBLK  = NWORDS * 8 / FLUSH;
  localparam int RING  = (32768 / FLUSH < NBLK) ? 32768 / FLUSH : NBLK;

  function automatic logic [63:0] val(input int p, input int i);
    logic [63:0] x;
    x = 64'(p) * 64'h9E3779B97F4A7C15 + 64'(i) * 64'hBF58476D1CE4E5B9;
    return x ^ (x >> 29);
  endfunction

  // Same timing convention as pul_pe_model: drive 1 time unit after a rising
  // edge, sample at the falling edge.
  task automatic reg_wr(input logic [6:0] a, input logic [63:0] d);
    bit rdy;
    bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    do begin
      @(negedge clk);
      rdy = bus_ready;
      if (!rdy) stalls++;
      @(posedge clk);
    end while (!rdy);
    #1 bus_valid = 0;
  endtask

  task automatic reg_rd(input logic [6:0] a, output logic [63:0] d);
    bus_valid = 1; bus_we = 0; bus_addr = a;
    @(posedge clk);
    #1 bus_valid = 0;
    @(negedge clk);
    d = rsp_rdata;
    @(posedge clk);
    #1;
  endtask

  task automatic spm_wr(input int byte_addr, input logic [63:0] d);
    spm_en = 1; spm_we = 1; spm_addr = ($clog2(SPM_BYTES/8))'(byte_addr / 8);
    spm_wdata = d; spm_wstrb = 8'hff;
    @(posedge clk);
    #1 spm_en = 0; spm_we = 0;
  endtask

  task automatic wait_ul();
    logic [63:0] st;
    do reg_rd(REG_STATUS, st); while (st[ST_UL_BUSY]);
  endtask

  initial begin
    bus_valid = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0;
    spm_en = 0; spm_we = 0; spm_addr = 0; spm_wdata = 0; spm_wstrb = 0;
    done = 0; cycles = 0; stalls = 0; unloads = 0;
  end

  initial begin
    longint t0;
    int n, buf_base;
    @(posedge clk);
    wait (rst_n && start);
    @(posedge clk);
    #1 t0 = $time;
    reg_wr(REG_UL_SIZE, 64'(FLUSH));         // set once, buffered for all flushes
    for (int i = 0; i < NWORDS; i++) begin
      n = i * 8 / FLUSH;
      buf_base = (n % RING) * FLUSH;
      if (!SYNC && (i * 8) % FLUSH == 0 && n >= RING && n % RING == 0) wait_ul();
      repeat (WORK) @(posedge clk);
      spm_wr(buf_base + (i * 8) % FLUSH, val(PE_ID, i));
      if ((i * 8 + 8) % FLUSH == 0) begin
        reg_wr(REG_UL_SPM, 64'(buf_base));
        reg_wr(REG_UL_MEM, 64'(RES_BASE + longint'((n * 5) % NBLK) * FLUSH));
        reg_wr(REG_UL_GO, 64'd0);
        unloads++;
        if (SYNC) wait_ul();
      end
    end
    wait_ul();
    cycles = 32'(($time - t0) / 10);
    done = 1;
  end
endmodule
