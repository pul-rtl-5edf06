// pul_pe_model: behavioural model of one processing element running the
// preload/compute/unload kernel (testbench only, not synthesizable).
//
// It stands in for the soft-core PE and plays the software side of PUL in
// batch-wise form: the record trace is cut into batches of DIST records (the
// preload distance). While the PE sums the records of batch b out of one half
// of a double buffer in the scratchpad, the preloads of batch b+1 fill the
// other half. Each record is RECB bytes read from a random index of a
// dataset in memory; the PE adds its first K 64-bit words, spending WORK
// further compute cycles on each (K and WORK set the operational intensity), stores the per-record sum in an output buffer and
// unloads the batch's sums to memory. Before it uses a batch it polls STATUS
// until no preload is pending ("PRELOAD_WAIT"); at the end it waits for
// the unloads too. The preload size register is written once and reused.
// With SYNC = 1 every preload is waited for at once (no interleaving), the
// baseline the paper compares with.
//
// Record index i of PE p: lcg(p, i) % NREC. Results: sum i of the sums goes
// to `result`; per-record sums land at RES_BASE + 8*i.
module pul_pe_model #(
  parameter int          PE_ID     = 0,
  parameter int          SPM_BYTES = 65536,
  parameter int          NRECS     = 64,        // records processed
  parameter int          DIST      = 16,        // preload distance (batch size)
  parameter int          K         = 1,         // words summed per record
  parameter int          WORK      = 0,         // extra compute cycles per word
  parameter int          RECB      = 64,        // transfer size in bytes
  parameter int          NREC      = 1024,      // records in the dataset
  parameter longint      DATA_BASE = 0,         // may be misaligned
  parameter longint      RES_BASE  = 'h100000,
  parameter bit          SYNC      = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     done,
  output longint unsigned          result,
  output int unsigned              cycles,
  output int unsigned              stalls,       // cycles a GO write was held off
  output int unsigned              reg_writes,
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
  localparam int IN_BASE  = 0;                        // two halves of DIST*RECB bytes
  localparam int OUT_BASE = 2 * DIST * RECB;          // two halves of DIST*8 bytes

  function automatic int unsigned rec_index(input int p, input int i);
    int unsigned x;
    x = 32'(p) * 32'h9E3779B9 + 32'(i) * 32'h85EBCA6B + 32'h1234567;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 13);
    return x % NREC;
  endfunction

  // All tasks start 1 time unit after a rising edge and return at the same
  // point of a later cycle, so the PE's outputs never change on a clock edge.
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
    reg_writes++;
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

  task automatic spm_rd(input int byte_addr, output logic [63:0] d);
    spm_en = 1; spm_we = 0; spm_addr = ($clog2(SPM_BYTES/8))'(byte_addr / 8);
    @(posedge clk);
    #1 spm_en = 0;
    d = spm_rdata;
  endtask

  task automatic spm_wr(input int byte_addr, input logic [63:0] d);
    spm_en = 1; spm_we = 1; spm_addr = ($clog2(SPM_BYTES/8))'(byte_addr / 8);
    spm_wdata = d; spm_wstrb = 8'hff;
    @(posedge clk);
    #1 spm_en = 0; spm_we = 0;
  endtask

  task automatic wait_mask(input int mask);
    logic [63:0] st;
    do reg_rd(REG_STATUS, st); while ((st & 64'(mask)) != 0);
  endtask

  task automatic preload_batch(input int b);
    for (int j = 0; j < DIST && b * DIST + j < NRECS; j++) begin
      reg_wr(REG_PL_MEM, 64'(DATA_BASE + longint'(rec_index(PE_ID, b * DIST + j)) * RECB));
      reg_wr(REG_PL_SPM, 64'(IN_BASE + (b % 2) * DIST * RECB + j * RECB));
      reg_wr(REG_PL_GO, 64'd0);
      if (SYNC) wait_mask(1 << ST_PL_BUSY);
    end
  endtask

  initial begin
    bus_valid = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0;
    spm_en = 0; spm_we = 0; spm_addr = 0; spm_wdata = 0; spm_wstrb = 0;
    done = 0; result = 0; cycles = 0; stalls = 0; reg_writes = 0;
  end

  initial begin
    int nb;
    longint t0;
    logic [63:0] v, s;
    @(posedge clk);
    wait (rst_n && start);
    @(posedge clk);
    #1 t0 = $time;
    nb = (NRECS + DIST - 1) / DIST;
    reg_wr(REG_PL_SIZE, 64'(RECB));          // set once, buffered for all preloads
    reg_wr(REG_UL_SIZE, 64'(DIST * 8));
    preload_batch(0);
    for (int b = 0; b < nb; b++) begin
      wait_mask(1 << ST_PL_BUSY);             // batch b is in the scratchpad
      if (b + 1 < nb) preload_batch(b + 1);   // next batch streams in meanwhile
      if (b >= 2 && (b % 2) == 0) wait_mask(1 << ST_UL_BUSY);  // output half free again
      for (int j = 0; j < DIST && b * DIST + j < NRECS; j++) begin
        s = 0;
        for (int k = 0; k < K; k++) begin
          spm_rd(IN_BASE + (b % 2) * DIST * RECB + j * RECB + k * 8, v);
          repeat (WORK) @(posedge clk);
          s += v;
        end
        result += s;
        spm_wr(OUT_BASE + (b % 2) * DIST * 8 + j * 8, s);
      end
      if (b % 2 == 1 || b + 1 == nb) begin
        // unload the sums of batch b (and b-1 when they share the buffer pair)
        reg_wr(REG_UL_SPM, 64'(OUT_BASE + (b % 2) * DIST * 8));
        reg_wr(REG_UL_MEM, 64'(RES_BASE + longint'(b) * DIST * 8));
        reg_wr(REG_UL_GO, 64'd0);
      end
      if (b % 2 == 1) begin
        reg_wr(REG_UL_SPM, 64'(OUT_BASE));
        reg_wr(REG_UL_MEM, 64'(RES_BASE + longint'(b - 1) * DIST * 8));
        reg_wr(REG_UL_GO, 64'd0);
      end
    end
    wait_mask((1 << ST_PL_BUSY) | (1 << ST_UL_BUSY));
    cycles = 32'(($time - t0) / 10);
    done = 1;
  end
endmodule
