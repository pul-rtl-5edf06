// pul_unload_ch: unload channel of the PUL DMA engine (scratchpad -> memory).
//
// The channel takes requests from the unload queue and copies nbytes bytes
// from a byte address in the scratchpad to a byte address in device memory,
// so that the PE can write results out asynchronously instead of stalling on
// flushes. For each request it reads the source words through the scratchpad
// DMA port, realigns them to the destination byte offset and sends them as one
// write burst (per-beat address and byte strobes). A burst counts as complete
// when memory acknowledges it on B; busy stays high until every burst sent has
// been acknowledged, so a PE that polls the status register knows its results
// are persistent (the paper relies on this before releasing locks).
//
// Scratchpad reads take one cycle; a two-entry skid buffer absorbs the read
// latency so the port is requested only when there is room for the data.
// Up to MAX_ACKS write bursts may wait for acknowledgement (this design's
// choice). A request of 0 bytes is dropped.
//
// Interface: req_* from the unload queue; spm_* read requests to the
// scratchpad DMA port (performed when spm_gnt is high, data on spm_rdata one
// cycle later); w_*/b_* to the memory port (id is filled in by the owning
// unit); b is always accepted.
module pul_unload_ch #(
  parameter int unsigned SPM_BYTES = 65536,
  parameter int unsigned MAX_ACKS  = 64
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // unload queue
  input  logic                               req_valid,
  output logic                               req_ready,
  input  pul_pkg::pul_req_t                  req,
  // scratchpad DMA port, read side
  output logic                               spm_req,
  input  logic                               spm_gnt,
  output logic [$clog2(SPM_BYTES/8)-1:0]     spm_addr,
  input  logic [pul_pkg::DATA_W-1:0]         spm_rdata,
  // memory write
  output logic                               w_valid,
  input  logic                               w_ready,
  output pul_pkg::mem_w_t                    w,
  input  logic                               b_valid,
  input  pul_pkg::mem_b_t                    b,
  output logic                               busy
);
  import pul_pkg::*;
  localparam int unsigned SW = $clog2(SPM_BYTES / STRB_W);

  logic          al_start_ready, al_busy;
  logic          al_in_valid, al_in_ready;
  logic [DATA_W-1:0] al_in_data;
  logic          al_out_valid, al_out_last;
  logic [DATA_W-1:0] al_out_data;
  logic [STRB_W-1:0] al_out_strb;
  logic          start;
  logic          acks_full;

  logic [SW-1:0]         rptr;       // next scratchpad word to read
  logic [LEN_W:0]        rd_left;    // scratchpad words still to read
  logic [MEM_ADDR_W-1:0] waddr;      // address of the next write beat
  logic                  rd_pend;    // a read was granted last cycle
  logic [1:0]            skid_cnt;
  logic [DATA_W-1:0]     skid [2];
  logic [$clog2(MAX_ACKS+1)-1:0] acks; // bursts sent, not yet acknowledged

  // A new request starts only when the previous one has been fully read and
  // there is room to track one more acknowledgement.
  assign start     = req_valid && al_start_ready && !acks_full && (req.nbytes != '0);
  assign req_ready = (req.nbytes == '0) || (al_start_ready && !acks_full);
  assign acks_full = (int'(acks) >= int'(MAX_ACKS));

  pul_realign u_align (
    .clk, .rst_n,
    .start_valid (start),
    .start_ready (al_start_ready),
    .src_off     (req.spm_addr[OFF_W-1:0]),
    .dst_off     (req.mem_addr[OFF_W-1:0]),
    .nbytes      (req.nbytes),
    .in_valid    (al_in_valid),
    .in_ready    (al_in_ready),
    .in_data     (al_in_data),
    .out_valid   (al_out_valid),
    .out_ready   (w_ready),
    .out_data    (al_out_data),
    .out_strb    (al_out_strb),
    .out_last    (al_out_last),
    .busy        (al_busy)
  );

  // scratchpad reader with skid buffer
  logic skid_pop, skid_push;
  assign spm_req     = (rd_left != '0) && ((int'(skid_cnt) + int'(rd_pend)) < 2);
  assign spm_addr    = rptr;
  assign skid_push   = rd_pend;
  assign al_in_valid = (skid_cnt != '0);
  assign al_in_data  = skid[0];
  assign skid_pop    = al_in_valid && al_in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rptr     <= '0;
      rd_left  <= '0;
      rd_pend  <= 1'b0;
      skid_cnt <= '0;
      skid[0]  <= '0;
      skid[1]  <= '0;
    end else begin
      rd_pend <= spm_req && spm_gnt;
      if (start) begin
        rptr    <= req.spm_addr[SPM_ADDR_W-1:OFF_W];
        rd_left <= beats(req.spm_addr[OFF_W-1:0], req.nbytes);
      end else if (spm_req && spm_gnt) begin
        rptr    <= rptr + 1'b1;
        rd_left <= rd_left - 1'b1;
      end
      // skid buffer: entry 0 is the head
      case ({skid_push, skid_pop})
        2'b10: begin
          skid[skid_cnt[0]] <= spm_rdata;
          skid_cnt <= skid_cnt + 1'b1;
        end
        2'b01: begin
          skid[0]  <= skid[1];
          skid_cnt <= skid_cnt - 1'b1;
        end
        2'b11: begin
          if (skid_cnt == 2'd1) skid[0] <= spm_rdata;
          else begin
            skid[0] <= skid[1];
            skid[1] <= spm_rdata;
          end
        end
        default: ;
      endcase
    end
  end

  // memory write beats
  assign w_valid = al_out_valid;
  assign w.addr  = waddr;
  assign w.data  = al_out_data;
  assign w.strb  = al_out_strb;
  assign w.last  = al_out_last;
  assign w.id    = '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      waddr <= '0;
      acks  <= '0;
    end else begin
      if (start)
        waddr <= {req.mem_addr[MEM_ADDR_W-1:OFF_W], OFF_W'(0)};
      else if (w_valid && w_ready)
        waddr <= waddr + MEM_ADDR_W'(STRB_W);
      case ({w_valid && w_ready && w.last, b_valid})
        2'b10:   acks <= acks + 1'b1;
        2'b01:   acks <= acks - 1'b1;
        default: acks <= acks;
      endcase
    end
  end

  assign busy = req_valid || al_busy || (acks != '0);

`ifndef SYNTHESIS
  a_no_spurious_ack: assert property (@(posedge clk) disable iff (!rst_n)
    b_valid |-> (acks != '0) || (w_valid && w_ready && w.last));
  a_skid_bound: assert property (@(posedge clk) disable iff (!rst_n) skid_cnt <= 2'd2);
`endif
  wire unused_ok = &{1'b0, b.id};
endmodule
