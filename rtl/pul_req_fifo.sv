// pul_req_fifo: the request queue of the PUL DMA engine.
//
// The engine has two of these, one for preload and one for unload requests.
// Each holds up to DEPTH requests (64 in the paper), so the PE can queue many
// transfers ahead and keep computing while the engine works through them.
// It is an ordinary synchronous first-in first-out buffer: an array with
// read and write pointers and an occupancy counter.
//
// Interface: push side valid/ready (ready = not full), pop side valid/ready
// (valid = not empty, data shows the oldest entry). A push and a pop may
// happen in the same cycle. `count` is the number of stored entries.
// Timing: an entry pushed in cycle t can be popped in cycle t+1; there is no
// fall-through from push to pop in the same cycle.
// Reset (active low, synchronous) empties the queue.
module pul_req_fifo #(
  parameter type         T     = pul_pkg::pul_req_t,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_valid,
  output logic                       push_ready,
  input  T                           push_data,
  output logic                       pop_valid,
  input  logic                       pop_ready,
  output T                           pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                          mem [DEPTH];
  logic [PW-1:0]             wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic                      do_push, do_pop;

  assign push_ready = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (cnt != '0);
  assign pop_data   = mem[rd_ptr];
  assign count      = cnt;
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

`ifndef SYNTHESIS
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) int'(cnt) <= int'(DEPTH));
`endif
endmodule
