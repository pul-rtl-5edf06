// pul_realign: byte realigner shared by the preload and unload channels.
//
// PUL transfers are byte-addressable on both ends: a block of nbytes bytes
// that starts at byte offset src_off of its first source word is written
// starting at byte offset dst_off of its first destination word. This module
// turns the stream of source words into the stream of destination words.
// It keeps a 16-byte buffer: source words enter at the back (their unused
// leading or trailing bytes dropped), destination words leave from the front
// (placed at the right byte lane, with strobes for the bytes that belong to
// the transfer). With 16 bytes of room, one source word can enter and one
// destination word can leave in every cycle, so an aligned or misaligned
// transfer both run at one word per cycle once the buffer has been primed.
//
// Interface:
//   start_valid/start_ready  begin a transfer (ready only when idle)
//   in_*                     source words, exactly ceil((src_off+nbytes)/8) of them
//   out_*                    destination words with byte strobes,
//                            exactly ceil((dst_off+nbytes)/8) of them; out_last on the final one
//   busy                     a transfer is in progress
// A transfer of 0 bytes ends in the cycle after start and moves no words.
// The buffer mechanism is this design's own; the paper only states that
// transfers are byte-addressable and of application-defined size.
module pul_realign (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start_valid,
  output logic                          start_ready,
  input  logic [pul_pkg::OFF_W-1:0]     src_off,
  input  logic [pul_pkg::OFF_W-1:0]     dst_off,
  input  logic [pul_pkg::SIZE_W-1:0]    nbytes,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [pul_pkg::DATA_W-1:0]    in_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [pul_pkg::DATA_W-1:0]    out_data,
  output logic [pul_pkg::STRB_W-1:0]    out_strb,
  output logic                          out_last,
  output logic                          busy
);
  import pul_pkg::*;
  localparam int unsigned BUF = 2 * STRB_W;

  logic                active;
  logic [SIZE_W-1:0]   in_left, out_left;   // bytes still to take / to give
  logic [OFF_W-1:0]    in_off, out_off;     // offset inside the next word
  logic [7:0]          buf_q [BUF];
  logic [OFF_W+1:0]    cnt;                 // valid bytes in buf_q, 0..16

  logic [OFF_W:0]      take_n, give_n;      // 0..8
  logic                fire_in, fire_out;
  logic [7:0]          buf_d [BUF];
  logic [OFF_W+1:0]    cnt_mid;

  function automatic logic [OFF_W:0] min_room(input logic [OFF_W-1:0] off,
                                              input logic [SIZE_W-1:0] left);
    logic [OFF_W:0] room;
    room = (OFF_W+1)'(STRB_W) - (OFF_W+1)'(off);
    return (left < SIZE_W'(room)) ? left[OFF_W:0] : room;
  endfunction

  assign take_n      = min_room(in_off, in_left);
  assign give_n      = min_room(out_off, out_left);
  assign start_ready = !active;
  assign busy        = active;
  assign in_ready    = active && (in_left != '0) && (cnt <= (OFF_W+2)'(STRB_W));
  assign out_valid   = active && (out_left != '0) && (cnt >= (OFF_W+2)'(give_n));
  assign out_last    = (out_left == SIZE_W'(give_n));
  assign fire_in     = in_valid && in_ready;
  assign fire_out    = out_valid && out_ready;

  always_comb begin
    for (int j = 0; j < STRB_W; j++) begin
      if (j >= int'(out_off) && j < int'(out_off) + int'(give_n)) begin
        out_data[8*j +: 8] = buf_q[j - int'(out_off)];
        out_strb[j]        = 1'b1;
      end else begin
        out_data[8*j +: 8] = 8'h00;
        out_strb[j]        = 1'b0;
      end
    end
  end

  always_comb begin
    int sh;
    sh      = fire_out ? int'(give_n) : 0;
    cnt_mid = cnt - (OFF_W+2)'(sh);
    for (int i = 0; i < BUF; i++)
      buf_d[i] = (i + sh < BUF) ? buf_q[i + sh] : 8'h00;
    if (fire_in)
      for (int k = 0; k < STRB_W; k++)
        if (k < int'(take_n) && int'(cnt_mid) + k < BUF)
          buf_d[int'(cnt_mid) + k] = in_data[8*(int'(in_off) + k) +: 8];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active   <= 1'b0;
      in_left  <= '0;
      out_left <= '0;
      in_off   <= '0;
      out_off  <= '0;
      cnt      <= '0;
      for (int i = 0; i < BUF; i++) buf_q[i] <= 8'h00;
    end else if (!active) begin
      if (start_valid) begin
        active   <= 1'b1;
        in_left  <= nbytes;
        out_left <= nbytes;
        in_off   <= src_off;
        out_off  <= dst_off;
        cnt      <= '0;
      end
    end else begin
      buf_q <= buf_d;
      cnt   <= cnt_mid + (fire_in ? (OFF_W+2)'(take_n) : '0);
      if (fire_in) begin
        in_left <= in_left - SIZE_W'(take_n);
        in_off  <= '0;
      end
      if (fire_out) begin
        out_left <= out_left - SIZE_W'(give_n);
        out_off  <= '0;
      end
      if ((in_left == '0 || (fire_in && in_left == SIZE_W'(take_n))) &&
          (out_left == '0 || (fire_out && out_left == SIZE_W'(give_n))))
        active <= 1'b0;
    end
  end
endmodule
