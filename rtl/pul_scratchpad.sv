// pul_scratchpad: the PE-local scratchpad memory (FPGA block RAM) of a PUL unit.
//
// The paper gives each PE up to 64 KiB of BRAM scratchpad that the PE reads in
// a single cycle while the DMA engine fills and drains it. This is a true
// dual-port RAM of BYTES bytes organised as 64-bit words with byte write
// enables: port A belongs to the PE, port B to the DMA engine.
//
// Interface per port: en, we, word address, write data, byte strobes; read
// data appears on rdata in the cycle after en (one-cycle BRAM read latency),
// and holds until the next read on that port. A read returns the old content
// of a word written in the same cycle on the same port (read-first).
// If both ports write the same byte in the same cycle, port B (DMA) wins;
// the paper does not address collisions, software keeps them apart by
// synchronising with the status register.
module pul_scratchpad #(
  parameter int unsigned BYTES = 65536
) (
  input  logic                             clk,
  // port A: PE
  input  logic                             a_en,
  input  logic                             a_we,
  input  logic [$clog2(BYTES/8)-1:0]       a_addr,
  input  logic [pul_pkg::DATA_W-1:0]       a_wdata,
  input  logic [pul_pkg::STRB_W-1:0]       a_wstrb,
  output logic [pul_pkg::DATA_W-1:0]       a_rdata,
  // port B: DMA engine
  input  logic                             b_en,
  input  logic                             b_we,
  input  logic [$clog2(BYTES/8)-1:0]       b_addr,
  input  logic [pul_pkg::DATA_W-1:0]       b_wdata,
  input  logic [pul_pkg::STRB_W-1:0]       b_wstrb,
  output logic [pul_pkg::DATA_W-1:0]       b_rdata
);
  import pul_pkg::*;
  localparam int unsigned WORDS = BYTES / STRB_W;

  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we)
        for (int i = 0; i < STRB_W; i++)
          if (a_wstrb[i]) mem[a_addr][8*i +: 8] <= a_wdata[8*i +: 8];
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we)
        for (int i = 0; i < STRB_W; i++)
          if (b_wstrb[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
    end
  end
endmodule
