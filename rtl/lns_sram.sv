// lns_sram -- single-port on-chip buffer array (the storage of BufferA and BufferB).
//
// DEPTH words of SEGS segments, each segment SEG_W bits. One access per cycle: a write stores
// one segment (wseg selects which) of word addr; a read returns the whole word on rdata one
// cycle later (registered output, as an SRAM macro would). rdata holds its value between reads.
//
// The paper gives the buffer sizes and shows them built from 8-bit wide banks; the single
// port, the segment-wide writes and the one-cycle read latency are this design's choices. It is
// written as an array so that synthesis can map it to an SRAM macro.
module lns_sram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned SEGS  = 32,
  parameter int unsigned SEG_W = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW   = (SEGS > 1) ? $clog2(SEGS) : 1
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic                       we,
  input  logic [AW-1:0]              addr,
  input  logic [SW-1:0]              wseg,
  input  logic [SEG_W-1:0]           wdata,
  output logic [SEGS-1:0][SEG_W-1:0] rdata
);
  logic [SEGS-1:0][SEG_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr][wseg] <= wdata;
      else    rdata <= mem[addr];
    end
  end

endmodule
