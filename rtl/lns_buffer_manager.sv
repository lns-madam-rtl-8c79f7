// lns_buffer_manager -- arbitrates the single port of a PE buffer between the compute reads and
// the fill writes that bring operands in from outside the PE.
//
// The read side is driven by the buffer's address generator: when rd_req is high the port
// reads word rd_addr in that cycle, always. The fill side is a valid/ready stream of SEG_W-bit
// segments: wr_start loads the fill pointer with word wr_base, segment 0; each accepted segment
// (wr_valid && wr_ready) is written at the pointer, which then moves to the next segment and,
// after the last segment of a word, to segment 0 of the next word. A fill beat is held off
// (wr_ready low) in a cycle with a compute read, so filling never disturbs the dataflow;
// wr_stall flags such a cycle.
//
// The paper names a buffer manager in each buffer but does not describe it: the read priority,
// the stream fill and the pointer are this design's choices.
module lns_buffer_manager #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned SEGS  = 32,
  parameter int unsigned SEG_W = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW   = (SEGS > 1) ? $clog2(SEGS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // compute reads
  input  logic             rd_req,
  input  logic [AW-1:0]    rd_addr,
  // fill stream
  input  logic             wr_start,
  input  logic [AW-1:0]    wr_base,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [SEG_W-1:0] wr_data,
  output logic             wr_stall,
  // memory port
  output logic             mem_en,
  output logic             mem_we,
  output logic [AW-1:0]    mem_addr,
  output logic [SW-1:0]    mem_seg,
  output logic [SEG_W-1:0] mem_wdata
);
  logic [AW-1:0] wp_addr;
  logic [SW-1:0] wp_seg;
  logic          wr_fire;

  assign wr_ready  = !rd_req && !wr_start;
  assign wr_fire   = wr_valid && wr_ready;
  assign wr_stall  = wr_valid && rd_req;

  assign mem_en    = rd_req || wr_fire;
  assign mem_we    = !rd_req && wr_fire;
  assign mem_addr  = rd_req ? rd_addr : wp_addr;
  assign mem_seg   = wp_seg;
  assign mem_wdata = wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_addr <= '0;
      wp_seg  <= '0;
    end else if (wr_start) begin
      wp_addr <= wr_base;
      wp_seg  <= '0;
    end else if (wr_fire) begin
      if (SEGS == 1 || wp_seg == SW'(SEGS - 1)) begin
        wp_seg  <= '0;
        wp_addr <= wp_addr + AW'(1);
      end else begin
        wp_seg  <= wp_seg + SW'(1);
      end
    end
  end

  // A read and a write never share the port.
  assert property (@(posedge clk) disable iff (!rst_n) !(mem_we && rd_req));

endmodule
