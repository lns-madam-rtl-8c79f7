// lns_buffer -- one PE operand buffer (BufferA or BufferB): address generator, buffer manager and
// the single-port storage array.
//
// The control unit starts the address generator with a base word, a word count and a hold
// (steps per word) and then steps it once per compute cycle. On the first step at each word the
// buffer reads that word; rd_valid marks the cycle, one clock later, in which rd_data holds it.
// Between compute reads the fill stream (see lns_buffer_manager) writes segments into the array.
//
// Block structure (address generator -> buffer manager -> banks) follows the paper's PE figure;
// sizes come from the paper's table. How the three are wired is this design's choice.
module lns_buffer #(
  parameter int unsigned DEPTH = lns_pkg::A_DEPTH,
  parameter int unsigned SEGS  = lns_pkg::LANES,
  parameter int unsigned SEG_W = lns_pkg::SEG_W,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // from the control unit
  input  logic                       ag_start,
  input  logic [AW-1:0]              ag_base,
  input  logic [15:0]                ag_count,
  input  logic [7:0]                 ag_hold,
  input  logic                       ag_step,
  output logic                       ag_active,
  // compute read data
  output logic                       rd_valid,
  output logic [SEGS-1:0][SEG_W-1:0] rd_data,
  // fill stream
  input  logic                       wr_start,
  input  logic [AW-1:0]              wr_base,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [SEG_W-1:0]           wr_data,
  output logic                       wr_stall
);
  localparam int unsigned SW = (SEGS > 1) ? $clog2(SEGS) : 1;

  logic [AW-1:0]    ag_addr;
  logic             ag_first;
  logic             rd_req;
  logic             mem_en, mem_we;
  logic [AW-1:0]    mem_addr;
  logic [SW-1:0]    mem_seg;
  logic [SEG_W-1:0] mem_wdata;

  lns_addr_gen #(.AW(AW), .CW(16), .HW(8)) u_ag (
    .clk, .rst_n,
    .start     (ag_start),
    .loop      (1'b0),
    .cfg_base  (ag_base),
    .cfg_count (ag_count),
    .cfg_hold  (ag_hold),
    .step      (ag_step),
    .addr      (ag_addr),
    .first     (ag_first),
    .last      (),
    .active    (ag_active)
  );

  assign rd_req = ag_step && ag_first;

  lns_buffer_manager #(.DEPTH(DEPTH), .SEGS(SEGS), .SEG_W(SEG_W)) u_mgr (
    .clk, .rst_n,
    .rd_req, .rd_addr (ag_addr),
    .wr_start, .wr_base, .wr_valid, .wr_ready, .wr_data, .wr_stall,
    .mem_en, .mem_we, .mem_addr, .mem_seg, .mem_wdata
  );

  lns_sram #(.DEPTH(DEPTH), .SEGS(SEGS), .SEG_W(SEG_W)) u_mem (
    .clk, .en (mem_en), .we (mem_we), .addr (mem_addr), .wseg (mem_seg),
    .wdata (mem_wdata), .rdata (rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_req;
  end

endmodule
