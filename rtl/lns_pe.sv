// lns_pe -- LNS-Madam processing element, the top of this design.
//
// The PE computes an output tile of a DNN layer pass (forward, backward-input or
// backward-weight) with dot products in a multi-base logarithmic number system. It holds
// BufferA (128 KB) and BufferB (8 KB) of 8-bit LNS operands, LANES vector MAC units of VS
// elements, a 16-entry accumulation collector per lane and the PPU that converts the finished
// sums back to 8-bit LNS. The control unit sequences a tile as follows:
//   * A BufferA word holds one VS-element operand vector per lane (LANES segments). It is read
//     once every ENTRIES (16) cycles and kept in a register, so each lane reuses its A vector
//     for 16 consecutive dot products.
//   * A BufferB word holds one VS-element vector. One is read every cycle and broadcast to all
//     lanes.
//   * In step t of chunk k, lane l computes dot(A[k][l], B[k*16+t]) and the collector adds it
//     into entry t of lane l. After k_chunks chunks, entry t holds the full dot product of length
//     k_chunks*VS, and the 32 values of entry t are quantized by the PPU and sent out.
// So a tile yields 16 outputs x 32 lanes, e.g. 16 output pixels x 32 output channels.
//
// Pipeline (cycles after the issuing cycle): 1 buffer read, 2 MAC adder-tree register,
// 3 MAC partial-sum register, 4 collector output, 5 PPU output. A tile of K chunks takes
// 16*K + 5 cycles from the start cycle to the last output; done follows one cycle later.
//
// Interfaces. Control In: start with cfg (pe_cfg_t); Control Out: busy, done. Operand fill:
// a_wr_* / b_wr_* stream SEG_W-bit segments into the buffers (see lns_buffer_manager); fills
// may overlap a running tile, a compute read then holds a fill beat off for one cycle.
// Element i of a segment is bits [i*W +: W], with the sign in the top bit and the exponent
// below it; exponent 0 encodes zero. Results: out_valid, out_idx (entry t), out_pass and
// out_lns (one LNS word per lane). Status pulses: mac_sat, coll_sat (a 24-bit sum saturated),
// ppu_clamp (an output exponent was clamped), a_wr_stall / b_wr_stall.
//
// From the paper: the block structure, sizes, the dataflow and the pass-to-buffer mapping.
// This design's choices: the fill and output interfaces, the configuration fields, the
// pipeline registers around the buffers and PPU, and using each MAC's own accumulator only as
// a register (acc_clear is always set) because the collector does the accumulation over chunks.
module lns_pe
  import lns_pkg::*;
#(
  parameter int unsigned P_LANES   = lns_pkg::LANES,
  parameter int unsigned P_VS      = lns_pkg::VS,
  parameter int unsigned P_A_DEPTH = lns_pkg::A_DEPTH,
  parameter int unsigned P_B_DEPTH = lns_pkg::B_DEPTH,
  localparam int unsigned SEGW     = P_VS * W,
  localparam int unsigned A_AW     = $clog2(P_A_DEPTH),
  localparam int unsigned B_AW     = $clog2(P_B_DEPTH),
  localparam int unsigned EW       = $clog2(ENTRIES)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // Control In / Control Out
  input  logic                                 start,
  input  pe_cfg_t                              cfg,
  output logic                                 busy,
  output logic                                 done,
  // BufferA fill
  input  logic                                 a_wr_start,
  input  logic [A_AW-1:0]                      a_wr_base,
  input  logic                                 a_wr_valid,
  output logic                                 a_wr_ready,
  input  logic [SEGW-1:0]                      a_wr_data,
  // BufferB fill
  input  logic                                 b_wr_start,
  input  logic [B_AW-1:0]                      b_wr_base,
  input  logic                                 b_wr_valid,
  output logic                                 b_wr_ready,
  input  logic [SEGW-1:0]                      b_wr_data,
  // results: output activations, input gradients or weight gradients
  output logic                                 out_valid,
  output logic [EW-1:0]                        out_idx,
  output pass_e                                out_pass,
  output logic [P_LANES-1:0][W-1:0]            out_lns,
  // status
  output logic                                 mac_sat,
  output logic                                 coll_sat,
  output logic                                 ppu_clamp,
  output logic                                 a_wr_stall,
  output logic                                 b_wr_stall
);
  pe_cfg_t cfg_q;

  // ---------------- control ----------------
  logic            ag_start, ag_step;
  logic [A_AW-1:0] a_base;
  logic [B_AW-1:0] b_base;
  logic [15:0]     a_count, b_count;
  logic [7:0]      a_hold, b_hold;
  logic            coll_clear, issue_valid, issue_first, issue_last;

  lns_pe_control #(.ENTRIES(ENTRIES), .A_AW(A_AW), .B_AW(B_AW), .DRAIN(5)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q, .busy, .done,
    .ag_start, .a_base, .a_count, .a_hold, .b_base, .b_count, .b_hold, .ag_step,
    .coll_clear, .issue_valid, .issue_first, .issue_last
  );

  // ---------------- buffers ----------------
  logic                              a_rd_valid;
  logic [P_LANES-1:0][SEGW-1:0]      a_rd_data;
  logic [0:0][SEGW-1:0]              b_rd_data;

  lns_buffer #(.DEPTH(P_A_DEPTH), .SEGS(P_LANES), .SEG_W(SEGW)) u_buf_a (
    .clk, .rst_n,
    .ag_start, .ag_base (a_base), .ag_count (a_count), .ag_hold (a_hold), .ag_step,
    .ag_active (),
    .rd_valid (a_rd_valid), .rd_data (a_rd_data),
    .wr_start (a_wr_start), .wr_base (a_wr_base), .wr_valid (a_wr_valid),
    .wr_ready (a_wr_ready), .wr_data (a_wr_data), .wr_stall (a_wr_stall)
  );

  lns_buffer #(.DEPTH(P_B_DEPTH), .SEGS(1), .SEG_W(SEGW)) u_buf_b (
    .clk, .rst_n,
    .ag_start, .ag_base (b_base), .ag_count (b_count), .ag_hold (b_hold), .ag_step,
    .ag_active (),
    .rd_valid (), .rd_data (b_rd_data),
    .wr_start (b_wr_start), .wr_base (b_wr_base), .wr_valid (b_wr_valid),
    .wr_ready (b_wr_ready), .wr_data (b_wr_data), .wr_stall (b_wr_stall)
  );

  // issue flags, delayed to line up with the buffer data (stage 1)
  logic v1, first1, last1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {v1, first1, last1} <= '0;
    else        {v1, first1, last1} <= {issue_valid, issue_first, issue_last};
  end

  // local-A-stationary register: A is reused for ENTRIES cycles
  logic [P_LANES-1:0][SEGW-1:0] a_reg, a_cur;
  assign a_cur = a_rd_valid ? a_rd_data : a_reg;
  always_ff @(posedge clk) begin
    if (a_rd_valid) a_reg <= a_rd_data;
  end

  // ---------------- vector MAC lanes ----------------
  logic [P_VS-1:0][W-2:0]                     eb;
  logic [P_VS-1:0]                            sb;
  logic [P_LANES-1:0]                         mac_v, mac_s;
  logic signed [P_LANES-1:0][ACC_W-1:0]       psum;

  always_comb begin
    for (int unsigned i = 0; i < P_VS; i++) begin
      eb[i] = b_rd_data[0][i*W +: W-1];
      sb[i] = b_rd_data[0][i*W + W-1];
    end
  end

  for (genvar l = 0; l < P_LANES; l++) begin : g_lane
    logic [P_VS-1:0][W-2:0] ea;
    logic [P_VS-1:0]        sa;
    always_comb begin
      for (int unsigned i = 0; i < P_VS; i++) begin
        ea[i] = a_cur[l][i*W +: W-1];
        sa[i] = a_cur[l][i*W + W-1];
      end
    end
    lns_vector_mac #(.VS(P_VS), .W(W), .GAMMA(GAMMA), .ACC_W(ACC_W), .LUT_F(LUT_F)) u_mac (
      .clk, .rst_n,
      .in_valid  (v1),
      .acc_clear (1'b1),
      .ea, .sa, .eb, .sb,
      .out_valid (mac_v[l]),
      .psum      (psum[l]),
      .sat       (mac_s[l])
    );
  end

  // issue flags delayed by the MAC's two stages (stage 3)
  logic [1:0] first_d, last_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_d <= '0;
      last_d  <= '0;
    end else begin
      first_d <= {first_d[0], first1};
      last_d  <= {last_d[0], last1};
    end
  end
  assign mac_sat = |mac_s;

  // ---------------- accumulation collector ----------------
  logic                                 coll_v;
  logic [EW-1:0]                        coll_idx;
  logic signed [P_LANES-1:0][ACC_W-1:0] coll_sum;

  lns_accum_collector #(.LANES(P_LANES), .ACC_W(ACC_W), .ENTRIES(ENTRIES)) u_coll (
    .clk, .rst_n,
    .clear    (coll_clear),
    .in_valid (mac_v[0]),
    .in_first (first_d[1]),
    .in_last  (last_d[1]),
    .in_psum  (psum),
    .out_valid(coll_v),
    .out_idx  (coll_idx),
    .out_sum  (coll_sum),
    .sat      (coll_sat)
  );

  // ---------------- PPU ----------------
  lns_ppu #(.LANES(P_LANES), .ACC_W(ACC_W), .W(W), .GAMMA(GAMMA), .IDX_W(EW)) u_ppu (
    .clk, .rst_n,
    .relu_en  (cfg_q.relu_en && (cfg_q.pass == PASS_FWD)),
    .scale    (cfg_q.scale),
    .in_valid (coll_v),
    .in_idx   (coll_idx),
    .in_sum   (coll_sum),
    .out_valid,
    .out_idx,
    .out_lns,
    .clamped  (ppu_clamp)
  );
  assign out_pass = cfg_q.pass;

endmodule
