// lns_accum_collector -- accumulation collector: ENTRIES partial sums per lane, accumulated over
// the reduction chunks of an output tile before the completed sums go to the PPU.
//
// Each valid input carries one ACC_W-bit partial sum per lane. The collector's address
// generator gives it the entry: inputs are assigned to entries 0, 1, ..., ENTRIES-1, 0, ... in
// arrival order (output-stationary: entry t always holds output t of the tile). in_first marks
// inputs of the first chunk, which load their entry; later inputs add to it (saturating at the
// signed ACC_W-bit limits, flagged on sat). in_last marks inputs of the final chunk: their
// completed sums are sent out, one cycle later, on out_valid/out_sum with the entry number on
// out_idx. clear restarts the entry counter at 0 (the control unit pulses it at tile start).
//
// The paper gives 16 entries, 24-bit sums, a per-collector address generator and adder, and
// 1.5 KB in total for 32 lanes (16 x 32 x 24 bits). It calls the storage a latch array; here it
// is a flip-flop array (same function, no latch timing in simulation). The saturating add and
// the first/last protocol are this design's choices.
module lns_accum_collector #(
  parameter int unsigned LANES   = lns_pkg::LANES,
  parameter int unsigned ACC_W   = lns_pkg::ACC_W,
  parameter int unsigned ENTRIES = lns_pkg::ENTRIES,
  localparam int unsigned EW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clear,
  input  logic                                 in_valid,
  input  logic                                 in_first,
  input  logic                                 in_last,
  input  logic signed [LANES-1:0][ACC_W-1:0]   in_psum,
  output logic                                 out_valid,
  output logic [EW-1:0]                        out_idx,
  output logic signed [LANES-1:0][ACC_W-1:0]   out_sum,
  output logic                                 sat
);
  logic [LANES-1:0][ACC_W-1:0] entry [ENTRIES];
  logic [EW-1:0]               wptr;
  logic [LANES-1:0][ACC_W-1:0] sum;
  logic [LANES-1:0]            lane_sat;

  // address generator: next entry in arrival order
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 wptr <= '0;
    else if (clear)             wptr <= '0;
    else if (in_valid)          wptr <= (wptr == EW'(ENTRIES - 1)) ? '0 : wptr + EW'(1);
  end

  // adder: load on the first chunk, saturating add afterwards
  always_comb begin
    logic signed [ACC_W:0] s;
    for (int unsigned l = 0; l < LANES; l++) begin
      s = $signed({in_psum[l][ACC_W-1], in_psum[l]});
      if (!in_first) s = s + $signed({entry[wptr][l][ACC_W-1], entry[wptr][l]});
      lane_sat[l] = (s[ACC_W] != s[ACC_W-1]);
      if (lane_sat[l]) sum[l] = s[ACC_W] ? {1'b1, {(ACC_W-1){1'b0}}} : {1'b0, {(ACC_W-1){1'b1}}};
      else             sum[l] = s[ACC_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) entry[wptr] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_sum   <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      sat       <= in_valid && (|lane_sat);
      if (in_valid && in_last) begin
        out_idx <= wptr;
        out_sum <= sum;
      end
    end
  end

endmodule
