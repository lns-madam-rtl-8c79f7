// lns_ppu -- post-processing unit: turns the completed integer partial sums of one collector
// entry (one value per lane) back into 8-bit LNS words, with optional ReLU and output scaling.
//
// Per lane, for a sum x:
//   * ReLU (relu_en): a negative x becomes 0.
//   * x = 0 gives the zero code (sign 0, exponent 0).
//   * Otherwise the magnitude is logarithmically quantized:
//       e = clamp(round(GAMMA * log2|x|) - scale, 1, 2^(W-1) - 1),  sign = (x < 0),
//     which is the paper's Q_log with the scale factor s = 2^(scale/GAMMA). round(GAMMA*log2|x|)
//     is found exactly: m = position of the leading one of |x|, then the normalized mantissa
//     |x| / 2^m in [1, 2) is compared against the GAMMA rounding thresholds 2^((k+0.5)/GAMMA),
//     giving GAMMA*m + (number of thresholds reached).
//   * clamped pulses when any lane was clamped.
// One register stage: out_* follow in_valid by one cycle.
//
// Follows the paper: Q_log's round-then-clamp to the 7-bit exponent range, output precision,
// "quantization scaling" and an activation function in the PPU. Own choices: the scale as an
// exponent offset, ReLU as the activation, the lower clamp at 1 because code 0 means zero, and
// round-to-nearest in the log domain.
module lns_ppu #(
  parameter int unsigned LANES = lns_pkg::LANES,
  parameter int unsigned ACC_W = lns_pkg::ACC_W,
  parameter int unsigned W     = lns_pkg::W,
  parameter int unsigned GAMMA = lns_pkg::GAMMA,
  parameter int unsigned IDX_W = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               relu_en,
  input  logic [9:0]                         scale,
  input  logic                               in_valid,
  input  logic [IDX_W-1:0]                   in_idx,
  input  logic signed [LANES-1:0][ACC_W-1:0] in_sum,
  output logic                               out_valid,
  output logic [IDX_W-1:0]                   out_idx,
  output logic [LANES-1:0][W-1:0]            out_lns,
  output logic                               clamped
);
  localparam int unsigned MW   = $clog2(ACC_W);
  localparam int signed   EMAX = (1 << (W - 1)) - 1;

  // rounding thresholds for a mantissa with ACC_W-1 fraction bits
  function automatic logic [GAMMA-1:0][ACC_W:0] make_th();
    for (int unsigned k = 0; k < GAMMA; k++)
      make_th[k] = (ACC_W+1)'(lns_pkg::log_threshold(k, GAMMA, ACC_W - 1));
  endfunction
  localparam logic [GAMMA-1:0][ACC_W:0] TH = make_th();

  logic [LANES-1:0][W-1:0] conv;
  logic [LANES-1:0]        lane_clamp;

  always_comb begin
    logic signed [ACC_W-1:0] x;
    logic [ACC_W-1:0]        mag;
    logic [ACC_W-1:0]        norm;
    logic [MW-1:0]           m;
    int                      e;
    for (int unsigned l = 0; l < LANES; l++) begin
      x   = in_sum[l];
      if (relu_en && x < 0) x = '0;
      mag = (x < 0) ? ACC_W'(-x) : ACC_W'(x);
      m   = '0;
      for (int unsigned b = 0; b < ACC_W; b++)
        if (mag[b]) m = MW'(b);
      norm = mag << (MW'(ACC_W - 1) - m);
      e = int'(GAMMA) * int'(m);
      for (int unsigned k = 0; k < GAMMA; k++)
        if ({1'b0, norm} >= TH[k]) e = e + 1;
      e = e - int'(scale);
      lane_clamp[l] = 1'b0;
      if (mag == '0) begin
        conv[l] = '0;
      end else begin
        if (e < 1)         begin e = 1;    lane_clamp[l] = 1'b1; end
        else if (e > EMAX) begin e = EMAX; lane_clamp[l] = 1'b1; end
        conv[l] = {x < 0, (W-1)'(e)};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_lns   <= '0;
      clamped   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      clamped   <= in_valid && (|lane_clamp);
      if (in_valid) begin
        out_idx <= in_idx;
        out_lns <= conv;
      end
    end
  end

endmodule
