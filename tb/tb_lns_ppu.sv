// tb_lns_ppu -- self-checking testbench of the post-processing unit.
//
// Feeds random 24-bit sums (small, large, zero, the negative limit) with random scale and ReLU
// settings and checks every lane's LNS word against an exact integer model written here:
// round(8*log2|x|) = 8m + #{k in 0..7 : |x|^16 >= 2^(16m + 2k + 1)}, where m is the leading-one
// position, then minus scale and clamped to 1..127; zero gives code 0 and ReLU zeroes negative
// sums. Also checks the one-cycle latency, the index pass-through and the clamp flag.
module tb_lns_ppu;
  localparam int LANES = 8, ACC_W = 24, W = 8, GAMMA = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic relu_en = 0, in_valid = 0;
  logic [9:0] scale = 0;
  logic [3:0] in_idx = 0;
  logic signed [LANES-1:0][ACC_W-1:0] in_sum;
  logic out_valid, clamped;
  logic [3:0] out_idx;
  logic [LANES-1:0][W-1:0] out_lns;

  lns_ppu #(.LANES(LANES), .ACC_W(ACC_W), .W(W), .GAMMA(GAMMA), .IDX_W(4)) dut (.*);

  int checks = 0, failures = 0, n_clamp = 0, n_relu = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] ref_conv(longint x, int sc, bit relu, output bit clamp);
    longint mag;
    int m, e;
    logic [399:0] p16, lim;
    clamp = 0;
    if (relu && x < 0) x = 0;
    if (x == 0) return 8'h00;
    mag = (x < 0) ? -x : x;
    m = 0;
    for (int b = 0; b < 30; b++) if (mag >= (longint'(1) << b)) m = b;
    p16 = 400'(mag);
    p16 = p16 * p16; p16 = p16 * p16; p16 = p16 * p16; p16 = p16 * p16;
    e = 8 * m;
    for (int k = 0; k < 8; k++) begin
      lim = 400'(1) << (16 * m + 2 * k + 1);
      if (p16 >= lim) e++;
    end
    e = e - sc;
    if (e < 1)   begin e = 1;   clamp = 1; end
    if (e > 127) begin e = 127; clamp = 1; end
    return {x < 0, 7'(e)};
  endfunction

  initial begin
    in_sum = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      logic [LANES-1:0][7:0] expect_w;
      bit any_clamp, c;
      @(negedge clk);
      relu_en = ($urandom_range(3) == 0);
      scale   = 10'($urandom_range(0, 100));
      in_idx  = 4'($urandom);
      any_clamp = 0;
      for (int l = 0; l < LANES; l++) begin
        longint v;
        case ($urandom_range(5))
          0: v = 0;
          1: v = longint'($urandom_range(0, 20)) - 10;
          2: v = -64'sd8388608;
          default: v = longint'($urandom_range(0, 16777215)) - 8388608;
        endcase
        if ($urandom_range(3) == 0) v = v >>> $urandom_range(0, 20);
        in_sum[l] = ACC_W'(v);
        expect_w[l] = ref_conv(v, int'(scale), relu_en, c);
        if (c) any_clamp = 1;
        if (relu_en && v < 0) n_relu++;
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      check(out_valid && out_idx == in_idx, "valid and index after one cycle");
      for (int l = 0; l < LANES; l++)
        check(out_lns[l] == expect_w[l],
              $sformatf("lane %0d x=%0d scale=%0d relu=%0d got %h exp %h", l,
                        $signed(in_sum[l]), scale, relu_en, out_lns[l], expect_w[l]));
      check(clamped == any_clamp, "clamp flag");
      if (clamped) n_clamp++;
    end
    check(n_clamp > 0 && n_relu > 0, "clamping and ReLU happened");
    $display("clamps=%0d relu_zeroed=%0d", n_clamp, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
