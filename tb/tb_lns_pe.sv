// tb_lns_pe -- end-to-end testbench of the LNS processing element at its default size
// (32 lanes x 32-element vectors, 128 KB BufferA, 8 KB BufferB).
//
// It generates random 8-bit LNS operands, streams them into BufferA and BufferB through the
// fill ports, runs tiles of the three passes and checks every output word against a model
// written here from the operands: per chunk the exact dot product sum (+/-)2^q * C_r with
// C_r = round(2^(r/8)*256), floored and saturated to 24 bits; accumulated over the chunks with
// saturation; then ReLU (forward only), round(8*log2|x|) - scale, clamped to 1..127.
// It also checks the tile latency (16*K + 5 cycles from start to the last output), the
// number of BufferA reads (one per 16 cycles) and BufferB reads (one per cycle), and counts
// the mechanisms the design has: A-register reuse, multi-chunk accumulation, zero operands,
// negative products, saturation, output clamping, ReLU, the pass switch and fill stalls.
// Each must happen at least once.
module tb_lns_pe;
  import lns_pkg::*;

  localparam int L = LANES, V = VS;
  localparam int SEGW = V * W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  pe_cfg_t cfg;
  logic busy, done;
  logic a_wr_start = 0, a_wr_valid = 0, a_wr_ready;
  logic [6:0] a_wr_base = 0;
  logic [SEGW-1:0] a_wr_data = 0;
  logic b_wr_start = 0, b_wr_valid = 0, b_wr_ready;
  logic [7:0] b_wr_base = 0;
  logic [SEGW-1:0] b_wr_data = 0;
  logic out_valid;
  logic [3:0] out_idx;
  pass_e out_pass;
  logic [L-1:0][W-1:0] out_lns;
  logic mac_sat, coll_sat, ppu_clamp, a_wr_stall, b_wr_stall;

  lns_pe dut (.*);

  // operand images of the two buffers
  logic [L-1:0][SEGW-1:0] a_img [A_DEPTH];
  logic [SEGW-1:0]        b_img [B_DEPTH];

  int checks = 0, failures = 0;
  int n_zero = 0, n_neg = 0, n_sat = 0, n_clamp = 0, n_relu = 0, n_multi = 0;
  int n_stall = 0, n_pass_bwd = 0, n_reuse = 0;
  int a_reads = 0, b_reads = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_buf_a.rd_req) a_reads++;
    if (dut.u_buf_b.rd_req) b_reads++;
    if (a_wr_stall || b_wr_stall) n_stall++;
    if (mac_sat || coll_sat) n_sat++;
    if (ppu_clamp) n_clamp++;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [W-1:0] rand_lns(int maxe);
    logic [W-1:0] x;
    x[W-1] = 1'($urandom);
    x[W-2:0] = ($urandom_range(7) == 0) ? 7'd0 : 7'($urandom_range(1, maxe));
    return x;
  endfunction

  function automatic longint sat24(longint x);
    if (x > 64'sd8388607)  return 64'sd8388607;
    if (x < -64'sd8388608) return -64'sd8388608;
    return x;
  endfunction

  // one chunk of one lane: exact dot product of two 32-element LNS vectors
  function automatic longint chunk_dot(logic [SEGW-1:0] a, logic [SEGW-1:0] b);
    longint s = 0;
    for (int i = 0; i < V; i++) begin
      int ea = int'(a[i*W +: W-1]), eb = int'(b[i*W +: W-1]);
      longint v;
      if (ea == 0 || eb == 0) continue;
      v = (longint'(1) << ((ea + eb) / 8)) *
          longint'($floor(2.0 ** (real'((ea + eb) % 8) / 8.0) * 256.0 + 0.5));
      s += (a[i*W + W-1] ^ b[i*W + W-1]) ? -v : v;
    end
    return sat24(s >>> 8);
  endfunction

  function automatic logic [7:0] to_lns(longint x, int sc, bit relu);
    longint mag;
    int m, e;
    logic [399:0] p16, lim;
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
    if (e < 1) e = 1;
    if (e > 127) e = 127;
    return {x < 0, 7'(e)};
  endfunction

  // stream words into BufferA / BufferB and keep the image
  task automatic fill_a(int base, int n, int maxe);
    @(negedge clk);
    a_wr_start = 1; a_wr_base = 7'(base);
    @(negedge clk);
    a_wr_start = 0;
    for (int w = 0; w < n; w++)
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < V; i++) a_wr_data[i*W +: W] = rand_lns(maxe);
        a_wr_valid = 1;
        #1;
        while (!a_wr_ready) begin @(negedge clk); #1; end
        a_img[base + w][l] = a_wr_data;
        @(negedge clk);
      end
    a_wr_valid = 0;
  endtask

  task automatic fill_b(int base, int n, int maxe);
    @(negedge clk);
    b_wr_start = 1; b_wr_base = 8'(base);
    @(negedge clk);
    b_wr_start = 0;
    for (int w = 0; w < n; w++) begin
      for (int i = 0; i < V; i++) b_wr_data[i*W +: W] = rand_lns(maxe);
      b_wr_valid = 1;
      #1;
      while (!b_wr_ready) begin @(negedge clk); #1; end
      b_img[base + w] = b_wr_data;
      @(negedge clk);
    end
    b_wr_valid = 0;
  endtask

  // run one tile and check all 16 x 32 outputs
  task automatic run_tile(pass_e pass, bit relu, int k, int a_base, int b_base, int sc);
    logic [7:0] expect_w [16][L];
    longint unsigned t_start, t_last;
    int got, a0, b0;
    for (int t = 0; t < 16; t++)
      for (int l = 0; l < L; l++) begin
        longint acc = 0;
        for (int c = 0; c < k; c++) begin
          longint d = chunk_dot(a_img[a_base + c][l], b_img[b_base + c * 16 + t]);
          acc = sat24(acc + d);
        end
        expect_w[t][l] = to_lns(acc, sc, relu && pass == PASS_FWD);
        if (relu && pass == PASS_FWD && acc < 0) n_relu++;
        if (pass != PASS_FWD && acc < 0) n_pass_bwd++;
      end
    for (int c = 0; c < k; c++)
      for (int l = 0; l < L; l++)
        for (int i = 0; i < V; i++) begin
          if (a_img[a_base + c][l][i*W +: W-1] == 0) n_zero++;
          if (a_img[a_base + c][l][i*W + W-1]) n_neg++;
        end
    if (k > 1) n_multi++;
    n_reuse += 15 * k;
    a0 = a_reads; b0 = b_reads;
    @(negedge clk);
    cfg = '0;
    cfg.pass = pass; cfg.relu_en = relu; cfg.k_chunks = 8'(k);
    cfg.a_base = 8'(a_base); cfg.b_base = 12'(b_base); cfg.scale = 10'(sc);
    start = 1;
    t_start = cyc;
    @(negedge clk);
    start = 0;
    got = 0;
    while (got < 16) begin
      @(posedge clk);
      #1;
      if (out_valid) begin
        check(out_pass == pass, "pass tag");
        check(int'(out_idx) == got, "output order");
        for (int l = 0; l < L; l++)
          check(out_lns[l] == expect_w[got][l],
                $sformatf("tile k=%0d out %0d lane %0d got %h exp %h", k, got, l, out_lns[l],
                          expect_w[got][l]));
        got++;
        t_last = cyc;
      end
    end
    check(t_last - t_start == longint'(16 * k + 5),
          $sformatf("latency %0d, expected %0d", t_last - t_start, 16 * k + 5));
    @(posedge clk); #1;
    check(done, "done after the last output");
    @(negedge clk);
    check(a_reads - a0 == k, "BufferA read once per 16 cycles");
    check(b_reads - b0 == 16 * k, "BufferB read every cycle");
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // forward: weights in A, activations in B, ReLU
    fill_a(0, 2, 40);
    fill_b(0, 32, 40);
    run_tile(PASS_FWD, 1'b1, 2, 0, 0, 60);
    // backward (input): output gradients in B, several chunks; ReLU request is ignored
    fill_a(2, 3, 50);
    fill_b(32, 48, 50);
    run_tile(PASS_BWD_I, 1'b1, 3, 2, 32, 70);
    // backward (weight): large exponents -> saturation and clamping; fill overlaps the tile
    fill_a(5, 1, 127);
    fill_b(80, 16, 127);
    fork
      run_tile(PASS_BWD_W, 1'b0, 1, 5, 80, 0);
      begin repeat (3) @(negedge clk); fill_b(100, 16, 30); end
    join
    // a forward tile on the data just filled concurrently, single chunk
    run_tile(PASS_FWD, 1'b0, 1, 0, 100, 40);

    check(n_zero > 0,     "zero operands occurred");
    check(n_neg > 0,      "negative operands occurred");
    check(n_multi > 0,    "multi-chunk accumulation occurred");
    check(n_reuse > 0,    "A register reuse occurred");
    check(n_sat > 0,      "saturation occurred");
    check(n_clamp > 0,    "output clamping occurred");
    check(n_relu > 0,     "ReLU zeroed an output");
    check(n_pass_bwd > 0, "negative outputs kept in a backward pass");
    check(n_stall > 0,    "a fill was held off by compute reads");
    $display("zero=%0d neg=%0d multi=%0d reuse=%0d sat=%0d clamp=%0d relu=%0d bwdneg=%0d stall=%0d",
             n_zero, n_neg, n_multi, n_reuse, n_sat, n_clamp, n_relu, n_pass_bwd, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
