// tb_lns_accum_collector -- self-checking testbench of the accumulation collector.
//
// Runs tiles of K chunks x ENTRIES inputs with random partial sums (and gaps between inputs),
// keeping a per-entry, per-lane model here: the first chunk loads, later chunks add with
// saturation at 24 bits. On the last chunk it checks each completed sum, its entry number and
// the one-cycle latency. Large inputs make saturation happen; that is counted and required.
module tb_lns_accum_collector;
  localparam int LANES = 4, ACC_W = 24, ENTRIES = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, in_valid = 0, in_first = 0, in_last = 0;
  logic signed [LANES-1:0][ACC_W-1:0] in_psum;
  logic out_valid, sat;
  logic [3:0] out_idx;
  logic signed [LANES-1:0][ACC_W-1:0] out_sum;

  lns_accum_collector #(.LANES(LANES), .ACC_W(ACC_W), .ENTRIES(ENTRIES)) dut (.*);

  int checks = 0, failures = 0, n_sat = 0, n_out = 0;
  longint model [ENTRIES][LANES];

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint sat24(longint x);
    if (x > 64'sd8388607)  return 64'sd8388607;
    if (x < -64'sd8388608) return -64'sd8388608;
    return x;
  endfunction

  task automatic tile(int k_chunks, int big);
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int k = 0; k < k_chunks; k++)
      for (int t = 0; t < ENTRIES; t++) begin
        while ($urandom_range(4) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (k == 0); in_last = (k == k_chunks - 1);
        for (int l = 0; l < LANES; l++) begin
          longint v = big ? longint'($urandom_range(0, 8000000)) - 4000000
                          : longint'($urandom_range(0, 2000)) - 1000;
          if (big && $urandom_range(1)) v = v * 2;
          v = sat24(v);
          in_psum[l] = ACC_W'(v);
          model[t][l] = sat24((k == 0 ? 0 : model[t][l]) + v);
        end
        @(negedge clk);
        in_valid = 0;
        if (k == k_chunks - 1) begin
          check(out_valid && out_idx == 4'(t), "output valid one cycle later");
          for (int l = 0; l < LANES; l++)
            check(longint'($signed(out_sum[l])) == model[t][l], $sformatf("completed sum k=%0d t=%0d l=%0d got %0d exp %0d", k_chunks, t, l, out_sum[l], model[t][l]));
          n_out++;
        end else begin
          check(!out_valid, "no output before the last chunk");
        end
        if (sat) n_sat++;
      end
  endtask

  initial begin
    in_psum = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    tile(1, 0);
    tile(3, 0);
    tile(5, 1);
    tile(2, 0);
    check(n_sat > 0, "saturation happened");
    $display("outputs=%0d saturations=%0d", n_out, n_sat);
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
