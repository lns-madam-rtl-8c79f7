// tb_lns_vector_mac -- self-checking testbench of the LNS vector MAC unit.
//
// Streams random operand vectors (one per cycle, with gaps) and checks each partial sum against
// a reference computed here from the operands: sum over elements of (+/-) 2^q times the
// remainder constant round(2^(r/8) * 256), floored by 256, accumulated and saturated to 24
// bits. It also checks the two-cycle latency, accumulation when acc_clear is low, zero
// operands, and saturation at both limits.
module tb_lns_vector_mac;
  localparam int VS = 32, W = 8, GAMMA = 8, ACC_W = 24, LUT_F = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    in_valid = 0, acc_clear = 0;
  logic [VS-1:0][W-2:0]    ea, eb;
  logic [VS-1:0]           sa, sb;
  logic                    out_valid, sat;
  logic signed [ACC_W-1:0] psum;

  lns_vector_mac dut (.*);

  int checks = 0, failures = 0, n_sat = 0, n_acc = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // reference queue
  longint exp_q[$];
  longint unsigned t_q[$];
  longint ref_acc = 0;

  function automatic longint rconst(int r);
    return longint'($floor((2.0 ** (real'(r) / 8.0)) * 256.0 + 0.5));
  endfunction

  function automatic longint dot_ref();
    longint s = 0;
    for (int i = 0; i < VS; i++) begin
      int p = int'(ea[i]) + int'(eb[i]);
      longint v;
      if (ea[i] == 0 || eb[i] == 0) continue;
      v = (longint'(1) << (p / 8)) * rconst(p % 8);
      s += (sa[i] ^ sb[i]) ? -v : v;
    end
    return s >>> LUT_F;
  endfunction

  function automatic longint sat24(longint x);
    if (x > 64'sd8388607)  return 64'sd8388607;
    if (x < -64'sd8388608) return -64'sd8388608;
    return x;
  endfunction

  task automatic drive(int maxexp, bit clear);
    for (int i = 0; i < VS; i++) begin
      ea[i] = 7'($urandom_range(maxexp));
      eb[i] = 7'($urandom_range(maxexp));
      sa[i] = 1'($urandom);
      sb[i] = 1'($urandom);
    end
    acc_clear = clear;
    in_valid  = 1;
    ref_acc   = sat24((clear ? 0 : ref_acc) + dot_ref());
    if (!clear) n_acc++;
    exp_q.push_back(ref_acc);
    t_q.push_back(cyc);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint e;
      longint unsigned t0;
      e  = exp_q.pop_front();
      t0 = t_q.pop_front();
      checks++;
      if (longint'(psum) !== e) begin
        failures++;
        $display("MISMATCH psum=%0d expected=%0d", psum, e);
      end
      checks++;
      if (cyc - t0 != 2) begin
        failures++;
        $display("LATENCY %0d", cyc - t0);
      end
      if (sat) n_sat++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // all zero operands
    ea = '0; eb = '0; sa = '0; sb = '0; acc_clear = 1; in_valid = 1;
    exp_q.push_back(0); t_q.push_back(cyc); ref_acc = 0;
    @(negedge clk); in_valid = 0;
    // random small operands, fresh each time
    for (int n = 0; n < 200; n++) begin
      drive(40, 1'b1);
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(3) == 0) @(negedge clk);
    end
    // accumulation runs
    for (int n = 0; n < 100; n++) begin
      drive(60, (n % 5) == 0);
      @(negedge clk);
    end
    in_valid = 0;
    // full range: saturates
    for (int n = 0; n < 40; n++) begin
      drive(127, (n % 4) == 0);
      @(negedge clk);
    end
    // one dot product with all positive large products -> positive saturation
    for (int i = 0; i < VS; i++) begin ea[i] = 7'd127; eb[i] = 7'd127; sa[i] = 0; sb[i] = 0; end
    acc_clear = 1; in_valid = 1; ref_acc = sat24(dot_ref()); exp_q.push_back(ref_acc); t_q.push_back(cyc);
    @(negedge clk);
    for (int i = 0; i < VS; i++) sa[i] = 1;
    ref_acc = sat24(dot_ref()); exp_q.push_back(ref_acc); t_q.push_back(cyc);
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    if (n_sat == 0 || n_acc == 0) begin failures++; $display("saturation or accumulation never happened"); end
    $display("saturations=%0d accumulations=%0d", n_sat, n_acc);
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
