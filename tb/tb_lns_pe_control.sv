// tb_lns_pe_control -- self-checking testbench of the PE control unit.
//
// Starts tiles with random chunk counts and checks, cycle by cycle, against the schedule
// worked out here: the address generators are started with the tile's bases and counts
// (BufferA: k_chunks words held 16 cycles, BufferB: 16*k_chunks words held 1 cycle), exactly
// 16*k_chunks issue cycles follow with the first/last-chunk flags on the right cycles, done
// pulses DRAIN cycles after the last issue, busy covers the whole tile, and a start while busy
// or with k_chunks = 0 is ignored.
module tb_lns_pe_control;
  import lns_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  pe_cfg_t cfg, cfg_q;
  logic busy, done, ag_start, ag_step, coll_clear, issue_valid, issue_first, issue_last;
  logic [6:0] a_base;
  logic [7:0] b_base;
  logic [15:0] a_count, b_count;
  logic [7:0] a_hold, b_hold;

  lns_pe_control #(.ENTRIES(16), .A_AW(7), .B_AW(8), .DRAIN(5)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic tile(int k);
    @(negedge clk);
    cfg = '0;
    cfg.k_chunks = 8'(k); cfg.a_base = 8'($urandom_range(0, 100)); cfg.b_base = 12'($urandom_range(0, 200));
    cfg.pass = PASS_BWD_W; cfg.scale = 10'd33;
    start = 1;
    #1;
    check(ag_start && coll_clear, "generators started");
    check(a_base == cfg.a_base[6:0] && b_base == cfg.b_base[7:0], "bases");
    check(a_count == 16'(k) && a_hold == 8'd16, "A walk");
    check(b_count == 16'(16 * k) && b_hold == 8'd1, "B walk");
    @(negedge clk);
    start = 0;
    check(cfg_q == cfg, "configuration latched");
    for (int c = 0; c < 16 * k; c++) begin
      // a start during the tile must be ignored
      start = ($urandom_range(7) == 0);
      #1;
      check(busy && issue_valid && ag_step && !ag_start, "issue cycle");
      check(issue_first == (c < 16), "first-chunk flag");
      check(issue_last == (c >= 16 * (k - 1)), "last-chunk flag");
      @(negedge clk);
    end
    start = 0;
    for (int d = 0; d < 5; d++) begin
      check(busy && !issue_valid && !done, "drain");
      @(negedge clk);
    end
    check(done && !busy, "done pulse");
    @(negedge clk);
    check(!done && !busy, "idle");
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // k_chunks = 0 is not accepted
    @(negedge clk);
    cfg = '0; start = 1;
    #1 check(!ag_start, "empty tile refused");
    @(negedge clk);
    start = 0;
    check(!busy, "still idle");
    tile(1);
    tile(2);
    for (int n = 0; n < 5; n++) tile($urandom_range(1, 6));
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
