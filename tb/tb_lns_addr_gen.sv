// tb_lns_addr_gen -- self-checking testbench of the address generator.
//
// Runs walks with random base, count and hold and a random step pattern, and checks every
// step's addr, first and last against a counter model written here, that active drops after
// the last step, and that a looping walk restarts at its base.
module tb_lns_addr_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start = 0, loop = 0, step = 0;
  logic [7:0] cfg_base = 0;
  logic [15:0] cfg_count = 0;
  logic [7:0] cfg_hold = 0;
  logic [7:0] addr;
  logic       first, last, active;

  lns_addr_gen #(.AW(8), .CW(16), .HW(8)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic walk(int base, int count, int hold, bit lp);
    @(negedge clk);
    cfg_base = 8'(base); cfg_count = 16'(count); cfg_hold = 8'(hold); loop = lp; start = 1;
    @(negedge clk);
    start = 0;
    for (int rep = 0; rep < (lp ? 2 : 1); rep++)
      for (int i = 0; i < count; i++)
        for (int h = 0; h < hold; h++) begin
          // random idle cycles: outputs must not move
          while ($urandom_range(3) == 0) begin
            step = 0;
            check(addr == 8'(base + i) && active, "hold without step");
            @(negedge clk);
          end
          step = 1;
          check(active, "active");
          check(addr == 8'(base + i), "addr");
          check(first == (h == 0), "first");
          check(last == (i == count - 1 && h == hold - 1), "last");
          @(negedge clk);
        end
    step = 0;
    if (!lp) check(!active, "inactive after walk");
    else     check(active && addr == 8'(base), "loop restart");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    walk(3, 5, 1, 0);
    walk(10, 4, 16, 0);
    for (int n = 0; n < 20; n++)
      walk($urandom_range(200), $urandom_range(1, 12), $urandom_range(1, 5), 0);
    walk(7, 3, 2, 1);
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
