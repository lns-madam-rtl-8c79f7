// tb_lns_buffer -- self-checking testbench of a PE operand buffer (address generator, buffer
// manager and array together).
//
// Fills the buffer through the segment stream, then walks it with the address generator
// (random base, count, hold) while a second fill runs into another region. Checks that each
// word is read exactly once, on the first step of its hold period, arrives one cycle later with
// the filled contents, and that the concurrent fill is held off by the reads but completes.
module tb_lns_buffer;
  localparam int DEPTH = 16, SEGS = 2, SEG_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        ag_start = 0, ag_step = 0, ag_active;
  logic [3:0]  ag_base = 0;
  logic [15:0] ag_count = 0;
  logic [7:0]  ag_hold = 0;
  logic        rd_valid;
  logic [SEGS-1:0][SEG_W-1:0] rd_data;
  logic        wr_start = 0, wr_valid = 0, wr_ready, wr_stall;
  logic [3:0]  wr_base = 0;
  logic [SEG_W-1:0] wr_data = 0;

  lns_buffer #(.DEPTH(DEPTH), .SEGS(SEGS), .SEG_W(SEG_W)) dut (.*);

  logic [SEGS-1:0][SEG_W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0, stalls = 0;
  int exp_addr[$];

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // fill n words from base; stops early if stop is set
  task automatic fill(int base, int n);
    @(negedge clk);
    wr_start = 1; wr_base = 4'(base);
    @(negedge clk);
    wr_start = 0;
    for (int a = 0; a < n; a++)
      for (int s = 0; s < SEGS; s++) begin
        wr_valid = 1; wr_data = SEG_W'($urandom);
        #1;
        while (!wr_ready) begin stalls++; @(negedge clk); #1; end
        shadow[(base + a) % DEPTH][s] = wr_data;
        @(negedge clk);
      end
    wr_valid = 0;
  endtask

  always @(posedge clk) if (rst_n && rd_valid) begin
    int a;
    #1;
    a = exp_addr.pop_front();
    check(rd_data == shadow[a], "read data");
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill(0, 8);
    for (int n = 0; n < 6; n++) begin
      int base = $urandom_range(0, 4), count = $urandom_range(1, 4), hold = $urandom_range(1, 4);
      @(negedge clk);
      ag_base = 4'(base); ag_count = 16'(count); ag_hold = 8'(hold); ag_start = 1;
      @(negedge clk);
      ag_start = 0;
      fork
        begin
          for (int i = 0; i < count; i++)
            for (int h = 0; h < hold; h++) begin
              ag_step = 1;
              if (h == 0) exp_addr.push_back(base + i);
              @(negedge clk);
            end
          ag_step = 0;
        end
        fill(8 + (n % 2) * 4, 2);   // a concurrent fill into another region
      join
      repeat (2) @(negedge clk);
      check(exp_addr.size() == 0, "every word read once");
      check(!ag_active, "walk ended");
    end
    check(stalls > 0, "fill was held off at least once");
    $display("fill stalls=%0d", stalls);
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
