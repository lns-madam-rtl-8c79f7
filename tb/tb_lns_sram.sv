// tb_lns_sram -- self-checking testbench of the single-port buffer array.
//
// Writes random segments into a small array, keeping a shadow copy here, then reads random
// words back and checks them, including the one-cycle read latency and that rdata holds its
// value through writes.
module tb_lns_sram;
  localparam int DEPTH = 16, SEGS = 4, SEG_W = 24;

  logic clk = 0;
  always #5 clk = ~clk;

  logic en = 0, we = 0;
  logic [3:0] addr = 0;
  logic [1:0] wseg = 0;
  logic [SEG_W-1:0] wdata = 0;
  logic [SEGS-1:0][SEG_W-1:0] rdata;

  lns_sram #(.DEPTH(DEPTH), .SEGS(SEGS), .SEG_W(SEG_W)) dut (.*);

  logic [SEGS-1:0][SEG_W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    // fill every segment once
    for (int a = 0; a < DEPTH; a++)
      for (int s = 0; s < SEGS; s++) begin
        @(negedge clk);
        en = 1; we = 1; addr = 4'(a); wseg = 2'(s); wdata = SEG_W'($urandom);
        shadow[a][s] = wdata;
      end
    // random mix of reads and writes
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = 1; addr = 4'($urandom_range(DEPTH - 1));
      we = ($urandom_range(2) == 0);
      wseg = 2'($urandom); wdata = SEG_W'($urandom);
      if (we) shadow[addr][wseg] = wdata;
      else begin
        logic [SEGS-1:0][SEG_W-1:0] expect_w;
        expect_w = shadow[addr];
        @(negedge clk);
        en = 1; we = 1; addr = 4'($urandom_range(DEPTH - 1)); wseg = 2'($urandom);
        wdata = SEG_W'($urandom);
        shadow[addr][wseg] = wdata;        // a write right after the read
        checks++;
        if (rdata !== expect_w) begin failures++; $display("read mismatch"); end
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== expect_w) begin failures++; $display("rdata not held"); end
      end
    end
    @(negedge clk); en = 0;
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
