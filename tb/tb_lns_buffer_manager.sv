// tb_lns_buffer_manager -- self-checking testbench of the buffer manager.
//
// Drives random compute reads and a random fill stream at the same time and checks, every
// cycle, the memory port against a model written here: a read always gets the port at its
// address; a fill beat is accepted only without a read, and is written at the fill pointer,
// which walks segment by segment from wr_base. Also counts that stalls happened.
module tb_lns_buffer_manager;
  localparam int DEPTH = 16, SEGS = 4, SEG_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             rd_req = 0;
  logic [3:0]       rd_addr = 0;
  logic             wr_start = 0;
  logic [3:0]       wr_base = 0;
  logic             wr_valid = 0;
  logic             wr_ready;
  logic [SEG_W-1:0] wr_data = 0;
  logic             wr_stall;
  logic             mem_en, mem_we;
  logic [3:0]       mem_addr;
  logic [1:0]       mem_seg;
  logic [SEG_W-1:0] mem_wdata;

  lns_buffer_manager #(.DEPTH(DEPTH), .SEGS(SEGS), .SEG_W(SEG_W)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, writes = 0;
  int m_addr = 0, m_seg = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    wr_start = 1; wr_base = 4'd5;
    m_addr = 5; m_seg = 0;
    #1 check(!wr_ready, "no fill during wr_start");
    @(negedge clk);
    wr_start = 0;
    for (int n = 0; n < 600; n++) begin
      rd_req   = ($urandom_range(2) == 0);
      rd_addr  = 4'($urandom);
      wr_valid = ($urandom_range(3) != 0);
      wr_data  = SEG_W'($urandom);
      #1;
      if (rd_req) begin
        check(mem_en && !mem_we && mem_addr == rd_addr, "read gets the port");
        check(!wr_ready && (wr_stall == wr_valid), "fill held off");
        if (wr_valid) stalls++;
      end else if (wr_valid) begin
        check(wr_ready && mem_en && mem_we, "fill accepted");
        check(mem_addr == 4'(m_addr) && mem_seg == 2'(m_seg) && mem_wdata == wr_data,
              "fill address");
        writes++;
        if (m_seg == SEGS - 1) begin m_seg = 0; m_addr = (m_addr + 1) % DEPTH; end
        else m_seg++;
      end else begin
        check(!mem_en, "idle port");
      end
      @(negedge clk);
    end
    rd_req = 0; wr_valid = 0;
    check(stalls > 0 && writes > 0, "stalls and writes happened");
    $display("stalls=%0d writes=%0d", stalls, writes);
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
