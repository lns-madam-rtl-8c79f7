// lns_addr_gen -- address generator of a PE buffer or of the accumulation collector.
//
// After start it walks the addresses base, base+1, ..., base+count-1 and stays on each address
// for hold steps; a step happens in every cycle in which step is high. For the current step it
// shows addr, first (first step on this address: the moment to read it) and last (final step
// of the walk). With loop set the walk restarts at base instead of ending. active is high from
// start until the last step has been taken.
//
// Timing: outputs are combinational from the internal counters; a step taken in cycle c moves
// them at the next clock edge. start has priority over step.
//
// The paper names an address generator in each buffer and in the collector but does not
// describe it; the base/count/hold walk is this design's choice, chosen to produce the paper's
// access pattern (BufferA read once every 16 cycles, BufferB once per cycle).
module lns_addr_gen #(
  parameter int unsigned AW = 8,
  parameter int unsigned CW = 16,
  parameter int unsigned HW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          loop,
  input  logic [AW-1:0] cfg_base,
  input  logic [CW-1:0] cfg_count,
  input  logic [HW-1:0] cfg_hold,
  input  logic          step,
  output logic [AW-1:0] addr,
  output logic          first,
  output logic          last,
  output logic          active
);
  logic [AW-1:0] base_q;
  logic [CW-1:0] count_q, idx;
  logic [HW-1:0] hold_q, hcnt;
  logic          loop_q;
  logic          hold_end;

  assign addr     = base_q + AW'(idx);
  assign first    = active && (hcnt == '0);
  assign hold_end = (hcnt == hold_q - HW'(1));
  assign last     = active && hold_end && (idx == count_q - CW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q  <= '0;
      count_q <= '0;
      hold_q  <= '0;
      loop_q  <= 1'b0;
      idx     <= '0;
      hcnt    <= '0;
      active  <= 1'b0;
    end else if (start) begin
      base_q  <= cfg_base;
      count_q <= cfg_count;
      hold_q  <= cfg_hold;
      loop_q  <= loop;
      idx     <= '0;
      hcnt    <= '0;
      active  <= (cfg_count != '0) && (cfg_hold != '0);
    end else if (active && step) begin
      if (!hold_end) begin
        hcnt <= hcnt + HW'(1);
      end else begin
        hcnt <= '0;
        if (idx == count_q - CW'(1)) begin
          idx    <= '0;
          active <= loop_q;
        end else begin
          idx <= idx + CW'(1);
        end
      end
    end
  end

endmodule
