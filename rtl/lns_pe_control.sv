// lns_pe_control -- control unit of the PE: runs one output tile in the output-stationary,
// local-A-stationary order.
//
// On start (accepted when idle) it latches the tile configuration and starts both buffer
// address generators: BufferA walks k_chunks words from a_base, each held for ENTRIES cycles;
// BufferB walks k_chunks*ENTRIES words from b_base, one per cycle. Then, for chunk k = 0 ..
// k_chunks-1 and step t = 0 .. ENTRIES-1, it issues one compute cycle: both generators step
// (BufferA is read at t = 0 only, BufferB every cycle) and the issue flags go down the
// pipeline: issue_valid, issue_first (k = 0: the collector loads) and issue_last (last chunk:
// the collector's sums are complete and go to the PPU). After the last issue it waits DRAIN
// cycles for the pipeline to empty, pulses done and returns to idle. busy is high from the
// accepted start until done. coll_clear pulses with the accepted start.
//
// The dataflow (A read once every 16 cycles and reused from a register, B read every cycle and
// broadcast to all lanes, partial sums accumulated in a 16-entry collector) follows the paper;
// the paper names a control block but not its states or configuration, which are this design's.
module lns_pe_control
  import lns_pkg::*;
#(
  parameter int unsigned ENTRIES = lns_pkg::ENTRIES,
  parameter int unsigned A_AW    = 7,
  parameter int unsigned B_AW    = 8,
  parameter int unsigned DRAIN   = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  pe_cfg_t         cfg,
  output pe_cfg_t         cfg_q,
  output logic            busy,
  output logic            done,
  // buffer address generators
  output logic            ag_start,
  output logic [A_AW-1:0] a_base,
  output logic [15:0]     a_count,
  output logic [7:0]      a_hold,
  output logic [B_AW-1:0] b_base,
  output logic [15:0]     b_count,
  output logic [7:0]      b_hold,
  output logic            ag_step,
  // pipeline issue flags
  output logic            coll_clear,
  output logic            issue_valid,
  output logic            issue_first,
  output logic            issue_last
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  localparam int unsigned TW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  state_e     state;
  logic [7:0] k;
  logic [TW-1:0] t;
  logic [7:0] dcnt;
  logic       accept;

  assign accept      = start && (state == S_IDLE) && (cfg.k_chunks != '0);
  assign ag_start    = accept;
  assign coll_clear  = accept;
  assign a_base      = cfg.a_base[A_AW-1:0];
  assign a_count     = 16'(cfg.k_chunks);
  assign a_hold      = 8'(ENTRIES);
  assign b_base      = cfg.b_base[B_AW-1:0];
  assign b_count     = 16'(cfg.k_chunks) * 16'(ENTRIES);
  assign b_hold      = 8'd1;

  assign ag_step     = (state == S_RUN);
  assign issue_valid = (state == S_RUN);
  assign issue_first = (k == '0);
  assign issue_last  = (k == cfg_q.k_chunks - 8'd1);
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg_q <= '0;
      k     <= '0;
      t     <= '0;
      dcnt  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          cfg_q <= cfg;
          k     <= '0;
          t     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (t == TW'(ENTRIES - 1)) begin
            t <= '0;
            if (issue_last) begin
              state <= S_DRAIN;
              dcnt  <= 8'(DRAIN);
            end else begin
              k <= k + 8'd1;
            end
          end else begin
            t <= t + TW'(1);
          end
        end
        S_DRAIN: begin
          if (dcnt == 8'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          dcnt <= dcnt - 8'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
