// topsort_ctrl -- pass sequencer of the two-phase sorter.
//
// The N input elements sit in 16 equal parts of N_t = N/16 = 2^log2_nt
// elements, part t in channel 2t. Phase 1 sorts every part into four sorted
// sub sequences of N/64 elements with all 16 trees working in parallel.
// Each pass merges up to 16 runs into one, so the run length R grows by 16
// per pass (R = 1, 16, 256, ...). The final pass is tuned so that it stops
// at R = N/64: it merges only m = (N/64)/R runs per round, leaving the other
// leaves unused, and runs four rounds per tree. Pass p reads channel
// 2t + (p mod 2) and writes the other channel of the pair.
//
// Phase 2 is one pass: the four reused trees and the extra merge units read
// all 64 sub sequences at once and write the fully sorted result as 4 KB
// batches over the four write ports.
//
// Per pass the controller presents 'cfg', pulses 'tree_start' for one cycle,
// and waits for the trees' 'tree_done' (all 16 in phase 1, the reused four
// in phase 2; it ignores done for the first cycles after a start while the
// trees clear it). 'done' pulses at the end of the sort. log2_nt must be
// between 7 and 25.
module topsort_ctrl #(
  parameter int NT = topsort_pkg::NUM_TREES
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                   start,
  input  logic [4:0]             log2_nt,
  output topsort_pkg::tree_cfg_t cfg,
  output logic                   tree_start,
  input  logic [NT-1:0]          tree_done,
  output logic                   busy,
  output logic                   done,
  output logic                   phase2,
  output logic [3:0]             pass_idx
);
  import topsort_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_WAIT} state_e;
  state_e     st;
  logic [4:0] r_log2;     // current input run length (log2)
  logic [4:0] t_log2;     // target run length N/64 (log2)
  logic [1:0] guard;

  logic [4:0] step;
  logic [NT-1:0] need;

  always_comb begin
    step = ((t_log2 - r_log2) > 5'd4) ? 5'd4 : (t_log2 - r_log2);
    need = '1;
    if (phase2) begin
      need = '0;
      for (int t = 0; t < NT; t += 4) need[t] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      cfg        <= '0;
      tree_start <= 1'b0;
      busy       <= 1'b0;
      done       <= 1'b0;
      phase2     <= 1'b0;
      pass_idx   <= '0;
      r_log2     <= '0;
      t_log2     <= '0;
      guard      <= '0;
    end else begin
      tree_start <= 1'b0;
      done       <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          busy     <= 1'b1;
          phase2   <= 1'b0;
          pass_idx <= '0;
          r_log2   <= '0;
          t_log2   <= log2_nt - 5'd2;
          cfg.log2_nt <= log2_nt;
          st       <= S_LAUNCH;
        end
        S_LAUNCH: begin
          cfg.phase2    <= phase2;
          cfg.par       <= pass_idx[0];
          cfg.run_log2  <= r_log2;
          cfg.runs_log2 <= cfg.log2_nt - r_log2 - step;
          cfg.m         <= phase2 ? 5'd16 : 5'(1 << step);
          tree_start    <= 1'b1;
          guard         <= '1;
          st            <= S_WAIT;
        end
        S_WAIT: begin
          if (guard != 0) guard <= guard - 1'b1;
          else if ((tree_done & need) == need) begin
            if (phase2) begin
              busy <= 1'b0;
              done <= 1'b1;
              st   <= S_IDLE;
            end else begin
              pass_idx <= pass_idx + 1'b1;
              r_log2   <= r_log2 + step;
              if (r_log2 + step == t_log2) phase2 <= 1'b1;
              st <= S_LAUNCH;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && start && st == S_IDLE)
      assert (log2_nt >= 5'd7 && log2_nt <= 5'd25) else $error("topsort_ctrl: log2_nt out of range");
  end
endmodule
