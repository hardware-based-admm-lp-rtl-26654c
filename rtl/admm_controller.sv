// admm_controller: iteration sequencer of the partially-parallel decoder.
//
// After start it runs ADMM iterations, each made of two phases:
//   VN phase: issues read addresses 0..P-1 (one per clock) to the LLR and
//             CN-to-VN memories; all variable nodes work in lock step.
//   CN phase: issues addresses 0..P-1 to the VN-to-CN and check-state
//             memories; all check nodes work in lock step.
// Each phase is followed by a drain of VN_LAT+2 / CN_LAT+2 cycles (one cycle
// of memory read latency, the node pipeline, one cycle of write) so that the
// next phase reads only completed results. first_iter is high during the
// first iteration, when the memories supply the initial CN-to-VN messages
// (1/2) and check states (0).
// The decoder stops after max_iter iterations (0 is treated as 1) or, with
// early_term_en, after the first iteration whose CN phase reports no
// unsatisfied check (unsat_i ORed over all check nodes, sampled with
// unsat_valid_i). done stays high until the next start; iters_o holds the
// number of iterations run.
//
// Following the paper: the iteration order (all variables, then all checks)
// and stopping at an iteration cap or on early termination. This design's
// choice: the phase/drain schedule, the early-termination rule and the
// handling of a zero cap.
//
// Cycles per iteration: 2*P + VN_LAT + CN_LAT + 5 (two phases of P issue
// cycles, two drains of LAT+2 cycles and one decision cycle).
module admm_controller
  import admm_pkg::*;
#(
  parameter int  P      = 31,
  parameter int  VN_LAT = 10,
  parameter int  CN_LAT = 46,
  localparam int AW     = (P > 1) ? $clog2(P) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ITER_W-1:0] max_iter,
  input  logic              early_term_en,
  input  logic              unsat_valid_i,
  input  logic              unsat_i,
  output logic              busy,
  output logic              done,
  output logic [ITER_W-1:0] iters_o,
  output logic              first_iter,
  output logic              vn_rd_en,
  output logic              cn_rd_en,
  output logic [AW-1:0]     rd_addr,
  output logic              early_stop_o
);
  typedef enum logic [2:0] {
    S_IDLE, S_VN, S_VN_DRAIN, S_CN, S_CN_DRAIN, S_DECIDE, S_DONE
  } state_t;

  localparam int DW = $clog2(((VN_LAT > CN_LAT) ? VN_LAT : CN_LAT) + 3);

  state_t            state;
  logic [AW-1:0]     addr;
  logic [DW-1:0]     drain;
  logic [ITER_W-1:0] iter, cap;
  logic              unsat_acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      addr         <= '0;
      drain        <= '0;
      iter         <= '0;
      cap          <= '0;
      unsat_acc    <= 1'b0;
      early_stop_o <= 1'b0;
    end else begin
      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state        <= S_VN;
            addr         <= '0;
            iter         <= '0;
            cap          <= (max_iter == '0) ? ITER_W'(1) : max_iter;
            early_stop_o <= 1'b0;
          end
        end
        S_VN: begin
          if (addr == AW'(P - 1)) begin
            addr  <= '0;
            drain <= DW'(VN_LAT + 1);
            state <= S_VN_DRAIN;
          end else begin
            addr <= addr + 1'b1;
          end
        end
        S_VN_DRAIN: begin
          if (drain == '0) begin
            state     <= S_CN;
            unsat_acc <= 1'b0;
          end else begin
            drain <= drain - 1'b1;
          end
        end
        S_CN: begin
          if (addr == AW'(P - 1)) begin
            addr  <= '0;
            drain <= DW'(CN_LAT + 1);
            state <= S_CN_DRAIN;
          end else begin
            addr <= addr + 1'b1;
          end
        end
        S_CN_DRAIN: begin
          if (drain == '0) state <= S_DECIDE;
          else             drain <= drain - 1'b1;
        end
        S_DECIDE: begin
          iter <= iter + 1'b1;
          if (early_term_en && !unsat_acc) begin
            state        <= S_DONE;
            early_stop_o <= 1'b1;
          end else if (iter + 1'b1 >= cap) begin
            state <= S_DONE;
          end else begin
            state <= S_VN;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (unsat_valid_i && unsat_i) unsat_acc <= 1'b1;
    end
  end

  assign busy       = (state != S_IDLE) && (state != S_DONE);
  assign done       = (state == S_DONE);
  assign iters_o    = iter;
  assign first_iter = (iter == '0);
  assign vn_rd_en   = (state == S_VN);
  assign cn_rd_en   = (state == S_CN);
  assign rd_addr    = addr;

  // a read is only issued while a phase is active and within range
  assert property (@(posedge clk) disable iff (!rst_n) (vn_rd_en || cn_rd_en) |-> rd_addr < AW'(P));
endmodule
