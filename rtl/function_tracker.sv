// function_tracker: cycle-accurate progress tracker for one HLS function.
//
// A tracker runs alongside the function it shadows and counts the clock
// cycles of its outermost loop, so that at any moment (count, iter) names
// the cycle the function is in. It is built from the four parts the design
// names: a loop-iteration counter `iter` (the outer-loop arbitration t), a
// binary counter `count`, the status register `f_status` and a lock pair.
//
//   * Lock: the tracker starts in the cycle after it sees lock_head = 1 and
//     raises lock_tail when it finishes. Chaining lock_tail of one tracker
//     to lock_head of the next makes trackers start in the order of the
//     HLS state machine; a tracker that starts with the program has
//     lock_head tied to 1. A tracker runs once after reset.
//   * Counting: count runs 1 .. COUNT_MAX inside one outer-loop iteration
//     and wraps to 1 for the next one, T_ITER times; the function is then
//     T_ITER*COUNT_MAX cycles long (at most (2^W-1)^2, e.g. 65025 for W=8).
//     A function without a loop uses T_ITER = 1. The counter goes straight
//     from COUNT_MAX to 1, with no idle cycle between iterations: the
//     design's pseudo code resets count to 0 between iterations, which in
//     hardware is folded into the same cycle (this design's choice).
//   * Status: in a cycle with p_loss or p_resume the tracker copies count
//     to f_status, where the control unit reads it one cycle later. While
//     the tracker is idle or finished count is 0, so f_status is 0. When
//     tracking ends f_status is cleared.
//   * Roll-back: a cycle k whose bit ROLLBACK_MAP[k] is set lies inside a
//     multi-cycle operation. A power loss there moves count back by one
//     (count = count - 1) before it is copied to f_status, so that after
//     the restore the function repeats the cycle whose result was not yet
//     registered. Cycle 1 is never rolled back.
//   * hold = 1 means the clock of the tracked logic is hung (data being
//     saved, power off, or data being restored): count and iter stand still.
//
// Timing: all outputs are registered; p_loss/p_resume are one-cycle pulses.
// In the cycle of p_loss the counter does not advance.
module function_tracker #(
  parameter int unsigned        W            = 8,
  parameter int unsigned        T_ITER       = 255,
  parameter int unsigned        COUNT_MAX    = 255,
  parameter logic [(2**W)-1:0]  ROLLBACK_MAP = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         lock_head,
  input  logic         hold,
  input  logic         p_loss,
  input  logic         p_resume,
  output logic [W-1:0] f_status,
  output logic         lock_tail,
  output logic         active,
  output logic [W-1:0] count,
  output logic [W-1:0] iter
);

  if (COUNT_MAX < 1 || COUNT_MAX >= 2**W) begin : g_bad_count
    $error("function_tracker: COUNT_MAX must be in 1 .. 2^W-1");
  end
  if (T_ITER < 1 || T_ITER >= 2**W) begin : g_bad_iter
    $error("function_tracker: T_ITER must be in 1 .. 2^W-1");
  end

  localparam logic [W-1:0] CMAX = W'(COUNT_MAX);
  localparam logic [W-1:0] TMAX = W'(T_ITER);

  logic roll_back;
  assign roll_back = active && ROLLBACK_MAP[count] && (count > W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      iter      <= '0;
      f_status  <= '0;
      lock_tail <= 1'b0;
      active    <= 1'b0;
    end else if (p_loss) begin
      if (roll_back) begin
        count    <= count - W'(1);
        f_status <= count - W'(1);
      end else begin
        f_status <= count;
      end
    end else if (p_resume) begin
      f_status <= count;
    end else if (!hold) begin
      if (active) begin
        if (count == CMAX) begin
          if (iter == TMAX) begin
            active    <= 1'b0;
            count     <= '0;
            iter      <= '0;
            f_status  <= '0;
            lock_tail <= 1'b1;
          end else begin
            count <= W'(1);
            iter  <= iter + W'(1);
          end
        end else begin
          count <= count + W'(1);
        end
      end else if (lock_head && !lock_tail) begin
        active <= 1'b1;
        count  <= W'(1);
        iter   <= W'(1);
      end
    end
  end

  // Power events are single, exclusive pulses.
  assert property (@(posedge clk) disable iff (!rst_n) !(p_loss && p_resume))
    else $error("function_tracker: p_loss and p_resume together");
  assert property (@(posedge clk) disable iff (!rst_n) active |-> (count != '0))
    else $error("function_tracker: active with count 0");

endmodule
