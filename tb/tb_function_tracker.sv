// tb_function_tracker: self-checking test of one function tracker.
//
// A small tracker (W=4, 3 outer iterations of 5 cycles, cycle 3 marked as
// inside a multi-cycle operation) is driven through: an idle wait on its
// lock, counting, power-loss pulses at random points and one at the marked
// cycle (roll-back), hung-clock periods, resume pulses, a loss while idle
// and after completion. A reference model keeps the function's progress as
// a single linear cycle number and derives the expected count, iteration
// and status from it every cycle. The tracker must finish exactly
// T_ITER*COUNT_MAX executed cycles (plus one per roll-back) after it starts.
module tb_function_tracker;

  localparam int unsigned W    = 4;
  localparam int unsigned T    = 3;
  localparam int unsigned CMAX = 5;
  localparam logic [(2**W)-1:0] RB = 16'h0008;   // cycle 3 rolls back

  logic clk = 0, rst_n = 0;
  logic lock_head = 0, hold = 0, p_loss = 0, p_resume = 0;
  logic [W-1:0] f_status, count, iter;
  logic lock_tail, active;

  function_tracker #(.W(W), .T_ITER(T), .COUNT_MAX(CMAX), .ROLLBACK_MAP(RB)) dut (
    .clk, .rst_n, .lock_head, .hold, .p_loss, .p_resume,
    .f_status, .lock_tail, .active, .count, .iter);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  // reference model
  bit m_active = 0, m_done = 0;
  int prog = 0;             // executed cycles of the function, 0-based
  int exp_status = 0;
  int run_cycles = 0;       // cycles in which the function advanced
  int rollbacks = 0, losses = 0, resumes = 0;

  function automatic int m_count();
    return m_active ? (prog % CMAX) + 1 : 0;
  endfunction
  function automatic int m_iter();
    return m_active ? (prog / CMAX) + 1 : 0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (p_loss) begin
      losses++;
      if (m_active && RB[m_count()] && m_count() > 1) begin
        prog--;
        rollbacks++;
      end
      exp_status = m_count();
    end else if (p_resume) begin
      resumes++;
      exp_status = m_count();
    end else if (!hold) begin
      if (m_active) begin
        run_cycles++;
        if (prog == T * CMAX - 1) begin
          m_active = 0;
          m_done = 1;
          exp_status = 0;
        end else begin
          prog++;
        end
      end else if (lock_head && !m_done) begin
        m_active = 1;
        prog = 0;
      end
    end
  end

  // compare after every edge
  always @(negedge clk) if (rst_n) begin
    check(active == m_active, "active");
    check(int'(count) == m_count(), $sformatf("count %0d exp %0d", count, m_count()));
    check(int'(iter) == m_iter(), $sformatf("iter %0d exp %0d", iter, m_iter()));
    check(int'(f_status) == exp_status, $sformatf("f_status %0d exp %0d", f_status, exp_status));
    check(lock_tail == m_done, "lock_tail");
  end

  task automatic outage(input int off_cycles);
    @(negedge clk) p_loss = 1; hold = 1;
    @(negedge clk) p_loss = 0;
    repeat (off_cycles) @(negedge clk);
    p_resume = 1;
    @(negedge clk) p_resume = 0;
    repeat (2) @(negedge clk);
    hold = 0;
  endtask

  bit did_rb = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    outage(2);                       // loss while idle: status stays 0
    repeat (3) @(negedge clk);
    lock_head = 1;                   // predecessor finished
    while (!m_done) begin
      @(negedge clk);
      if (!did_rb && m_active && m_count() == 2 && m_iter() == 2) begin
        did_rb = 1;
        outage(3);
      end else if (($urandom % 9) == 0) begin
        outage($urandom % 5);
      end else if (($urandom % 11) == 0) begin
        hold = 1;
        repeat (1 + $urandom % 3) @(negedge clk);
        hold = 0;
      end
    end
    repeat (3) @(negedge clk);
    outage(1);                       // loss after completion: status 0
    repeat (3) @(negedge clk);
    check(did_rb && rollbacks >= 1, "roll-back exercised");
    check(run_cycles == T * CMAX + rollbacks,
          $sformatf("function length %0d exp %0d", run_cycles, T * CMAX + rollbacks));
    check(lock_tail && f_status == 0 && count == 0, "final state");
    $display("losses=%0d resumes=%0d rollbacks=%0d", losses, resumes, rollbacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
