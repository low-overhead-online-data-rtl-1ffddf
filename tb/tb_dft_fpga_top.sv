// tb_dft_fpga_top: end-to-end test of the tracking layer at its default size.
//
// The top runs with every parameter at its default: three 8-bit trackers of
// 255 x 255 cycles each, F2 locked behind F1, F3 in parallel with F1, a
// roll-back point in cycle 4 of F1, a 16-entry tracker-SLICE region and a
// 1024-entry address table. The bench preloads the table from a formula,
// then runs the whole program through a series of power outages: loss
// pulse, store walk, power-off wait, resume pulse, retrieve walk.
//
// A reference model keeps each function's progress as a linear cycle
// number and advances it in every cycle the clock is not hung, so the
// trackers' count, iteration, status and done flags are checked every
// cycle. Every outage's commands are compared with the list the bench
// derives from its copy of the table, and both walks are timed (2 cycles
// per entry plus back-pressure). Mechanisms that must each occur at least
// once: power loss, roll-back, skipped zero entry (idle or finished
// tracker), command back-pressure, lock hand-over F1 -> F2, outer-loop
// wrap, and completion of all three functions.
module tb_dft_fpga_top;
  import dft_pkg::*;

  localparam int unsigned N = 3, W = 8, CMAX = 255, T = 255, TS = 16, DEPTH = 1024, AW = 10;
  localparam int unsigned OFFSET [N] = '{16, 272, 528};
  localparam int PRED [N] = '{-1, 0, -1};
  localparam int unsigned N_ENT = TS + N;
  localparam int unsigned RB_CYCLE = 4;          // roll-back point of F1

  logic clk = 0, rst_n = 0;
  logic p_loss = 0, p_resume = 0, hold, saved;
  logic tbl_we = 0;
  logic [AW-1:0] tbl_waddr = '0;
  data_cu_t tbl_wdata = '0;
  logic cmd_valid, cmd_ready = 1;
  slice_op_e cmd_op;
  data_cu_t cmd_slice;
  logic trk_done [N];
  logic [W-1:0] trk_count [N], trk_iter [N], trk_status [N];

  dft_fpga_top dut (
    .clk, .rst_n, .p_loss, .p_resume, .hold, .saved,
    .tbl_we, .tbl_waddr, .tbl_wdata,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_slice,
    .trk_done, .trk_count, .trk_iter, .trk_status);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  // bench copy of the table
  data_cu_t shadow [DEPTH];
  function automatic data_cu_t entry(input int j);
    data_cu_t e;
    e.slice_x = 32'(1 + (j * 37) % 113);
    e.slice_y = 32'((j * 13) % 150);
    for (int i = 0; i < N; i++) if (j == OFFSET[i]) e = '0;
    if (j >= 11 && j < TS) e = '0;                 // unused tracker-SLICE slots
    return e;
  endfunction

  // reference model
  bit m_active [N], m_done [N];
  int prog [N], m_status [N], run_cyc [N];
  int cycle = 0;
  int n_loss = 0, n_rb = 0, n_skip = 0, n_stall = 0, n_handover = 0, n_wrap = 0;

  function automatic int m_count(int i);
    return m_active[i] ? prog[i] % CMAX + 1 : 0;
  endfunction
  function automatic int m_iter(int i);
    return m_active[i] ? prog[i] / CMAX + 1 : 0;
  endfunction

  // inputs applied in the cycle that is ending, sampled after driving
  bit s_loss = 0, s_resume = 0, s_hold = 0;
  bit drv_loss = 0, drv_resume = 0, bp = 0;
  data_cu_t got [$];
  slice_op_e got_op [$];

  task automatic model_update();
    bit done_before [N];
    done_before = m_done;
    for (int i = 0; i < N; i++) begin
      bit lh;
      lh = (PRED[i] < 0) ? 1'b1 : done_before[PRED[i]];
      if (s_loss) begin
        if (m_active[i] && i == 0 && m_count(i) == RB_CYCLE) begin
          prog[i]--;
          n_rb++;
        end
        m_status[i] = m_count(i);
      end else if (s_resume) begin
        m_status[i] = m_count(i);
      end else if (!s_hold) begin
        if (m_active[i]) begin
          run_cyc[i]++;
          if (prog[i] == T * CMAX - 1) begin
            m_active[i] = 0; m_done[i] = 1; m_status[i] = 0;
          end else begin
            if (m_count(i) == CMAX) n_wrap++;
            prog[i]++;
          end
        end else if (lh && !m_done[i]) begin
          m_active[i] = 1; prog[i] = 0;
          if (PRED[i] >= 0) n_handover++;
        end
      end
    end
  endtask

  task automatic step();
    @(negedge clk);
    cycle++;
    model_update();
    for (int i = 0; i < N; i++) begin
      check(trk_done[i] == m_done[i], $sformatf("done[%0d]", i));
      check(int'(trk_count[i]) == m_count(i), $sformatf("count[%0d] %0d exp %0d", i, trk_count[i], m_count(i)));
      check(int'(trk_iter[i]) == m_iter(i), $sformatf("iter[%0d]", i));
      check(int'(trk_status[i]) == m_status[i], $sformatf("status[%0d] %0d exp %0d", i, trk_status[i], m_status[i]));
    end
    p_loss = drv_loss;
    p_resume = drv_resume;
    cmd_ready = bp ? ($urandom % 4 == 0) : 1'b1;
    #1;
    s_loss = p_loss; s_resume = p_resume; s_hold = hold;
    if (cmd_valid && cmd_ready) begin got.push_back(cmd_slice); got_op.push_back(cmd_op); end
    if (cmd_valid && !cmd_ready) n_stall++;
  endtask

  task automatic check_walk(input slice_op_e op);
    data_cu_t exp_q [$];
    for (int j = 0; j < TS; j++) if (shadow[j] != '0) exp_q.push_back(shadow[j]); else n_skip++;
    for (int i = 0; i < N; i++)
      if (shadow[OFFSET[i] + m_status[i]] != '0) exp_q.push_back(shadow[OFFSET[i] + m_status[i]]);
      else n_skip++;
    check(got.size() == exp_q.size(), $sformatf("%s: %0d commands exp %0d", op.name(), got.size(), exp_q.size()));
    for (int k = 0; k < exp_q.size() && k < got.size(); k++)
      check(got[k] == exp_q[k] && got_op[k] == op, $sformatf("%s command %0d", op.name(), k));
    got = {}; got_op = {};
  endtask

  task automatic outage(input int off_cycles);
    int cyc, st0;
    n_loss++;
    bp = ($urandom % 2 == 1);
    got = {}; got_op = {};
    drv_loss = 1; step(); drv_loss = 0;
    check(s_hold, "hold rises with p_loss");
    st0 = n_stall; cyc = 0;
    while (1) begin
      step(); cyc++;
      if (saved || cyc > 1000) break;
      check(hold, "hold during store walk");
    end
    check(cyc == 1 + 2 * N_ENT + (n_stall - st0), $sformatf("store walk %0d cycles", cyc));
    check_walk(OP_STORE);
    repeat (off_cycles) begin
      step();
      check(hold && saved && !cmd_valid, "power off");
    end
    drv_resume = 1; step(); drv_resume = 0;
    st0 = n_stall; cyc = 0;
    while (1) begin
      step(); cyc++;
      if (!s_hold || cyc > 1000) break;
    end
    check(cyc == 1 + 2 * N_ENT + (n_stall - st0), $sformatf("retrieve walk %0d cycles", cyc));
    check_walk(OP_RETRIEVE);
    bp = 0;
  endtask

  initial begin
    bit all_done, did_rb, did_early;
    int next_loss;
    for (int i = 0; i < N; i++) begin m_active[i] = 0; m_done[i] = 0; prog[i] = 0; m_status[i] = 0; run_cyc[i] = 0; end
    for (int j = 0; j < DEPTH; j++) shadow[j] = entry(j);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // preload; the trackers are already counting, so the program is held in
    // reset-like idle by keeping this phase before the first step()
    rst_n = 0;
    for (int j = 0; j < DEPTH; j++) begin
      tbl_we = 1; tbl_waddr = AW'(j); tbl_wdata = shadow[j];
      @(negedge clk);
    end
    tbl_we = 0;
    rst_n = 1;
    #1;
    did_rb = 0; did_early = 0;
    next_loss = 20000 + $urandom % 20000;
    while (1) begin
      all_done = 1;
      for (int i = 0; i < N; i++) all_done &= m_done[i];
      if (all_done) break;
      if (!did_early && cycle == 100) begin
        did_early = 1; outage(5);                    // F2 still locked: status 0
      end else if (!did_rb && m_active[0] && m_count(0) == RB_CYCLE - 1 && m_iter(0) == 7) begin
        did_rb = 1; outage(10);                      // loss inside multi-cycle op
      end else if (cycle >= next_loss) begin
        outage(1 + $urandom % 50);
        next_loss = cycle + 15000 + $urandom % 20000;
      end else begin
        step();
      end
      if (cycle > 400000) break;
    end
    outage(3);                                       // after completion
    repeat (5) step();
    for (int i = 0; i < N; i++)
      check(run_cyc[i] == T * CMAX + ((i == 0) ? n_rb : 0),
            $sformatf("function %0d ran %0d cycles", i, run_cyc[i]));
    check(n_loss >= 3, "power losses");
    check(n_rb >= 1, "roll-back");
    check(n_skip >= 1, "zero entry skipped");
    check(n_stall >= 1, "back-pressure");
    check(n_handover >= 1, "lock hand-over");
    check(n_wrap >= 1, "outer-loop wrap");
    check(m_done[0] && m_done[1] && m_done[2], "all functions finished");
    $display("cycles=%0d losses=%0d rollbacks=%0d skipped=%0d stalls=%0d handovers=%0d wraps=%0d",
             cycle, n_loss, n_rb, n_skip, n_stall, n_handover, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
