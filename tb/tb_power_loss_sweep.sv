// tb_power_loss_sweep: roll-back time and saved SLICEs versus outage count.
//
// Runs the default top (three 8-bit trackers, F2 after F1, 130050 program
// cycles in all) ten times, with 1 to 10 power outages at random points of
// the program. For each run it reports the roll-back cycles (program cycles
// executed beyond the fault-free length) and the number of SLICEs stored,
// and checks that
//   * roll-back never exceeds one cycle per outage (it is zero unless a loss
//     lands on the marked multi-cycle cycle of F1),
//   * every outage stores the 11 tracker SLICEs plus at most one SLICE per
//     tracker, and retrieves exactly what it stored,
//   * the stored total therefore grows linearly with the outage count.
module tb_power_loss_sweep;
  import dft_pkg::*;

  localparam int unsigned N = 3, TS = 16, DEPTH = 1024, AW = 10;
  localparam int unsigned OFFSET [N] = '{16, 272, 528};
  localparam int FLEN = 255 * 255;
  localparam int PROG_LEN = 2 * (FLEN + 1);    // incl. the start cycle of F1 and of F2
  localparam int TRK_SL = 11;                  // non-zero tracker-SLICE entries

  logic clk = 0, rst_n = 0;
  logic p_loss = 0, p_resume = 0, hold, saved;
  logic tbl_we = 0;
  logic [AW-1:0] tbl_waddr = '0;
  data_cu_t tbl_wdata = '0;
  logic cmd_valid, cmd_ready = 1;
  slice_op_e cmd_op;
  data_cu_t cmd_slice;
  logic trk_done [N];
  logic [7:0] trk_count [N], trk_iter [N], trk_status [N];

  dft_fpga_top dut (
    .clk, .rst_n, .p_loss, .p_resume, .hold, .saved,
    .tbl_we, .tbl_waddr, .tbl_wdata,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_slice,
    .trk_done, .trk_count, .trk_iter, .trk_status);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, what); end
  endtask

  function automatic data_cu_t entry(input int j);
    data_cu_t e;
    e.slice_x = 32'(1 + (j * 37) % 113);
    e.slice_y = 32'((j * 13) % 150);
    for (int i = 0; i < N; i++) if (j == OFFSET[i]) e = '0;
    if (j >= TRK_SL && j < TS) e = '0;
    return e;
  endfunction

  int n_store, n_retr;
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    if (cmd_op == OP_STORE) n_store++; else n_retr++;
  end

  initial begin
    int loss_at [$];
    int prog, rb, st_before, guard;
    int stores [11];
    for (int j = 0; j < DEPTH; j++) begin
      @(negedge clk);
      tbl_we = 1; tbl_waddr = AW'(j); tbl_wdata = entry(j);
    end
    @(negedge clk) tbl_we = 0;

    for (int k = 1; k <= 10; k++) begin
      rst_n = 0; n_store = 0; n_retr = 0;
      loss_at = {};
      for (int e = 0; e < k; e++) loss_at.push_back(1 + $urandom % (PROG_LEN - 2));
      loss_at.sort();
      repeat (2) @(negedge clk);
      rst_n = 1;
      prog = 0; guard = 0;
      while (!(trk_done[0] && trk_done[1] && trk_done[2]) && guard < 400000) begin
        if (loss_at.size() > 0 && prog >= loss_at[0]) begin
          void'(loss_at.pop_front());
          st_before = n_store;
          p_loss = 1;
          @(negedge clk) p_loss = 0;
          while (!saved) @(negedge clk);
          repeat (4) @(negedge clk);
          check(n_store - st_before >= TRK_SL && n_store - st_before <= TRK_SL + N,
                $sformatf("outage stores %0d SLICEs", n_store - st_before));
          p_resume = 1;
          @(negedge clk) p_resume = 0;
          while (hold) @(negedge clk);
        end else begin
          if (!hold) prog++;           // this cycle advances the program
          @(negedge clk);
        end
        guard++;
      end
      rb = prog - PROG_LEN;
      stores[k] = n_store;
      $display("outages=%0d  roll-back cycles=%0d  SLICEs stored=%0d  flip-flops stored (8 per SLICE)=%0d",
               k, rb, n_store, 8 * n_store);
      check(rb >= 0 && rb <= k, $sformatf("roll-back %0d cycles for %0d outages", rb, k));
      check(n_retr == n_store, "retrieved = stored");
      check(n_store >= k * TRK_SL && n_store <= k * (TRK_SL + N), "stores linear in outages");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
