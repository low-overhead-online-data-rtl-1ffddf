// tb_nvff_control_unit: self-checking test of the NV-FF control unit.
//
// The control unit is connected to a small address table (2 tracker SLICEs,
// three 4-bit trackers with COUNT_MAX = 5). The bench preloads the table,
// then runs outages with random tracker status values: a power-loss pulse,
// a store walk, a power-off wait, a resume pulse and a retrieve walk. The
// commands accepted on the valid/ready port, under random back-pressure,
// are compared with a list computed from the bench's own copy of the table:
// every non-zero tracker-SLICE entry, then entry OFFSET[i]+f_status[i] of
// each tracker if it is non-zero. Also checked: hold covers the whole
// sequence, saved is raised only between the walks, a second loss pulse
// during a walk is ignored, and each walk takes 2 cycles per entry plus
// the back-pressure cycles.
module tb_nvff_control_unit;
  import dft_pkg::*;

  localparam int unsigned N_TRK = 3, W = 4, TS = 2, CMAX = 5;
  localparam int unsigned OFFSET [N_TRK] = '{2, 8, 14};
  localparam int unsigned DEPTH = 20, AW = 5;
  localparam int unsigned N_ENT = TS + N_TRK;

  logic clk = 0, rst_n = 0;
  logic p_loss = 0, p_resume = 0;
  logic [W-1:0] f_status [N_TRK];
  logic tbl_re, tbl_we = 0;
  logic [AW-1:0] tbl_raddr, tbl_waddr = '0;
  data_cu_t tbl_rdata, tbl_wdata = '0;
  logic cmd_valid, cmd_ready = 0;
  slice_op_e cmd_op;
  data_cu_t cmd_slice;
  logic hold, saved;

  cu_bram #(.DEPTH(DEPTH), .AW(AW)) u_tbl (
    .clk, .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .re(tbl_re), .raddr(tbl_raddr), .rdata(tbl_rdata));

  nvff_control_unit #(.N_TRK(N_TRK), .W(W), .AW(AW), .TRK_SLICES(TS), .OFFSET(OFFSET)) dut (
    .clk, .rst_n, .p_loss, .p_resume, .f_status,
    .tbl_re, .tbl_raddr, .tbl_rdata,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_slice, .hold, .saved);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, what); end
  endtask

  data_cu_t shadow [DEPTH];
  data_cu_t got [$];
  slice_op_e got_op [$];
  int stall_cycles = 0, skipped_total = 0, stalls_total = 0;
  bit bp = 0;

  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready) begin
      got.push_back(cmd_slice);
      got_op.push_back(cmd_op);
    end
    if (cmd_valid && !cmd_ready) stall_cycles++;
  end
  always @(negedge clk) cmd_ready = bp ? ($urandom % 3 == 0) : 1'b1;

  function automatic void expected(ref data_cu_t q [$], output int zeros);
    q = {};
    zeros = 0;
    for (int j = 0; j < TS; j++)
      if (shadow[j] != '0) q.push_back(shadow[j]); else zeros++;
    for (int i = 0; i < N_TRK; i++)
      if (shadow[OFFSET[i] + f_status[i]] != '0) q.push_back(shadow[OFFSET[i] + f_status[i]]);
      else zeros++;
  endfunction

  task automatic walk_check(input slice_op_e op, input int cycles, input int stalls);
    data_cu_t exp_q [$];
    int zeros;
    expected(exp_q, zeros);
    skipped_total += zeros;
    check(got.size() == exp_q.size(), $sformatf("%s: %0d commands, exp %0d", op.name(), got.size(), exp_q.size()));
    for (int k = 0; k < exp_q.size() && k < got.size(); k++) begin
      check(got[k] == exp_q[k], $sformatf("%s cmd %0d slice", op.name(), k));
      check(got_op[k] == op, $sformatf("%s cmd %0d op", op.name(), k));
    end
    check(cycles == 2 * N_ENT + stalls, $sformatf("%s walk %0d cycles exp %0d", op.name(), cycles, 2 * N_ENT + stalls));
    got = {}; got_op = {};
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < N_TRK; i++) f_status[i] = '0;
    // preload: entry j = {j+1, 200+j}; tracker offsets and entry 1 kept zero
    for (int j = 0; j < DEPTH; j++) begin
      shadow[j] = '{slice_x: j + 1, slice_y: 200 + j};
      if (j == 1) shadow[j] = '0;
      for (int i = 0; i < N_TRK; i++) if (j == OFFSET[i]) shadow[j] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < DEPTH; j++) begin
      tbl_we = 1; tbl_waddr = AW'(j); tbl_wdata = shadow[j];
      @(negedge clk);
    end
    tbl_we = 0;
    check(!hold && !saved && !cmd_valid, "idle after reset");

    for (int trial = 0; trial < 12; trial++) begin
      bp = trial[0];
      for (int i = 0; i < N_TRK; i++) f_status[i] = W'($urandom % (CMAX + 1));
      if (trial == 0) for (int i = 0; i < N_TRK; i++) f_status[i] = '0;
      // power loss
      stall_cycles = 0;
      p_loss = 1;
      #1 check(hold, "hold rises with p_loss");
      @(negedge clk) p_loss = 0;
      cyc = 1;
      while (!saved) begin
        check(hold && !saved, "hold during store walk");
        if (cyc == 3) p_loss = 1;            // ignored second pulse
        @(negedge clk);
        p_loss = 0;
        cyc++;
        if (cyc > 200) break;
      end
      stalls_total += stall_cycles;
      walk_check(OP_STORE, cyc - 1, stall_cycles);
      // power off
      repeat ($urandom % 6) begin
        @(negedge clk);
        check(hold && saved && !cmd_valid, "off: hold, saved, no command");
      end
      // resume
      stall_cycles = 0;
      p_resume = 1;
      @(negedge clk) p_resume = 0;
      cyc = 1;
      while (hold) begin
        check(!saved, "saved low during retrieve walk");
        @(negedge clk);
        cyc++;
        if (cyc > 200) break;
      end
      stalls_total += stall_cycles;
      walk_check(OP_RETRIEVE, cyc - 1, stall_cycles);
      repeat (3) begin
        @(negedge clk);
        check(!hold && !saved && !cmd_valid, "running after resume");
      end
    end
    check(skipped_total > 0, "zero entries skipped");
    check(stalls_total > 0, "back-pressure exercised");
    $display("skipped=%0d stall_cycles=%0d", skipped_total, stalls_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
