// tb_tracker_sizes: longest function each tracker width can follow.
//
// Instantiates one tracker for every width from 4 to 9 bits, each with the
// largest loop count and loop length its width allows (2^W-1 each), starts
// them together and measures the cycles until each raises lock_tail. The
// measured lengths, less the one cycle of the loss pulse for trackers
// still running at that time, must equal the maximum tracking cycles 225, 961, 3969,
// 16129, 65025 and 261121 of the evaluated tracker sizes. One power-loss
// pulse at a fixed cycle also checks that every tracker reports the right
// in-iteration cycle in f_status. A last tracker with T_ITER = 1 follows a
// 200-cycle function without a loop.
module tb_tracker_sizes;

  localparam int NW = 6;
  localparam int MAXC [NW] = '{225, 961, 3969, 16129, 65025, 261121};
  localparam int LOSS_AT = 1000;   // executed cycles before the loss pulse

  logic clk = 0, rst_n = 0, p_loss = 0, go = 0;
  logic done [NW];
  logic [15:0] st [NW];

  for (genvar k = 0; k < NW; k++) begin : g_w
    localparam int unsigned W = 4 + k;
    logic [W-1:0] f_status, count, iter;
    logic active;
    function_tracker #(.W(W), .T_ITER(2**W - 1), .COUNT_MAX(2**W - 1)) u_trk (
      .clk, .rst_n, .lock_head(go), .hold(1'b0), .p_loss, .p_resume(1'b0),
      .f_status, .lock_tail(done[k]), .active, .count, .iter);
    assign st[k] = 16'(f_status);
  end

  // a function without a loop: t = 1, count_max = its length
  logic done_nl;
  logic [7:0] st_nl, cnt_nl, it_nl;
  logic act_nl;
  function_tracker #(.W(8), .T_ITER(1), .COUNT_MAX(200)) u_noloop (
    .clk, .rst_n, .lock_head(go), .hold(1'b0), .p_loss, .p_resume(1'b0),
    .f_status(st_nl), .lock_tail(done_nl), .active(act_nl), .count(cnt_nl), .iter(it_nl));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int len [NW];
  int cyc = 0;
  int len_nl = 0;
  bit seen [NW];

  initial begin
    for (int k = 0; k < NW; k++) begin len[k] = 0; seen[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) go = 1;
    // the trackers start at the next edge; count cycles from there
    while (1) begin
      @(negedge clk);
      cyc++;
      for (int k = 0; k < NW; k++) if (done[k] && !seen[k]) begin seen[k] = 1; len[k] = cyc - 1; end
      if (done_nl && len_nl == 0) len_nl = cyc - 1;
      if (cyc <= 200) check(it_nl == 1 && int'(cnt_nl) == cyc, "loop-free function: iteration stays 1");
      if (cyc == LOSS_AT) p_loss = 1;
      else if (cyc == LOSS_AT + 1) begin
        p_loss = 0;
        for (int k = 0; k < NW; k++) begin
          int m;
          m = (1 << (4 + k)) - 1;
          if (MAXC[k] < LOSS_AT) check(st[k] == 0, $sformatf("W=%0d status after finish", 4 + k));
          else check(int'(st[k]) == (LOSS_AT - 1) % m + 1,
                     $sformatf("W=%0d status %0d exp %0d", 4 + k, st[k], (LOSS_AT - 1) % m + 1));
        end
      end
      if (seen[NW-1]) break;
    end
    for (int k = 0; k < NW; k++) begin
      $display("tracker %0d bit: %0d cycles tracked", 4 + k, len[k]);
      // the loss cycle itself does not advance a running tracker
      check(len[k] == MAXC[k] + ((MAXC[k] >= LOSS_AT) ? 1 : 0),
            $sformatf("W=%0d length %0d exp %0d", 4 + k, len[k], MAXC[k]));
    end
    check(len_nl == 200, $sformatf("loop-free function length %0d exp 200", len_nl));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
