// dft_fpga_top: data-flow tracking layer for an intermittently powered
// non-volatile FPGA design.
//
// The top holds what the tracking scheme adds next to an HLS-generated
// program: one function tracker per function, the lock chain that orders
// the trackers like the program's state machine, the SLICE address table
// and the NV-FF control unit. The program itself (its functions and state
// machine), the non-volatile flip-flops and their store/retrieve control
// path, and the energy-harvesting front end that raises the power events
// are outside; their signals are ports:
//
//   * p_loss / p_resume: one-cycle power events from the harvester.
//   * hold: clock-hang request for the program while data is saved, power
//     is off and data is restored (the trackers use it internally too).
//   * saved: the store walk is complete; power may now be removed.
//   * cmd_*: SLICE store/retrieve commands to the fabric's NV-FF control
//     path, valid/ready.
//   * tbl_*: write port used once after configuration to preload the SLICE
//     addresses found by placement.
//   * trk_*: each tracker's lock_tail (function finished), count, iteration
//     and status, for observation.
//
// Tracker i starts when the tracker named by PRED[i] has finished, or at
// once if PRED[i] is negative. The default is the three-function example
// of the design: F1 and F3 start together, F2 follows F1. Every tracker is
// W = 8 bits wide, the size the design evaluates, and by default tracks
// the longest function an 8-bit tracker can (255 x 255 = 65025 cycles).
// The tracker-SLICE region (TRK_SLICES entries at the bottom of the table),
// the per-function lengths, and the example roll-back point in cycle 4 of
// F1 are this design's defaults, not figures from the design's evaluation.
// Table layout: [0, TRK_SLICES) tracker SLICEs; tracker i owns
// [OFFSET[i], OFFSET[i] + COUNT_MAX[i]] with OFFSET[0] = TRK_SLICES and
// OFFSET[i+1] = OFFSET[i] + COUNT_MAX[i] + 1; entry OFFSET[i] stays zero.
module dft_fpga_top #(
  parameter int unsigned N_TRK      = 3,
  parameter int unsigned W          = 8,
  parameter int          PRED      [N_TRK] = '{-1, 0, -1},
  parameter int unsigned T_ITER    [N_TRK] = '{255, 255, 255},
  parameter int unsigned COUNT_MAX [N_TRK] = '{255, 255, 255},
  parameter logic [(2**W)-1:0] ROLLBACK_MAP [N_TRK] = '{(2**W)'(1) << 4, '0, '0},
  parameter int unsigned TRK_SLICES = 16,
  parameter int unsigned CU_DEPTH   = 1024,
  parameter int unsigned AW         = $clog2(CU_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // power events
  input  logic               p_loss,
  input  logic               p_resume,
  output logic               hold,
  output logic               saved,
  // address table preload
  input  logic               tbl_we,
  input  logic [AW-1:0]      tbl_waddr,
  input  dft_pkg::data_cu_t  tbl_wdata,
  // SLICE commands to the NV-FF control path
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output dft_pkg::slice_op_e cmd_op,
  output dft_pkg::data_cu_t  cmd_slice,
  // tracker observation
  output logic               trk_done   [N_TRK],
  output logic [W-1:0]       trk_count  [N_TRK],
  output logic [W-1:0]       trk_iter   [N_TRK],
  output logic [W-1:0]       trk_status [N_TRK]
);

  typedef int unsigned offset_t [N_TRK];

  function automatic offset_t calc_offsets();
    offset_t o;
    int unsigned acc;
    acc = TRK_SLICES;
    for (int unsigned i = 0; i < N_TRK; i++) begin
      o[i] = acc;
      acc += COUNT_MAX[i] + 1;
    end
    return o;
  endfunction

  localparam offset_t OFFSET = calc_offsets();
  localparam int unsigned TBL_NEEDED = OFFSET[N_TRK-1] + COUNT_MAX[N_TRK-1] + 1;

  if (TBL_NEEDED > CU_DEPTH) begin : g_bad_depth
    $error("dft_fpga_top: CU_DEPTH too small for the trackers' regions");
  end
  for (genvar i = 0; i < N_TRK; i++) begin : g_chk_pred
    if (PRED[i] >= i) begin : g_bad_pred
      $error("dft_fpga_top: PRED[i] must name an earlier tracker or be negative");
    end
  end

  logic              lock_head [N_TRK];
  logic              tbl_re;
  logic [AW-1:0]     tbl_raddr;
  dft_pkg::data_cu_t tbl_rdata;

  for (genvar i = 0; i < N_TRK; i++) begin : g_trk
    if (PRED[i] < 0) begin : g_first
      assign lock_head[i] = 1'b1;
    end else begin : g_chain
      assign lock_head[i] = trk_done[PRED[i]];
    end

    logic active_unused;
    function_tracker #(
      .W(W), .T_ITER(T_ITER[i]), .COUNT_MAX(COUNT_MAX[i]), .ROLLBACK_MAP(ROLLBACK_MAP[i])
    ) u_trk (
      .clk, .rst_n,
      .lock_head(lock_head[i]),
      .hold,
      .p_loss, .p_resume,
      .f_status (trk_status[i]),
      .lock_tail(trk_done[i]),
      .active   (active_unused),
      .count    (trk_count[i]),
      .iter     (trk_iter[i]));
  end

  cu_bram #(.DEPTH(CU_DEPTH), .AW(AW)) u_cu_bram (
    .clk,
    .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .re(tbl_re), .raddr(tbl_raddr), .rdata(tbl_rdata));

  nvff_control_unit #(
    .N_TRK(N_TRK), .W(W), .AW(AW), .TRK_SLICES(TRK_SLICES), .OFFSET(OFFSET)
  ) u_cu (
    .clk, .rst_n,
    .p_loss, .p_resume,
    .f_status(trk_status),
    .tbl_re, .tbl_raddr, .tbl_rdata,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_slice,
    .hold, .saved);

endmodule
