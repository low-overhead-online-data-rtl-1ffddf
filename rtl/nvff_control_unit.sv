// nvff_control_unit: turns tracker status into SLICE store/retrieve commands.
//
// The control unit owns the look-up "SLICE address = cu_BRAM[f_status_i +
// offset_i]" of the design. On a power-loss pulse it hangs the clock of the
// tracked logic (hold = 1), then walks the address table:
//
//   1. entries 0 .. TRK_SLICES-1, the SLICEs that hold the trackers
//      themselves, which are saved on every power loss;
//   2. for each tracker i, entry OFFSET[i] + f_status[i], the SLICE whose
//      registers hold that function's live intermediate data.
//
// Every non-zero entry becomes one command {op, slice_x, slice_y} on a
// valid/ready port towards the NV-FF control path of the fabric, which is
// outside this design. A zero entry (an idle or finished tracker, whose
// status is 0, reads the zero entry at its own offset) produces no command.
// When the walk ends the unit reports `saved` and waits, clock still hung,
// for the resume pulse; it then walks the same entries again with
// OP_RETRIEVE (tracker SLICEs first, so the trackers are back before their
// status is used) and finally releases hold.
//
// The walk order, the valid/ready handshake, the single outstanding read and
// ignoring power events that arrive while a walk is already under way are
// this design's choices; the look-up itself follows the design.
//
// cmd_slice is the table read data itself (registered inside the RAM).
// Timing: the table read is synchronous (1 cycle). Each entry takes two
// cycles plus any cycles cmd_ready is low, so a walk over E entries lasts at
// least 2*E cycles. hold rises combinationally with p_loss and falls in the
// cycle after the last retrieve command is accepted.
module nvff_control_unit #(
  parameter int unsigned N_TRK      = 3,
  parameter int unsigned W          = 8,
  parameter int unsigned AW         = 10,
  parameter int unsigned TRK_SLICES = 16,
  parameter int unsigned OFFSET [N_TRK] = '{16, 272, 528}
) (
  input  logic               clk,
  input  logic               rst_n,
  // power events from the energy-harvesting front end
  input  logic               p_loss,
  input  logic               p_resume,
  // tracker status
  input  logic [W-1:0]       f_status [N_TRK],
  // address table read port
  output logic               tbl_re,
  output logic [AW-1:0]      tbl_raddr,
  input  dft_pkg::data_cu_t  tbl_rdata,
  // command port towards the NV-FF control path
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output dft_pkg::slice_op_e cmd_op,
  output dft_pkg::data_cu_t  cmd_slice,
  // status
  output logic               hold,
  output logic               saved
);

  import dft_pkg::*;

  localparam int unsigned N_ENT = TRK_SLICES + N_TRK;
  localparam int unsigned IW    = (N_ENT > 1) ? $clog2(N_ENT) : 1;

  typedef enum logic [1:0] {S_RUN, S_READ, S_CMD, S_OFF} state_e;

  state_e    state;
  slice_op_e op;
  logic [IW-1:0] idx;
  logic      last;
  logic      entry_nz;

  // Address of the entry being visited.
  always_comb begin
    tbl_raddr = '0;
    if (32'(idx) < TRK_SLICES) begin
      tbl_raddr = AW'(idx);
    end else begin
      for (int unsigned i = 0; i < N_TRK; i++) begin
        if (32'(idx) == TRK_SLICES + i) tbl_raddr = AW'(OFFSET[i] + 32'(f_status[i]));
      end
    end
  end

  assign tbl_re    = (state == S_READ);
  assign entry_nz  = (tbl_rdata != '0);
  assign last      = (32'(idx) == N_ENT - 1);
  assign cmd_valid = (state == S_CMD) && entry_nz;
  assign cmd_op    = op;
  assign cmd_slice = tbl_rdata;
  assign hold      = (state != S_RUN) || p_loss;
  assign saved     = (state == S_OFF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN;
      op    <= OP_STORE;
      idx   <= '0;
    end else begin
      unique case (state)
        S_RUN: if (p_loss) begin
          op    <= OP_STORE;
          idx   <= '0;
          state <= S_READ;
        end
        S_READ: state <= S_CMD;
        S_CMD: if (!entry_nz || cmd_ready) begin
          if (last) begin
            state <= (op == OP_STORE) ? S_OFF : S_RUN;
          end else begin
            idx   <= idx + IW'(1);
            state <= S_READ;
          end
        end
        S_OFF: if (p_resume) begin
          op    <= OP_RETRIEVE;
          idx   <= '0;
          state <= S_READ;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // A command, once offered, stays unchanged until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_valid && !cmd_ready) |=> (cmd_valid && $stable(cmd_slice) && $stable(cmd_op)))
    else $error("nvff_control_unit: command dropped or changed before it was accepted");

endmodule
