// dft_pkg: types and helpers shared by the data-flow-tracking blocks.
//
// data_cu_t is the entry of the control unit's address table: the X and Y
// coordinate of one FPGA SLICE (the XxxYyy placement name). The two fields
// follow the control-unit data structure of the design, which declares both
// coordinates as "int"; COORD_W therefore defaults to 32. An all-zero entry
// means "no SLICE": the control unit issues no store or retrieve for it.
//
// slice_op_e names the two actions the control unit can request from the
// non-volatile flip-flop (NV-FF) control path of the fabric.
package dft_pkg;

  localparam int unsigned COORD_W = 32;

  typedef struct packed {
    logic [COORD_W-1:0] slice_x;
    logic [COORD_W-1:0] slice_y;
  } data_cu_t;


  typedef enum logic {
    OP_STORE    = 1'b0,
    OP_RETRIEVE = 1'b1
  } slice_op_e;

endpackage
