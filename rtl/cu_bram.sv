// cu_bram: the control unit's SLICE address table (cu_BRAM).
//
// One entry per tracker status value, each a data_cu_t {slice_x, slice_y}.
// The table is filled after configuration through the write port (the
// addresses come from placement, so they are only known after synthesis)
// and is read by the control unit with a one-cycle synchronous read, the
// behaviour of an FPGA block RAM. Reads and writes to the same address in
// one cycle return the old data (read-first).
//
// Size: DEPTH entries of DATA_CU_W = 64 bits. The default of 1024 entries
// holds the tracker-SLICE region and three 8-bit trackers (256 entries
// each) of the default top; the depth itself is this design's choice, the
// 64-bit entry follows the two "int" coordinates of the data structure.
// A single 8-bit tracker needs 256 x 64 bits, two 18 Kb block RAMs.
module cu_bram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  // preload (write) port
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  dft_pkg::data_cu_t  wdata,
  // look-up (read) port
  input  logic               re,
  input  logic [AW-1:0]      raddr,
  output dft_pkg::data_cu_t  rdata
);

  dft_pkg::data_cu_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
