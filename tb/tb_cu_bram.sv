// tb_cu_bram: self-checking test of the SLICE address table.
//
// Fills a 64-entry table with pseudo-random SLICE coordinates, reads every
// entry back and checks the one-cycle read latency, that rdata holds while
// re is low, and read-first behaviour when one address is read and written
// in the same cycle. Expected values come from a shadow array in the bench.
module tb_cu_bram;
  import dft_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = 6;

  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  data_cu_t wdata = '0, rdata;

  cu_bram #(.DEPTH(DEPTH), .AW(AW)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, what); end
  endtask

  data_cu_t shadow [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i);
      wdata.slice_x = $urandom % 114;
      wdata.slice_y = $urandom % 150;
      shadow[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      re = 1; raddr = AW'(i);
      @(negedge clk);
      check(rdata == shadow[i], $sformatf("read %0d", i));
    end
    // rdata holds while re is low
    re = 0; raddr = 5;
    repeat (3) @(negedge clk);
    check(rdata == shadow[0], "hold while idle");
    // read-first collision
    re = 1; we = 1; raddr = 9; waddr = 9; wdata = '{slice_x: 77, slice_y: 88};
    @(negedge clk);
    check(rdata == shadow[9], "read-first returns old data");
    shadow[9] = wdata; we = 0;
    @(negedge clk);
    check(rdata == shadow[9], "new data after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
