// tb_hld_top: end-to-end test of the high-level decoder at distance 5 with
// reduced hidden layers (16 and 8 nodes, 4 bits) so that it builds quickly.
// Stimulus and checks are in hld_driver.
module tb_hld_top;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, out_valid, log_x, log_z, done;
  int checks, failures;
  hld_pkg::log_class_e log_class;

  logic [drv.NA-1:0] syndrome;
  logic [drv.NQ-1:0] pe_x, pe_z;

  hld_top #(.D(5), .L1(16), .L2(8), .N(4)) dut (
    .clk, .rst_n, .in_valid, .syndrome,
    .w1(drv.w1), .b1(drv.b1), .w2(drv.w2), .b2(drv.b2), .w3(drv.w3), .b3(drv.b3),
    .out_valid, .pe_x, .pe_z, .log_x, .log_z, .log_class
  );

  hld_driver #(.D(5), .L1(16), .L2(8), .N(4), .TESTS(400)) drv (
    .clk, .rst_n, .in_valid, .syndrome,
    .w1(), .b1(), .w2(), .b2(), .w3(), .b3(),
    .out_valid, .pe_x, .pe_z, .log_x, .log_z, .log_class(log_class),
    .done, .checks, .failures
  );

  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1 wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
