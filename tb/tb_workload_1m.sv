// Workload testbench: the smallest grid the paper evaluates, about one
// million grid points (128 x 128 x 64 cells, split in y into chunks of 100
// and 28 columns), run through the kernel at its default sizes and checked
// cell by cell against the reference scheme. Also checks that the run takes
// about one cycle per value read.
module tb_workload_1m;
  import adv_pkg::*;

  localparam int unsigned KP_CHUNK_Y = 256;
  localparam int unsigned KP_MAX_NZ  = 64;
  localparam bit check_stalls = 0;

  `include "tb_kernel_body.svh"

  advection_kernel dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_case(128, 128, 64, 100, 0);
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
