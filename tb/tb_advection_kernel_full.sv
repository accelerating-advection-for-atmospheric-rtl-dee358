// End-to-end testbench of the advection kernel at its default sizes
// (shift buffers of 256 columns, columns of 64 levels): one run over a grid
// of 2 x 300 x 64 cells, split into a full chunk of 254 interior columns and
// a last chunk of 46, checked cell by cell against the reference scheme.
module tb_advection_kernel_full;
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
    run_case(2, 300, 64, 254, 0);
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
