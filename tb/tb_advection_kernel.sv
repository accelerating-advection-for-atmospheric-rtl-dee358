// End-to-end testbench of the advection kernel at reduced buffer sizes
// (CHUNK_Y 8, MAX_NZ 16): several grids, with chunking in y including a
// narrower last chunk, and with and without random memory back-pressure.
// Every interior source term is compared with the reference scheme.
module tb_advection_kernel;
  import adv_pkg::*;

  localparam int unsigned KP_CHUNK_Y = 8;
  localparam int unsigned KP_MAX_NZ  = 16;
  localparam bit check_stalls = 1;

  `include "tb_kernel_body.svh"

  advection_kernel #(.CHUNK_Y(KP_CHUNK_Y), .MAX_NZ(KP_MAX_NZ)) dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_case(3, 14, 16, 6, 0);   // chunks of 6, 6, 2
    run_case(4, 6, 8, 6, 0);     // a single full chunk
    run_case(2, 9, 16, 4, 92);   // chunks of 4, 4, 1 with heavy random stalls
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
