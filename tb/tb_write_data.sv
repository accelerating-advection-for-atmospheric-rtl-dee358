// Testbench for write_data: three result streams carrying values that
// encode their own field and cell are fed in the kernel's order (chunk by
// chunk, interior planes and columns, each column bottom to top), with
// random gaps, and the memory model refuses writes at random. Afterwards
// every interior word of su, sv, sw must hold the right eight values, every
// halo word must be untouched, and busy must have fallen.
module tb_write_data;
  import adv_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      start = 0, busy;
  cfg_t      cfg;
  logic      rd_req_valid [3];
  logic      rd_req_ready [3];
  addr_t     rd_req_addr  [3];
  logic      rd_rsp_valid [3];
  mem_word_t rd_rsp_data  [3];
  logic      wr_valid [3];
  logic      wr_ready [3];
  addr_t     wr_addr  [3];
  mem_word_t wr_data  [3];
  logic      in_valid [3];
  logic      in_ready [3];
  result_t   in_res   [3];

  localparam mem_word_t MARK = {8{64'h0BAD_0BAD_0BAD_0BAD}};

  initial for (int f = 0; f < 3; f++) begin rd_req_valid[f] = 0; rd_req_addr[f] = '0; in_valid[f] = 0; end

  mem_model #(.NP(3), .LAT(3), .STALL_PCT(0)) u_mem (.*);

  write_data dut (.clk, .rst_n, .start, .cfg, .busy, .in_valid, .in_ready, .in_res,
                  .wr_valid, .wr_ready, .wr_addr, .wr_data);

  function automatic fp64_t val(input int f, input int x, input int y, input int z);
    return {8'(f + 11), 16'(x), 16'(y), 24'(z)};
  endfunction

  addr_t bases [3];

  task automatic feed(input int f, input int nx, input int ny, input int nz, input int cw, input int gap);
    int nch;
    nch = (ny + cw - 1) / cw;
    for (int c = 0; c < nch; c++)
      for (int x = 1; x <= nx; x++)
        for (int y = c * cw + 1; y <= ((c + 1) * cw > ny ? ny : (c + 1) * cw); y++)
          for (int z = 0; z < nz; z++) begin
            in_res[f].v = val(f, x, y, z);
            in_res[f].tag = '0;
            in_res[f].tag.k = idx_t'(z);
            in_valid[f] = 1;
            do @(posedge clk); while (!in_ready[f]);
            @(negedge clk);
            in_valid[f] = 0;
            if ($urandom_range(0, 99) < gap) @(negedge clk);
          end
  endtask

  task automatic run(input int nx, input int ny, input int nz, input int cw, input int stall);
    cfg = '0;
    cfg.nx = idx_t'(nx); cfg.ny = idx_t'(ny); cfg.nz = idx_t'(nz); cfg.chunk_w = idx_t'(cw);
    cfg.base_su = 40; cfg.base_sv = 3000; cfg.base_sw = 7000;
    bases[0] = cfg.base_su; bases[1] = cfg.base_sv; bases[2] = cfg.base_sw;
    u_mem.mem.delete();
    for (int f = 0; f < 3; f++)
      for (int i = 0; i < (nx + 2) * (ny + 2) * nz / 8; i++) u_mem.poke(bases[f] + addr_t'(i), MARK);
    u_mem.stall_pct = stall;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    fork
      feed(0, nx, ny, nz, cw, stall);
      feed(1, nx, ny, nz, cw, stall);
      feed(2, nx, ny, nz, cw, stall);
    join
    while (busy) @(negedge clk);
    for (int f = 0; f < 3; f++)
      for (int x = 0; x < nx + 2; x++)
        for (int y = 0; y < ny + 2; y++)
          for (int zb = 0; zb < nz / 8; zb++) begin
            mem_word_t e, g;
            if (x >= 1 && x <= nx && y >= 1 && y <= ny)
              for (int j = 0; j < 8; j++) e[64*j +: 64] = val(f, x, y, zb * 8 + j);
            else
              e = MARK;
            g = u_mem.peek(bases[f] + addr_t'((x * (ny + 2) + y) * (nz / 8) + zb));
            checks++;
            if (g !== e) begin
              failures++;
              if (failures < 10) $display("field %0d word (%0d,%0d,%0d): wrong contents", f, x, y, zb);
            end
          end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 7, 16, 3, 0);
    run(2, 5, 8, 4, 50);
    checks++;
    if (u_mem.wr_stalls == 0) begin failures++; $display("no write was refused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
