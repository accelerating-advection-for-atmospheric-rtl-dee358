// Testbench for read_data: a memory model holds u, v, w (values that encode
// their own field and position) and the read stage streams them chunk by
// chunk. Each lane's values are checked in order against the expected walk
// (planes 0..nx+1, chunk columns with both halos, column bottom to top),
// together with every tag field. The lanes are stalled independently at
// random, and memory requests are refused at random, in the second run.
// Without stalls the stage must deliver one value per field per cycle.
module tb_read_data;
  import adv_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

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
  logic      out_valid [3];
  logic      out_ready [3];
  elem_t     out_elem  [3];
  int        out_stall = 0;

  initial for (int f = 0; f < 3; f++) begin wr_valid[f] = 0; wr_addr[f] = '0; wr_data[f] = '0; out_ready[f] = 1; end

  mem_model #(.NP(3), .LAT(5), .STALL_PCT(0)) u_mem (.*);

  read_data #(.FIFO_D(8)) dut (.clk, .rst_n, .start, .cfg, .busy,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .out_valid, .out_ready, .out_elem);

  always @(negedge clk)
    for (int f = 0; f < 3; f++) out_ready[f] <= ($urandom_range(0, 99) >= out_stall);

  // value stored at (f, x, y, z): distinct per field and position
  function automatic fp64_t val(input int f, input int x, input int y, input int z);
    return {8'(f + 1), 16'(x), 16'(y), 24'(z)};
  endfunction

  typedef struct { int x, y, z, ylo; bit last, xy_ok, z_top; } pos_t;
  pos_t exp_q [3][$];
  longint n_taken [3];
  longint t_first, t_last;

  always @(posedge clk) if (rst_n) begin
    for (int f = 0; f < 3; f++)
      if (out_valid[f] && out_ready[f]) begin
        pos_t p;
        if (f == 0) begin
          if (n_taken[0] == 0) t_first = cycle;
          t_last = cycle;
        end
        n_taken[f]++;
        checks++;
        if (exp_q[f].size() == 0) begin
          failures++; $display("lane %0d: extra value", f);
        end else begin
          p = exp_q[f].pop_front();
          if (out_elem[f].v !== val(f, p.x, p.y, p.z) ||
              out_elem[f].tag.y != idx_t'(p.y - p.ylo) || out_elem[f].tag.z != idx_t'(p.z) ||
              out_elem[f].tag.xy_ok != p.xy_ok || out_elem[f].tag.z_top != p.z_top ||
              out_elem[f].tag.last != p.last) begin
            failures++;
            if (failures < 10)
              $display("lane %0d at (%0d,%0d,%0d): got %h y=%0d z=%0d ok=%b top=%b last=%b", f, p.x, p.y, p.z,
                       out_elem[f].v, out_elem[f].tag.y, out_elem[f].tag.z, out_elem[f].tag.xy_ok,
                       out_elem[f].tag.z_top, out_elem[f].tag.last);
          end
        end
      end
  end

  task automatic run(input int nx, input int ny, input int nz, input int cw, input int stall);
    int nch;
    longint n;
    cfg = '0;
    cfg.nx = idx_t'(nx); cfg.ny = idx_t'(ny); cfg.nz = idx_t'(nz); cfg.chunk_w = idx_t'(cw);
    cfg.base_u = 100; cfg.base_v = 5000; cfg.base_w = 9000;
    u_mem.mem.delete();
    for (int f = 0; f < 3; f++)
      for (int x = 0; x < nx + 2; x++)
        for (int y = 0; y < ny + 2; y++)
          for (int zb = 0; zb < nz / 8; zb++) begin
            mem_word_t w;
            for (int j = 0; j < 8; j++) w[64*j +: 64] = val(f, x, y, zb * 8 + j);
            u_mem.poke((f == 0 ? cfg.base_u : f == 1 ? cfg.base_v : cfg.base_w) +
                       addr_t'((x * (ny + 2) + y) * (nz / 8) + zb), w);
          end
    nch = (ny + cw - 1) / cw;
    n = 0;
    for (int c = 0; c < nch; c++) begin
      int ylo, yhi;
      ylo = c * cw;
      yhi = (ylo + cw + 1 > ny + 1) ? ny + 1 : ylo + cw + 1;
      for (int x = 0; x < nx + 2; x++)
        for (int y = ylo; y <= yhi; y++)
          for (int z = 0; z < nz; z++) begin
            n++;
            for (int f = 0; f < 3; f++)
              exp_q[f].push_back('{x, y, z, ylo, c == nch - 1 && x == nx + 1 && y == yhi && z == nz - 1,
                                   x >= 2 && y - ylo >= 2, z == nz - 1});
          end
    end
    u_mem.stall_pct = stall;
    out_stall = stall;
    n_taken[0] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      checks++;
      if (exp_q[f].size() != 0) begin failures++; $display("lane %0d: %0d values missing", f, exp_q[f].size()); end
    end
    if (stall == 0) begin
      checks++;
      if (t_last - t_first + 1 != n) begin
        failures++; $display("%0d values took %0d cycles", n, t_last - t_first + 1);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(2, 7, 16, 3, 0);
    run(3, 5, 8, 2, 35);
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
