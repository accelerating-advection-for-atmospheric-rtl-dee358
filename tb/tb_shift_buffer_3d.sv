// Testbench for shift_buffer_3d: streams two chunk faces of a random grid
// (the second narrower, as a last chunk is) through the buffer and checks
// every emitted stencil against the grid: centre order, level tags, all 27
// values (except the row below the ground cell and the row above the column
// top, which the advection does not use). Phase 1 runs without stalls and
// checks one stencil per input value; phase 2 adds random input gaps and
// output stalls.
module tb_shift_buffer_3d;
  import adv_pkg::*;

  localparam int unsigned CHUNK_Y = 8;
  localparam int unsigned MAX_NZ  = 8;
  localparam int NX = 3, NZ = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  elem_t in_elem;
  stencil_msg_t out_msg;
  idx_t nz = idx_t'(NZ);

  shift_buffer_3d #(.CHUNK_Y(CHUNK_Y), .MAX_NZ(MAX_NZ)) dut (
    .clk, .rst_n, .nz, .in_valid, .in_ready, .in_elem, .out_valid, .out_ready, .out_msg);

  // grid[x][y][z] for the current run; faces of width fw (halo included)
  fp64_t grid [2][NX+2][CHUNK_Y][NZ];   // two faces in flight at most
  int face_no = 0;
  typedef struct { int x, y, k; int g; bit last; } centre_t;
  centre_t exp_q [$];
  int n_in, n_out, first_in, last_out;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      centre_t c;
      n_out++;
      last_out = cycle;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected stencil");
      end else begin
        c = exp_q.pop_front();
        checks++;
        if (out_msg.tag.k != idx_t'(c.k) || out_msg.tag.bottom != (c.k == 0) ||
            out_msg.tag.top != (c.k == NZ - 1) || out_msg.tag.last != c.last) begin
          failures++;
          $display("tag mismatch at (%0d,%0d,%0d): k=%0d top=%b bot=%b last=%b", c.x, c.y, c.k,
                   out_msg.tag.k, out_msg.tag.top, out_msg.tag.bottom, out_msg.tag.last);
        end
        for (int dx = 0; dx < 3; dx++) for (int dy = 0; dy < 3; dy++) for (int dz = 0; dz < 3; dz++) begin
          int z;
          z = c.k + dz - 1;
          if (z < 0 || z >= NZ) continue;
          checks++;
          if (out_msg.s[dx][dy][dz] !== grid[c.g][c.x+dx-1][c.y+dy-1][z]) begin
            failures++;
            if (failures < 10)
              $display("centre (%0d,%0d,%0d) offset [%0d][%0d][%0d]: got %h expected %h",
                       c.x, c.y, c.k, dx, dy, dz, out_msg.s[dx][dy][dz], grid[c.g][c.x+dx-1][c.y+dy-1][z]);
          end
        end
      end
    end
  end

  task automatic run_face(input int fw, input bit final_face, input bit gaps);
    int g;
    g = face_no % 2;
    face_no++;
    for (int x = 0; x < NX + 2; x++)
      for (int y = 0; y < fw; y++)
        for (int z = 0; z < NZ; z++)
          grid[g][x][y][z] = {$urandom, $urandom};
    for (int x = 1; x <= NX; x++)
      for (int y = 1; y <= fw - 2; y++)
        for (int k = 0; k < NZ; k++)
          exp_q.push_back('{x, y, k, g,
                             final_face && x == NX && y == fw - 2 && k == NZ - 1});
    for (int x = 0; x < NX + 2; x++)
      for (int y = 0; y < fw; y++)
        for (int z = 0; z < NZ; z++) begin
          in_elem.v = grid[g][x][y][z];
          in_elem.tag.y = idx_t'(y);
          in_elem.tag.z = idx_t'(z);
          in_elem.tag.xy_ok = (x >= 2 && y >= 2);
          in_elem.tag.z_top = (z == NZ - 1);
          in_elem.tag.last = final_face && x == NX + 1 && y == fw - 1 && z == NZ - 1;
          in_valid = 1;
          if (n_in == 0) first_in = cycle;
          do @(posedge clk); while (!in_ready);
          n_in++;
          @(negedge clk);
          in_valid = 0;
          if (gaps && $urandom_range(0, 3) == 0) @(negedge clk);
        end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: one full face and a narrower last face, no stalls
    run_face(CHUNK_Y, 0, 0);
    run_face(5, 1, 0);
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d stencils missing", exp_q.size()); end
    // II = 1: outputs end within a few cycles of the input (one flush cycle)
    checks++;
    if (last_out - first_in > n_in + 3) begin
      failures++; $display("throughput: %0d cycles for %0d values", last_out - first_in, n_in);
    end
    // phase 2: random gaps and stalls
    fork
      begin
        run_face(6, 0, 1);
        run_face(CHUNK_Y, 1, 1);
      end
      begin
        repeat (3000) @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);
        out_ready = 1;
      end
    join_any
    wait (exp_q.size() == 0 || cycle > 8000);
    out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d stencils missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
