// Testbench for advect: all three field variants side by side, fed random
// stencils, coefficients and level flags (ground, interior, column top),
// with random output stalls. Every result is compared bit for bit with the
// reference model; the latency (7 cycles) and the initiation interval (one
// cell per cycle with no stall) are measured.
module tb_advect;
  import adv_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned MAX_NZ = 16;
  localparam int N_CELLS = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  fp64_t tcx, tcy;
  logic coef_we = 0, coef_sel = 0;
  idx_t coef_k = 0;
  fp64_t coef_data = 0;
  logic [2:0] in_valid;
  logic [2:0] in_ready [3];
  stencil_msg_t in_msg [3];
  logic [2:0] out_valid;
  logic out_ready = 1;
  result_t out_res [3];
  logic [2:0] coef_we_f;

  real c1 [3][MAX_NZ];
  real c2 [3][MAX_NZ];

  for (genvar f = 0; f < 3; f++) begin : g_dut
    advect #(.FIELD(field_e'(f)), .MAX_NZ(MAX_NZ)) dut (
      .clk, .rst_n, .tcx, .tcy,
      .coef_we (coef_we_f[f]), .coef_sel, .coef_k, .coef_data,
      .in_valid, .in_ready(in_ready[f]), .in_msg,
      .out_valid(out_valid[f]), .out_ready, .out_res(out_res[f]));
  end

  // expected results in issue order
  real  exp_q [3][$];
  int   issue_cycle [$];
  int   cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  cube_t cu, cv, cw;

  task automatic make_cell(output stencil_msg_t mu, output stencil_msg_t mv,
                           output stencil_msg_t mw, output real e [3]);
    cell_tag_t t;
    int sel;
    t = '0;
    t.k = idx_t'($urandom_range(0, MAX_NZ - 1));
    sel = $urandom_range(0, 9);
    if (sel == 0) t.k = 0;
    if (sel == 1) t.k = MAX_NZ - 1;
    t.bottom = (t.k == 0);
    t.top    = (t.k == MAX_NZ - 1);
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int c = 0; c < 3; c++) begin
      cu[a][b][c] = rnd_real(20.0);
      cv[a][b][c] = rnd_real(20.0);
      cw[a][b][c] = rnd_real(5.0);
      mu.s[a][b][c] = $realtobits(cu[a][b][c]);
      mv.s[a][b][c] = $realtobits(cv[a][b][c]);
      mw.s[a][b][c] = $realtobits(cw[a][b][c]);
    end
    mu.tag = t; mv.tag = t; mw.tag = t;
    for (int f = 0; f < 3; f++)
      e[f] = pw_source(f, cu, cv, cw, $bitstoreal(tcx), $bitstoreal(tcy),
                       c1[f][t.k], c2[f][t.k], t.top, t.bottom);
  endtask

  // output checker
  int got [3];
  int first_out_cycle = -1;
  int last_out_cycle = 0;
  always @(posedge clk) begin
    for (int f = 0; f < 3; f++) begin
      if (rst_n && out_valid[f] && out_ready) begin
        real e;
        e = exp_q[f].pop_front();
        checks++;
        if (out_res[f].v !== $realtobits(e)) begin
          failures++;
          if (failures < 10)
            $display("advect field %0d cell %0d: got %h (%g) expected %h (%g)", f, got[f],
                     out_res[f].v, $bitstoreal(out_res[f].v), $realtobits(e), e);
        end
        if (f == 0) begin
          if (first_out_cycle < 0) first_out_cycle = cycle;
          last_out_cycle = cycle;
        end
        got[f]++;
      end
    end
  end

  initial begin
    stencil_msg_t mu, mv, mw;
    real e [3];
    int lat;
    tcx = $realtobits(0.25 / 50.0);
    tcy = $realtobits(0.25 / 40.0);
    coef_we_f = '0;
    in_valid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load coefficient tables
    for (int f = 0; f < 3; f++)
      for (int k = 0; k < MAX_NZ; k++)
        for (int s = 0; s < 2; s++) begin
          real r;
          r = rnd_real(0.1);
          if (s == 0) c1[f][k] = r; else c2[f][k] = r;
          @(negedge clk);
          coef_we_f = 3'b1 << f; coef_sel = s[0]; coef_k = idx_t'(k); coef_data = $realtobits(r);
        end
    @(negedge clk) coef_we_f = '0;

    // phase 1: continuous stream, no stalls: latency and interval
    @(negedge clk);
    for (int n = 0; n < N_CELLS; n++) begin
      make_cell(mu, mv, mw, e);
      in_msg[0] = mu; in_msg[1] = mv; in_msg[2] = mw; in_valid = 3'b111;
      for (int f = 0; f < 3; f++) exp_q[f].push_back(e[f]);
      if (n == 0) issue_cycle.push_back(cycle);
      @(negedge clk);
    end
    in_valid = '0;
    repeat (12) @(negedge clk);
    lat = first_out_cycle - issue_cycle[0];
    checks++;
    if (lat != 7) begin failures++; $display("latency %0d, expected 7", lat); end
    checks++;
    if (last_out_cycle - first_out_cycle != N_CELLS - 1) begin
      failures++; $display("interval: %0d cycles for %0d cells", last_out_cycle - first_out_cycle + 1, N_CELLS);
    end

    // phase 2: random output stalls and input gaps
    fork
      begin
        for (int n = 0; n < N_CELLS; n++) begin
          make_cell(mu, mv, mw, e);
          in_msg[0] = mu; in_msg[1] = mv; in_msg[2] = mw;
          in_valid = 3'b111;
          for (int f = 0; f < 3; f++) exp_q[f].push_back(e[f]);
          do @(posedge clk); while (!in_ready[0][0]);
          @(negedge clk);
          in_valid = '0;
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
      end
      begin
        repeat (N_CELLS * 4) begin
          @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);
        end
        out_ready = 1;
      end
    join
    repeat (20) @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      checks++;
      if (got[f] != 2 * N_CELLS) begin
        failures++; $display("field %0d: %0d results, expected %0d", f, got[f], 2 * N_CELLS);
      end
    end
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
