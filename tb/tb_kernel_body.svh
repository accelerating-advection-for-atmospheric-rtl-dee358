// Body shared by the end-to-end kernel testbenches (included inside the
// testbench module after the DUT parameters KP_CHUNK_Y and KP_MAX_NZ and the
// run list are declared, and before the DUT instance).
//
// For each run the testbench fills u, v, w (halos included) with random
// winds, fills the result arrays with a marker, loads random coefficients,
// starts the kernel and waits for done. It then checks every interior source
// term bit for bit against the reference scheme evaluated directly on the
// grid, checks that no halo word of a result array was written, and counts
// how often each mechanism of the design occurred.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic      start = 0, busy, done;
  cfg_t      cfg;
  fp64_t     tcx, tcy;
  logic      coef_we = 0, coef_sel = 0;
  field_e    coef_field = FIELD_U;
  idx_t      coef_k = 0;
  fp64_t     coef_data = 0;
  logic      rd_req_valid [3];
  logic      rd_req_ready [3];
  addr_t     rd_req_addr  [3];
  logic      rd_rsp_valid [3];
  mem_word_t rd_rsp_data  [3];
  logic      wr_valid [3];
  logic      wr_ready [3];
  addr_t     wr_addr  [3];
  mem_word_t wr_data  [3];

  mem_model #(.NP(3), .LAT(6), .STALL_PCT(0)) u_mem (.*);

  localparam mem_word_t MARK = {8{64'hDEAD_BEEF_0BAD_F00D}};

  // mechanism counters
  int n_chunks = 0, n_partial_chunk = 0, n_flush = 0, n_top = 0, n_bottom = 0;
  int n_sb_stall = 0, n_rep_wait = 0, n_rd_stall = 0, n_wr_stall = 0;

  always @(posedge clk) if (rst_n) begin
    for (int f = 0; f < 3; f++) begin
      if (dut.st_valid[f] && !dut.st_ready[f]) n_sb_stall++;
      // some advection stages have taken the stencil, others not yet
      if (dut.rep_valid[f] != 3'b000 && dut.rep_valid[f] != 3'b111) n_rep_wait++;
    end
    if (dut.g_field[0].u_shift.s1_valid && dut.g_field[0].u_shift.s1_flush &&
        dut.g_field[0].u_shift.adv) n_flush++;
    if (dut.st_valid[0] && dut.st_ready[0]) begin
      if (dut.st[0].tag.top) n_top++;
      if (dut.st[0].tag.bottom) n_bottom++;
    end
  end

  // addressing of the arrays, as documented in adv_pkg
  function automatic longint didx(input int x, input int y, input int z);
    return (longint'(x) * (cfg.ny + 2) + y) * cfg.nz + z;
  endfunction

  function automatic real get(input addr_t base, input int x, input int y, input int z);
    longint d;
    mem_word_t w;
    d = didx(x, y, z);
    w = u_mem.peek(base + addr_t'(d / 8));
    return $bitstoreal(w[64*(d%8) +: 64]);
  endfunction

  function automatic fp64_t getbits(input addr_t base, input int x, input int y, input int z);
    longint d;
    mem_word_t w;
    d = didx(x, y, z);
    w = u_mem.peek(base + addr_t'(d / 8));
    return w[64*(d%8) +: 64];
  endfunction

  real c1t [3][KP_MAX_NZ];
  real c2t [3][KP_MAX_NZ];

  task automatic run_case(input int nx, input int ny, input int nz, input int cw,
                          input int stall_pct);
    longint words, t0, t1, n_in;
    int nchunks;
    addr_t bases [6];
    tb_ref_pkg::cube_t cu, cv, cw3;
    cfg.nx = idx_t'(nx); cfg.ny = idx_t'(ny); cfg.nz = idx_t'(nz); cfg.chunk_w = idx_t'(cw);
    words = longint'(nx + 2) * (ny + 2) * nz / 8;
    for (int a = 0; a < 6; a++) bases[a] = addr_t'(1000 + a * (words + 64));
    cfg.base_u = bases[0]; cfg.base_v = bases[1]; cfg.base_w = bases[2];
    cfg.base_su = bases[3]; cfg.base_sv = bases[4]; cfg.base_sw = bases[5];
    u_mem.mem.delete();
    for (int a = 0; a < 3; a++)
      for (longint i = 0; i < words; i++) begin
        mem_word_t w;
        for (int j = 0; j < 8; j++) w[64*j +: 64] = $realtobits(tb_ref_pkg::rnd_real(a == 2 ? 4.0 : 15.0));
        u_mem.poke(bases[a] + addr_t'(i), w);
        u_mem.poke(bases[3 + a] + addr_t'(i), MARK);
      end
    u_mem.stall_pct = stall_pct;
    tcx = $realtobits(tb_ref_pkg::rnd_real(0.01));
    tcy = $realtobits(tb_ref_pkg::rnd_real(0.01));
    for (int f = 0; f < 3; f++)
      for (int k = 0; k < nz; k++)
        for (int s = 0; s < 2; s++) begin
          real r;
          r = tb_ref_pkg::rnd_real(0.05);
          if (s == 0) c1t[f][k] = r; else c2t[f][k] = r;
          @(negedge clk);
          coef_we = 1; coef_field = field_e'(f); coef_sel = s[0]; coef_k = idx_t'(k);
          coef_data = $realtobits(r);
        end
    @(negedge clk) coef_we = 0;
    nchunks = (ny + cw - 1) / cw;
    n_chunks += nchunks;
    if (ny % cw != 0) n_partial_chunk++;
    n_in = 0;
    for (int c = 0; c < nchunks; c++) n_in += longint'(nx + 2) * ((ny - c * cw < cw ? ny - c * cw : cw) + 2) * nz;
    start = 1;
    t0 = cycle;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t1 = cycle;
    $display("run nx=%0d ny=%0d nz=%0d chunk=%0d stall=%0d%%: %0d cycles for %0d values per field",
             nx, ny, nz, cw, stall_pct, t1 - t0, n_in);
    if (stall_pct == 0) begin
      // one value per field per cycle: only pipeline fill and one flush cycle on top
      checks++;
      if (t1 - t0 > n_in + 40) begin
        failures++; $display("throughput below one cell per cycle");
      end
    end
    // results
    for (int x = 0; x < nx + 2; x++)
      for (int y = 0; y < ny + 2; y++)
        for (int k = 0; k < nz; k++) begin
          bit interior;
          interior = (x >= 1 && x <= nx && y >= 1 && y <= ny);
          if (!interior) begin
            if (k % 8 == 0) begin
              checks++;
              for (int f = 0; f < 3; f++)
                if (getbits(bases[3 + f], x, y, k) != 64'hDEAD_BEEF_0BAD_F00D) begin
                  failures++;
                  $display("halo (%0d,%0d,%0d) of result %0d was written", x, y, k, f);
                end
            end
            continue;
          end
          for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int c = 0; c < 3; c++) begin
            int z;
            z = k + c - 1;
            if (z < 0) z = 0;
            if (z >= nz) z = nz - 1;
            cu[a][b][c]  = get(bases[0], x + a - 1, y + b - 1, z);
            cv[a][b][c]  = get(bases[1], x + a - 1, y + b - 1, z);
            cw3[a][b][c] = get(bases[2], x + a - 1, y + b - 1, z);
          end
          for (int f = 0; f < 3; f++) begin
            real e;
            fp64_t g;
            e = tb_ref_pkg::pw_source(f, cu, cv, cw3, $bitstoreal(tcx), $bitstoreal(tcy),
                                      c1t[f][k], c2t[f][k], k == nz - 1, k == 0);
            g = getbits(bases[3 + f], x, y, k);
            checks++;
            if (g !== $realtobits(e)) begin
              failures++;
              if (failures < 10)
                $display("s%0d (%0d,%0d,%0d): got %h (%g) expected %h (%g)", f, x, y, k, g,
                         $bitstoreal(g), $realtobits(e), e);
            end
          end
        end
  endtask

  task automatic check_mechanisms();
    n_rd_stall = u_mem.rd_stalls;
    n_wr_stall = u_mem.wr_stalls;
    $display("mechanisms: chunks=%0d partial_last_chunk=%0d flush=%0d column_tops=%0d grounds=%0d",
             n_chunks, n_partial_chunk, n_flush, n_top, n_bottom);
    $display("            shift_buffer_stalls=%0d replicate_waits=%0d read_refusals=%0d write_refusals=%0d",
             n_sb_stall, n_rep_wait, n_rd_stall, n_wr_stall);
    checks++; if (n_chunks < 2)        begin failures++; $display("chunking never happened"); end
    checks++; if (n_partial_chunk < 1) begin failures++; $display("no narrower last chunk"); end
    checks++; if (n_flush < 1)         begin failures++; $display("no flush cycle"); end
    checks++; if (n_top < 1)           begin failures++; $display("no column top"); end
    checks++; if (n_bottom < 1)        begin failures++; $display("no ground cell"); end
    if (check_stalls) begin
      checks++; if (n_sb_stall < 1)    begin failures++; $display("no back-pressure stall"); end
      checks++; if (n_rep_wait < 1)    begin failures++; $display("replicate never waited"); end
      checks++; if (n_rd_stall < 1)    begin failures++; $display("no refused read"); end
      checks++; if (n_wr_stall < 1)    begin failures++; $display("no refused write"); end
    end
  endtask
