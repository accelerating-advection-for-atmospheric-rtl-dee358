// PW advection kernel: computes the advection source terms su, sv and sw of
// the three wind fields u, v and w, one grid cell per clock cycle, as a
// dataflow machine of concurrently running stages:
//
//   read_data -> 3 x shift_buffer_3d -> 3 x replicate -> 3 x advect -> write_data
//
// The read stage streams each field, chunk by chunk in y, to its own 3D
// shift buffer, which turns single values into 27-point stencils. Each
// field's stencil stream is replicated to the three advection stages, since
// every source term needs u, v and w. The three advection stages compute the
// double precision source terms, and the write stage packs them back into
// 512-bit memory words. All stages are joined by valid/ready handshakes and
// run at initiation interval one, so after the pipeline has filled, one cell
// (63 floating point operations, 55 at the column top) completes per cycle.
//
// Interface: the host loads the per-level coefficients (coef_*), sets tcx,
// tcy and cfg, and pulses start. busy stays high until the last result word
// has been accepted by memory; done pulses for one cycle at that point.
// Each field has a read port and each result a write port, 512 bits wide,
// word addressed; read responses return in order, any number of cycles
// after the request, without back-pressure.
module advection_kernel
  import adv_pkg::*;
#(
  parameter int unsigned CHUNK_Y = 256,  // shift buffer size in y, halos included
  parameter int unsigned MAX_NZ  = 64,   // maximum column height
  parameter int unsigned FIFO_D  = 8     // read response buffer, words per field
) (
  input  logic      clk,
  input  logic      rst_n,
  // control
  input  logic      start,
  input  cfg_t      cfg,
  output logic      busy,
  output logic      done,
  // constants
  input  fp64_t     tcx,
  input  fp64_t     tcy,
  input  logic      coef_we,
  input  field_e    coef_field,  // table written: U, V (tzc1/2) or W (tzd1/2)
  input  logic      coef_sel,    // 0: first coefficient, 1: second
  input  idx_t      coef_k,
  input  fp64_t     coef_data,
  // memory read ports (u, v, w)
  output logic      rd_req_valid [3],
  input  logic      rd_req_ready [3],
  output addr_t     rd_req_addr  [3],
  input  logic      rd_rsp_valid [3],
  input  mem_word_t rd_rsp_data  [3],
  // memory write ports (su, sv, sw)
  output logic      wr_valid [3],
  input  logic      wr_ready [3],
  output addr_t     wr_addr  [3],
  output mem_word_t wr_data  [3]
);

  logic rd_busy, wr_busy, wr_busy_q, go;

  assign go   = start && !busy;
  assign busy = rd_busy || wr_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_busy_q <= 1'b0;
    else        wr_busy_q <= wr_busy;
  end
  assign done = wr_busy_q && !wr_busy;

  // read -> shift buffers
  logic  el_valid [3];
  logic  el_ready [3];
  elem_t el       [3];

  read_data #(.FIFO_D(FIFO_D)) u_read (
    .clk, .rst_n,
    .start (go),
    .cfg,
    .busy  (rd_busy),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .out_valid (el_valid),
    .out_ready (el_ready),
    .out_elem  (el)
  );

  // shift buffers -> replicate -> advect
  logic         st_valid [3];
  logic         st_ready [3];
  stencil_msg_t st       [3];
  // rep_* [source field][destination advection stage]
  logic [2:0]   rep_valid [3];
  logic [2:0]   rep_ready [3];
  stencil_msg_t rep_msg   [3][3];

  for (genvar f = 0; f < 3; f++) begin : g_field
    shift_buffer_3d #(.CHUNK_Y(CHUNK_Y), .MAX_NZ(MAX_NZ)) u_shift (
      .clk, .rst_n,
      .nz        (cfg.nz),
      .in_valid  (el_valid[f]),
      .in_ready  (el_ready[f]),
      .in_elem   (el[f]),
      .out_valid (st_valid[f]),
      .out_ready (st_ready[f]),
      .out_msg   (st[f])
    );

    replicate #(.N(3)) u_rep (
      .clk, .rst_n,
      .in_valid  (st_valid[f]),
      .in_ready  (st_ready[f]),
      .in_msg    (st[f]),
      .out_valid (rep_valid[f]),
      .out_ready (rep_ready[f]),
      .out_msg   (rep_msg[f])
    );
  end

  // advect stages, one per field
  logic    res_valid [3];
  logic    res_ready [3];
  result_t res       [3];

  for (genvar a = 0; a < 3; a++) begin : g_advect
    logic [2:0]   in_valid;
    logic [2:0]   in_ready;
    stencil_msg_t in_msg [3];
    for (genvar f = 0; f < 3; f++) begin : g_src
      assign in_valid[f]     = rep_valid[f][a];
      assign rep_ready[f][a] = in_ready[f];
      assign in_msg[f]       = rep_msg[f][a];
    end

    advect #(.FIELD(field_e'(a)), .MAX_NZ(MAX_NZ)) u_advect (
      .clk, .rst_n,
      .tcx, .tcy,
      .coef_we   (coef_we && coef_field == field_e'(a)),
      .coef_sel,
      .coef_k,
      .coef_data,
      .in_valid,
      .in_ready,
      .in_msg,
      .out_valid (res_valid[a]),
      .out_ready (res_ready[a]),
      .out_res   (res[a])
    );
  end

  write_data u_write (
    .clk, .rst_n,
    .start    (go),
    .cfg,
    .busy     (wr_busy),
    .in_valid (res_valid),
    .in_ready (res_ready),
    .in_res   (res),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
                          go |-> (cfg.nz >= idx_t'(WORD_DOUBLES) && cfg.nz <= idx_t'(MAX_NZ) &&
                                  cfg.nz % idx_t'(WORD_DOUBLES) == '0 &&
                                  cfg.chunk_w >= idx_t'(1) && cfg.chunk_w + idx_t'(2) <= idx_t'(CHUNK_Y) &&
                                  cfg.nx >= idx_t'(1) && cfg.ny >= idx_t'(1)))
    else $error("advection_kernel: configuration outside what the buffers hold");

endmodule
