// Write data stage: writes the source terms su, sv and sw back to external
// memory, chunk by chunk, in the same order the read stage fetched them.
//
// Each field has its own lane (field_writer) and its own 512-bit write port;
// a lane packs eight results of one column into a word. Only interior cells
// are written: halo columns and planes of the result arrays are left
// untouched. busy is high from start until all three lanes have had their
// final word accepted; the kernel reports done from its falling edge.
module write_data
  import adv_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  cfg_t      cfg,
  output logic      busy,
  // result streams, index = field (su, sv, sw)
  input  logic      in_valid [3],
  output logic      in_ready [3],
  input  result_t   in_res   [3],
  // memory write ports
  output logic      wr_valid [3],
  input  logic      wr_ready [3],
  output addr_t     wr_addr  [3],
  output mem_word_t wr_data  [3]
);

  logic [2:0] lane_busy;
  addr_t      base [3];

  assign base[0] = cfg.base_su;
  assign base[1] = cfg.base_sv;
  assign base[2] = cfg.base_sw;
  assign busy    = |lane_busy;

  for (genvar f = 0; f < 3; f++) begin : g_lane
    field_writer u_lane (
      .clk, .rst_n,
      .start    (start && !busy),
      .cfg,
      .base     (base[f]),
      .busy     (lane_busy[f]),
      .in_valid (in_valid[f]),
      .in_ready (in_ready[f]),
      .in_res   (in_res[f]),
      .wr_valid (wr_valid[f]),
      .wr_ready (wr_ready[f]),
      .wr_addr  (wr_addr[f]),
      .wr_data  (wr_data[f])
    );
  end

endmodule
