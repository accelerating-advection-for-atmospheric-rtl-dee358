// Read data stage: streams u, v and w from external memory to the three
// 3D shift buffers.
//
// The grid is read chunk by chunk in y (each chunk face with its one-column
// halo on both sides, so neighbouring chunks overlap by two columns), plane
// by plane in x, column by column, each column bottom to top. Every field
// has its own 512-bit memory port and its own lane (field_reader), so the
// three value streams advance independently and one value per field per
// cycle can be sustained. The three lanes walk the same order and carry the
// same position tags. busy is high from start until all three lanes have
// delivered their final value.
module read_data
  import adv_pkg::*;
#(
  parameter int unsigned FIFO_D = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  cfg_t      cfg,
  output logic      busy,
  // memory read ports, index = field (u, v, w)
  output logic      rd_req_valid [3],
  input  logic      rd_req_ready [3],
  output addr_t     rd_req_addr  [3],
  input  logic      rd_rsp_valid [3],
  input  mem_word_t rd_rsp_data  [3],
  // value streams to the shift buffers
  output logic      out_valid [3],
  input  logic      out_ready [3],
  output elem_t     out_elem  [3]
);

  logic [2:0] lane_busy;
  addr_t      base [3];

  assign base[0] = cfg.base_u;
  assign base[1] = cfg.base_v;
  assign base[2] = cfg.base_w;
  assign busy    = |lane_busy;

  for (genvar f = 0; f < 3; f++) begin : g_lane
    field_reader #(.FIFO_D(FIFO_D)) u_lane (
      .clk, .rst_n,
      .start        (start && !busy),
      .cfg,
      .base         (base[f]),
      .busy         (lane_busy[f]),
      .rd_req_valid (rd_req_valid[f]),
      .rd_req_ready (rd_req_ready[f]),
      .rd_req_addr  (rd_req_addr[f]),
      .rd_rsp_valid (rd_rsp_valid[f]),
      .rd_rsp_data  (rd_rsp_data[f]),
      .out_valid    (out_valid[f]),
      .out_ready    (out_ready[f]),
      .out_elem     (out_elem[f])
    );
  end

endmodule
