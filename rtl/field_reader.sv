// One field's lane of the read stage: fetches the field from external
// memory in 512-bit words, chunk face by chunk face, and unpacks each word
// into eight consecutive values with their position tags.
//
// Requests walk the grid in the order of face_walker_pkg with z stepping
// a whole word; the value side walks the same order one value at a time.
// Responses return in request order and are held in a FIFO_D-word buffer.
// A request is issued only while fewer than FIFO_D words are requested and
// not yet fully unpacked, so a response always has room and the memory side
// needs no ready. One value leaves per cycle while the buffer is non-empty.
// A run starts with `start` (one cycle, configuration stable during the run)
// and `busy` falls after the final value has been taken.
module field_reader
  import adv_pkg::*;
  import face_walker_pkg::*;
#(
  parameter int unsigned FIFO_D = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  cfg_t      cfg,
  input  addr_t     base,
  output logic      busy,
  // memory read port
  output logic      rd_req_valid,
  input  logic      rd_req_ready,
  output addr_t     rd_req_addr,
  input  logic      rd_rsp_valid,
  input  mem_word_t rd_rsp_data,
  // value stream
  output logic      out_valid,
  input  logic      out_ready,
  output elem_t     out_elem
);

  localparam int unsigned PW = $clog2(FIFO_D);

  pos_t   rq_pos, el_pos;
  logic   rq_busy;
  logic [PW:0] inflight, count;
  logic [PW-1:0] wr_ptr, rd_ptr;
  mem_word_t fifo [FIFO_D];

  logic issue, take, pop;

  assign rd_req_valid = rq_busy && (inflight < (PW+1)'(FIFO_D));
  assign rd_req_addr  = word_addr(cfg, base, rq_pos);
  assign issue        = rd_req_valid && rd_req_ready;

  assign out_valid = busy && (count != '0);
  assign take      = out_valid && out_ready;
  assign pop       = take && (el_pos.z[2:0] == 3'(WORD_DOUBLES - 1));

  always_comb begin
    logic [2:0] wsel;
    wsel              = el_pos.z[2:0];
    out_elem.v        = fifo[rd_ptr][64*wsel +: 64];
    out_elem.tag.y    = el_pos.y - el_pos.ylo;
    out_elem.tag.z    = el_pos.z;
    out_elem.tag.xy_ok = (el_pos.x >= idx_t'(2)) && (el_pos.y - el_pos.ylo >= idx_t'(2));
    out_elem.tag.z_top = (el_pos.z == cfg.nz - idx_t'(1));
    out_elem.tag.last  = walk_is_last(cfg, 1'b1, idx_t'(1), el_pos);
  end

  always_ff @(posedge clk) begin
    if (rd_rsp_valid) fifo[wr_ptr] <= rd_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_pos   <= '0;
      el_pos   <= '0;
      rq_busy  <= 1'b0;
      busy     <= 1'b0;
      inflight <= '0;
      count    <= '0;
      wr_ptr   <= '0;
      rd_ptr   <= '0;
    end else if (start && !busy) begin
      rq_pos   <= walk_first(cfg, 1'b1);
      el_pos   <= walk_first(cfg, 1'b1);
      rq_busy  <= 1'b1;
      busy     <= 1'b1;
      inflight <= '0;
      count    <= '0;
      wr_ptr   <= '0;
      rd_ptr   <= '0;
    end else begin
      if (issue) begin
        rq_pos <= walk_next(cfg, 1'b1, idx_t'(WORD_DOUBLES), rq_pos);
        if (walk_is_last(cfg, 1'b1, idx_t'(WORD_DOUBLES), rq_pos)) rq_busy <= 1'b0;
      end
      if (rd_rsp_valid) wr_ptr <= wr_ptr + 1'b1;
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      inflight <= inflight + (PW+1)'(issue) - (PW+1)'(pop);
      count    <= count + (PW+1)'(rd_rsp_valid) - (PW+1)'(pop);
      if (take) begin
        el_pos <= walk_next(cfg, 1'b1, idx_t'(1), el_pos);
        if (out_elem.tag.last) busy <= 1'b0;
      end
    end
  end

  a_rsp_room: assert property (@(posedge clk) disable iff (!rst_n)
                               rd_rsp_valid |-> count < (PW+1)'(FIFO_D))
    else $error("field_reader: response without buffer room");

endmodule
