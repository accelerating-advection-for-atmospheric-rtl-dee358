// One field's lane of the write stage: packs eight consecutive source terms
// into a 512-bit word and writes it to its place in external memory.
//
// Results arrive in the walk order of face_walker_pkg restricted to interior
// cells (each column bottom to top, nz values). The lane keeps its own
// position, so addresses do not travel with the data; the cell tag is
// checked against that position by an assertion. A full word is offered on
// the write port; while it waits, one more value can still be taken only if
// the word is not full, so the lane sustains one value per cycle as long as
// the memory accepts one word every eight cycles. busy falls when the final
// word has been accepted.
module field_writer
  import adv_pkg::*;
  import face_walker_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  cfg_t      cfg,
  input  addr_t     base,
  output logic      busy,
  // result stream
  input  logic      in_valid,
  output logic      in_ready,
  input  result_t   in_res,
  // memory write port
  output logic      wr_valid,
  input  logic      wr_ready,
  output addr_t     wr_addr,
  output mem_word_t wr_data
);

  pos_t      pos;        // position of the next value to arrive
  pos_t      word_pos;   // position of the word on the write port
  logic      word_last;
  logic [3:0] fill;
  mem_word_t acc;

  logic       take, word_done;
  logic [3:0] fill_next;
  assign word_done = take && (fill == 4'(WORD_DOUBLES - 1));
  assign fill_next = !take ? fill : (word_done ? 4'd0 : fill + 4'd1);
  assign in_ready = busy && !(wr_valid && !wr_ready && fill == 4'(WORD_DOUBLES - 1));
  assign take     = in_valid && in_ready;
  assign wr_addr  = word_addr(cfg, base, word_pos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos       <= '0;
      word_pos  <= '0;
      word_last <= 1'b0;
      fill      <= '0;
      acc       <= '0;
      wr_valid  <= 1'b0;
      wr_data   <= '0;
      busy      <= 1'b0;
    end else if (start && !busy) begin
      pos       <= walk_first(cfg, 1'b0);
      fill      <= '0;
      wr_valid  <= 1'b0;
      busy      <= 1'b1;
    end else begin
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        if (word_last) busy <= 1'b0;
      end
      if (take) begin
        acc[64*fill[2:0] +: 64] <= in_res.v;
        pos <= walk_next(cfg, 1'b0, idx_t'(1), pos);
        if (word_done) begin
          // word complete: hand it to the write port
          wr_valid  <= 1'b1;
          wr_data   <= {in_res.v, acc[64*(WORD_DOUBLES-1)-1:0]};
          word_pos  <= pos;
          word_last <= walk_is_last(cfg, 1'b0, idx_t'(1), pos);
        end
      end
      fill <= fill_next;
    end
  end

  a_order: assert property (@(posedge clk) disable iff (!rst_n)
                            take |-> in_res.tag.k == pos.z)
    else $error("field_writer: result out of order");

endmodule
