// 3D shift buffer: turns a stream of single grid values into a stream of
// complete 27-point stencils, one per accepted value.
//
// Values arrive plane by plane in x, column by column in y and bottom to top
// in z (the order of one chunk face after another). Three storage levels do
// the shifting, as in the paper's design:
//  * the 3D array of X-slices, each CHUNK_Y x MAX_NZ. The incoming value
//    replaces the value at (y, z) in the newest slice, the value it displaces
//    moves to the next slice, and so on, so the slices hold planes x, x-1 and
//    x-2 at (y, z);
//  * per slice, a 2D array of MAX_NZ x 3 lines sliding along y: the value
//    read from the slice enters the first line at z and the lines shift by
//    one, giving columns y, y-1 and y-2 at level z;
//  * per slice, a 3x3 register window: the row read from the 2D array enters
//    at the top and the rows shift down, giving levels z, z-1 and z-2.
// The newest slice and the newest line are the incoming value itself at the
// moment it is used, and the oldest slice and line are only written, never
// read back. This RTL therefore stores two slices and two lines and forwards
// the newest one directly; the 27 values it emits are the ones the
// three-slice, three-line arrangement of the paper would give.
//
// Emission. The value at (x, y, z) completes the stencil centred on
// (x-1, y-1, z-1). For z = 0 it instead completes nothing new, and that cycle
// carries out the column top of the previous column (centre k = nz-1), whose
// upper row is not used by the advection. So every column yields nz
// stencils, k = 0..nz-1, in order, one per cycle, and only the final column
// of a run needs one extra cycle: after the value tagged `last` the buffer
// inserts a single flush cycle. Stencils are emitted only for interior
// centres (tag xy_ok). k = 0 is emitted too, flagged `bottom`; its lower row
// is stale.
//
// Timing: the slice and line memories have a registered read (block RAM
// style, one read and one write port each). A value accepted in cycle t
// updates the window in cycle t+1 and its stencil is in the output register
// from cycle t+2. Initiation interval one while out_ready is high; a stall
// on the output holds the whole buffer. Reads and writes of the same
// address are at least nz cycles apart, so nz >= 2 is required.
// Handshakes are valid/ready: a transfer happens when both are high.
module shift_buffer_3d
  import adv_pkg::*;
#(
  parameter int unsigned CHUNK_Y = 256,  // y positions per face, halo included
  parameter int unsigned MAX_NZ  = 64    // maximum column height
) (
  input  logic         clk,
  input  logic         rst_n,
  input  idx_t         nz,         // column height of this run
  // input values
  input  logic         in_valid,
  output logic         in_ready,
  input  elem_t        in_elem,
  // output stencils
  output logic         out_valid,
  input  logic         out_ready,
  output stencil_msg_t out_msg
);

  localparam int unsigned DEPTH = CHUNK_Y * MAX_NZ;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned ZAW   = $clog2(MAX_NZ);

  // Stored slices: slice_a holds the previous plane, slice_b the one before.
  fp64_t slice_a [DEPTH];
  fp64_t slice_b [DEPTH];
  // Stored lines per x-slice c (0 = plane x-2, 1 = x-1, 2 = x):
  // line0 holds column y-1, line1 column y-2.
  fp64_t line0 [3][MAX_NZ];
  fp64_t line1 [3][MAX_NZ];
  // 3x3 windows [dx][dy][dz], dz = 2 is the newest row.
  stencil_t win;

  logic adv;         // the stage 1 work may complete this cycle
  logic flush_req;   // a flush cycle is owed after the `last` value
  // Stage 1 registers
  logic      s1_valid, s1_flush;
  elem_t     s1_elem;
  logic [AW-1:0]  s1_addr;
  logic [ZAW-1:0] s1_z;
  fp64_t     rd_a, rd_b;
  fp64_t     rd_l0 [3];
  fp64_t     rd_l1 [3];
  // column-top bookkeeping
  logic      pending;
  idx_t      pend_k;

  logic [AW-1:0]  in_addr;
  logic [ZAW-1:0] in_z;
  logic           accept;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv && !flush_req;
  assign accept   = in_valid && in_ready;
  assign in_z     = in_elem.tag.z[ZAW-1:0];
  assign in_addr  = AW'(in_elem.tag.y) * AW'(MAX_NZ) + AW'(in_z);

  // Memories: registered read at the incoming address, write at the address
  // of the value in stage 1.
  fp64_t col [3];      // column values of the three slices at (y, z)
  assign col[2] = s1_elem.v;
  assign col[1] = rd_a;
  assign col[0] = rd_b;

  logic s1_write;
  assign s1_write = adv && s1_valid && !s1_flush;

  always_ff @(posedge clk) begin
    if (accept) begin
      rd_a <= slice_a[in_addr];
      rd_b <= slice_b[in_addr];
    end
    if (s1_write) begin
      slice_a[s1_addr] <= s1_elem.v;
      slice_b[s1_addr] <= rd_a;
    end
  end

  for (genvar c = 0; c < 3; c++) begin : g_lines
    always_ff @(posedge clk) begin
      if (accept) begin
        rd_l0[c] <= line0[c][in_z];
        rd_l1[c] <= line1[c][in_z];
      end
      if (s1_write) begin
        line0[c][s1_z] <= col[c];
        line1[c][s1_z] <= rd_l0[c];
      end
    end
  end

  // Window after this cycle's shift.
  stencil_t win_next;
  always_comb begin
    for (int c = 0; c < 3; c++) begin
      for (int dy = 0; dy < 3; dy++) begin
        win_next[c][dy][0] = win[c][dy][1];
        win_next[c][dy][1] = win[c][dy][2];
      end
      win_next[c][2][2] = s1_flush ? '0 : col[c];
      win_next[c][1][2] = s1_flush ? '0 : rd_l0[c];
      win_next[c][0][2] = s1_flush ? '0 : rd_l1[c];
    end
  end

  // Emission decision for the value in stage 1.
  logic      emit;
  cell_tag_t emit_tag;
  always_comb begin
    emit_tag = '0;
    if (s1_flush || s1_elem.tag.z == '0) begin
      emit          = pending;
      emit_tag.k    = pend_k;
      emit_tag.top  = 1'b1;
      emit_tag.last = s1_flush;
    end else begin
      emit          = s1_elem.tag.xy_ok;
      emit_tag.k    = s1_elem.tag.z - idx_t'(1);
    end
    emit_tag.bottom = (emit_tag.k == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_flush  <= 1'b0;
      s1_elem   <= '0;
      s1_addr   <= '0;
      s1_z      <= '0;
      flush_req <= 1'b0;
      pending   <= 1'b0;
      pend_k    <= '0;
      win       <= '0;
      out_valid <= 1'b0;
      out_msg   <= '0;
    end else if (adv) begin
      // stage 1 completes
      if (s1_valid) begin
        win <= win_next;
        if (s1_flush) pending <= 1'b0;
        else begin
          pending <= s1_elem.tag.z_top && s1_elem.tag.xy_ok;
          pend_k  <= s1_elem.tag.z;
        end
      end
      out_valid <= s1_valid && emit;
      if (s1_valid && emit) begin
        out_msg.s   <= win_next;
        out_msg.tag <= emit_tag;
      end
      // stage 0: take a value or insert the flush cycle
      s1_valid <= accept || flush_req;
      s1_flush <= flush_req;
      if (accept) begin
        s1_elem <= in_elem;
        s1_addr <= in_addr;
        s1_z    <= in_z;
      end
      flush_req <= accept && in_elem.tag.last;
    end
  end

  a_nz_min: assert property (@(posedge clk) disable iff (!rst_n)
                             in_valid |-> (nz >= 2 && nz <= idx_t'(MAX_NZ)))
    else $error("shift_buffer_3d: column height out of range");
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                in_valid && !in_ready |=> in_valid && $stable(in_elem))
    else $error("shift_buffer_3d: input changed while stalled");

endmodule
