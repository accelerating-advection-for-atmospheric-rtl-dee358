// Replicate stage: copies every stencil of one field to the advection stages
// of all three fields (each advection needs the stencils of u, v and w).
//
// A message is offered to all N outputs at once. Outputs that take it are
// remembered in `sent`, and the input is released in the cycle the last
// outstanding output takes it, so a slow consumer only delays the input, it
// never duplicates or drops a message. With all outputs ready this passes
// one message per cycle with no added latency (combinational valid/ready),
// which keeps the initiation interval of one the paper aims for.
// The stage has no storage of its own: the copies on out_msg are wires from
// in_msg, and the logic is the valid/ready fork and its `sent` mask. The
// paper names the stage and its function only; the handshake is this
// design's choice.
module replicate
  import adv_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  stencil_msg_t in_msg,
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output stencil_msg_t out_msg [N]
);

  logic [N-1:0] sent;

  assign in_ready = &(sent | out_ready);
  for (genvar i = 0; i < N; i++) begin : g_out
    assign out_valid[i] = in_valid && !sent[i];
    assign out_msg[i]   = in_msg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sent <= '0;
    else if (in_valid && in_ready) sent <= '0;
    else sent <= sent | (out_valid & out_ready);
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid && !in_ready |=> in_valid && $stable(in_msg))
    else $error("replicate: input changed while not accepted");

endmodule
