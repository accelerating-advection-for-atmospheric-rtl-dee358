// Testbench for replicate: a numbered message stream is copied to three
// consumers that stall at random and independently; each consumer must see
// every message exactly once and in order. Without stalls the stage must
// pass one message per cycle.
module tb_replicate;
  import adv_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic in_valid = 0, in_ready;
  stencil_msg_t in_msg;
  logic [2:0] out_valid, out_ready = 3'b111;
  stencil_msg_t out_msg [3];
  int nxt [3];
  int stall_pct = 0;

  replicate #(.N(3)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_msg, .out_valid, .out_ready, .out_msg);

  function automatic stencil_msg_t msg_of(input int n);
    stencil_msg_t m;
    m = '0;
    m.tag.k = idx_t'(n);
    m.s[1][1][1] = 64'(n) * 64'h9E37_79B9_7F4A_7C15;
    m.s[0][2][1] = ~64'(n);
    return m;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 3; i++)
      if (out_valid[i] && out_ready[i]) begin
        checks++;
        if (out_msg[i] !== msg_of(nxt[i])) begin
          failures++;
          if (failures < 10) $display("consumer %0d: got message %0d, expected %0d", i, out_msg[i].tag.k, nxt[i]);
        end
        nxt[i]++;
      end
  end

  always @(negedge clk)
    for (int i = 0; i < 3; i++) out_ready[i] <= ($urandom_range(0, 99) >= stall_pct);

  task automatic send(input int first, input int n);
    for (int m = first; m < first + n; m++) begin
      in_msg = msg_of(m);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = cycle;
    send(0, 100);
    checks++;
    if (cycle - t0 != 100) begin failures++; $display("100 messages took %0d cycles", cycle - t0); end
    stall_pct = 40;
    send(100, 500);
    stall_pct = 0;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (nxt[i] != 600) begin failures++; $display("consumer %0d saw %0d messages", i, nxt[i]); end
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
