// Behavioural model of the board memory (HBM2 or DDR) as the kernel sees
// it: NP read ports and NP write ports of 512-bit words. Not synthesizable.
// Reads return in order LAT cycles after the request; requests and writes
// are refused at random, STALL_PCT percent of cycles, to exercise the
// kernel's flow control. Storage is sparse; words never written read as 0.
module mem_model
  import adv_pkg::*;
#(
  parameter int NP        = 3,
  parameter int LAT       = 6,
  parameter int STALL_PCT = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      rd_req_valid [NP],
  output logic      rd_req_ready [NP],
  input  addr_t     rd_req_addr  [NP],
  output logic      rd_rsp_valid [NP],
  output mem_word_t rd_rsp_data  [NP],
  input  logic      wr_valid [NP],
  output logic      wr_ready [NP],
  input  addr_t     wr_addr  [NP],
  input  mem_word_t wr_data  [NP]
);

  mem_word_t mem [addr_t];
  int stall_pct = STALL_PCT;
  int rd_stalls = 0, wr_stalls = 0, writes = 0;

  typedef struct { longint due; mem_word_t data; } rsp_t;
  rsp_t q [NP][$];
  longint cycle = 0;

  function automatic mem_word_t peek(input addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(input addr_t a, input mem_word_t d);
    mem[a] = d;
  endfunction

  initial begin
    for (int p = 0; p < NP; p++) begin
      rd_req_ready[p] = 0; wr_ready[p] = 0; rd_rsp_valid[p] = 0; rd_rsp_data[p] = '0;
    end
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int p = 0; p < NP; p++) begin
      if (rst_n && rd_req_valid[p] && rd_req_ready[p])
        q[p].push_back('{cycle + LAT, peek(rd_req_addr[p])});
      if (rst_n && wr_valid[p] && wr_ready[p]) begin
        mem[wr_addr[p]] = wr_data[p];
        writes++;
      end
      if (rst_n && rd_req_valid[p] && !rd_req_ready[p]) rd_stalls++;
      if (rst_n && wr_valid[p] && !wr_ready[p]) wr_stalls++;
    end
  end

  // drive outputs after the edge
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      rd_req_ready[p] <= ($urandom_range(0, 99) >= stall_pct);
      wr_ready[p]     <= ($urandom_range(0, 99) >= stall_pct);
      if (q[p].size() != 0 && q[p][0].due <= cycle) begin
        rd_rsp_valid[p] <= 1;
        rd_rsp_data[p]  <= q[p].pop_front().data;
      end else begin
        rd_rsp_valid[p] <= 0;
      end
    end
  end

endmodule
