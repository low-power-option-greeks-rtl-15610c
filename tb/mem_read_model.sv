// mem_read_model: behavioural model of one read channel of the card's
// external memory (HBM2 / DDR behind the platform shell), for testbenches
// only. Word-addressed 512-bit storage, filled by the testbench with put().
// Requests are accepted when rd_req_ready is high, which is randomly
// withheld STALL_PCT percent of the cycles; each response returns after
// LAT cycles, in request order. Unwritten words read as zero. While rst_n
// is low the channel accepts nothing and drops anything queued, like the
// memory side of a system held in reset.
module mem_read_model
  import greeks_pkg::*;
#(
  parameter int LAT       = 10,
  parameter int STALL_PCT = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      rd_req_valid,
  output logic      rd_req_ready,
  input  mem_addr_t rd_req_addr,
  output logic      rd_resp_valid,
  output mem_word_t rd_resp_data
);
  mem_word_t   mem [mem_addr_t];
  longint      cyc = 0;
  longint      due_q [$];
  mem_addr_t   addr_q [$];
  int          stall_pct = STALL_PCT;
  longint      n_stalls = 0;

  function automatic void put(input mem_addr_t a, input mem_word_t d);
    mem[a] = d;
  endfunction

  initial begin
    rd_req_ready  = 1'b1;
    rd_resp_valid = 1'b0;
    rd_resp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      due_q.delete();
      addr_q.delete();
    end else if (rd_req_valid && rd_req_ready) begin
      due_q.push_back(cyc + longint'(LAT));
      addr_q.push_back(rd_req_addr);
    end
    if (rd_req_valid && !rd_req_ready) n_stalls <= n_stalls + 1;
    if (rst_n && due_q.size() > 0 && due_q[0] <= cyc) begin
      rd_resp_valid <= 1'b1;
      rd_resp_data  <= mem.exists(addr_q[0]) ? mem[addr_q[0]] : '0;
      void'(due_q.pop_front());
      void'(addr_q.pop_front());
    end else begin
      rd_resp_valid <= 1'b0;
    end
    rd_req_ready <= ($urandom_range(99) >= stall_pct);
  end
endmodule
