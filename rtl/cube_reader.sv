// cube_reader: streams one input cube (corrpathcube or corrpathcube_p1)
// from external memory into the dataflow pipeline.
//
// The host has already reordered the cube into the order the kernel
// consumes it (batch, asset, timestep, path-in-batch, path fastest) and
// stored it as IEEE single precision values, 16 to a 512-bit word, the
// first value in bits [31:0]. The reader fetches consecutive words from
// `base`, converts each value to the on-chip fixed-point type and emits
// n_elems values, one per cycle. Bursting memory traffic in 512-bit words
// follows the source study; the request/response port, the prefetch depth
// and the float32 transfer format for a 32-bit datapath are this design's
// reading of it.
//
// Interface and timing: `start` (one cycle, while idle) latches base and
// n_elems. Read requests (rd_req_valid/rd_req_ready, word address) are
// issued while fewer than PREFETCH words are requested or buffered, so the
// response port (rd_resp_valid, in request order) needs no ready: the
// space for every response is reserved. With a memory latency below
// 16 * PREFETCH / 2 cycles the output sustains one value per cycle. `busy`
// stays high until the last value has left.
module cube_reader
  import greeks_pkg::*;
#(
  parameter int PREFETCH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  mem_addr_t base,
  input  logic [CNT_W-1:0] n_elems,
  output logic      busy,
  // memory read port
  output logic      rd_req_valid,
  input  logic      rd_req_ready,
  output mem_addr_t rd_req_addr,
  input  logic      rd_resp_valid,
  input  mem_word_t rd_resp_data,
  // element stream
  output logic      out_valid,
  input  logic      out_ready,
  output fix_t      out_data
);
  localparam int PW = $clog2(PREFETCH + 1);
  localparam int IW = (PREFETCH > 1) ? $clog2(PREFETCH) : 1;

  mem_word_t        buf_q [PREFETCH];
  logic [IW-1:0]    wr_idx, rd_idx;
  logic [PW-1:0]    n_buf, n_inflight;
  logic [CNT_W-1:0] words_left_req;   // words still to request
  logic [CNT_W-1:0] elems_left;       // values still to emit
  logic [3:0]       lane;
  mem_addr_t        next_addr;
  logic             req_fire, pop_word, out_fire;

  assign busy         = (elems_left != '0);
  assign rd_req_valid = (words_left_req != '0) && (32'(n_buf) + 32'(n_inflight) < PREFETCH);
  assign rd_req_addr  = next_addr;
  assign req_fire     = rd_req_valid && rd_req_ready;

  assign out_valid = (n_buf != '0) && (elems_left != '0);
  assign out_data  = f32_to_fix(buf_q[rd_idx][32*lane +: 32]);
  assign out_fire  = out_valid && out_ready;
  assign pop_word  = out_fire && ((lane == 4'(LANES - 1)) || (elems_left == 1));

  function automatic logic [IW-1:0] nxt(input logic [IW-1:0] p);
    return (p == IW'(PREFETCH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_idx         <= '0;
      rd_idx         <= '0;
      n_buf          <= '0;
      n_inflight     <= '0;
      words_left_req <= '0;
      elems_left     <= '0;
      lane           <= '0;
      next_addr      <= '0;
    end else if (start && !busy) begin
      wr_idx         <= '0;
      rd_idx         <= '0;
      n_buf          <= '0;
      n_inflight     <= '0;
      words_left_req <= (n_elems + CNT_W'(LANES - 1)) / CNT_W'(LANES);
      elems_left     <= n_elems;
      lane           <= '0;
      next_addr      <= base;
    end else begin
      if (req_fire) begin
        next_addr      <= next_addr + 1'b1;
        words_left_req <= words_left_req - 1'b1;
      end
      if (rd_resp_valid) wr_idx <= nxt(wr_idx);
      n_inflight <= n_inflight + PW'(req_fire) - PW'(rd_resp_valid);
      n_buf      <= n_buf + PW'(rd_resp_valid) - PW'(pop_word);
      if (out_fire) begin
        elems_left <= elems_left - 1'b1;
        lane       <= pop_word ? '0 : lane + 1'b1;
      end
      if (pop_word) rd_idx <= nxt(rd_idx);
    end
  end

  always_ff @(posedge clk) begin
    if (rd_resp_valid) buf_q[wr_idx] <= rd_resp_data;
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> n_inflight != '0);
endmodule
