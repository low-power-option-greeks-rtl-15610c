// stream_fifo: the stream channel between two dataflow stages (the
// equivalent of an HLS stream). A circular buffer of DEPTH entries with a
// valid/ready handshake on both sides.
//
// Interface: a word moves when valid and ready are both high on a rising
// clock edge. in_ready is high while the buffer has a free entry, out_valid
// while it holds one; out_data shows the oldest entry (first-word
// fall-through). A push and a pop may happen in the same cycle, also when the
// buffer is full, so a full FIFO still sustains one word per cycle. Latency
// from push to out_valid is one cycle.
//
// The default depth of 2 matches the usual default depth of an HLS stream;
// the source study does not state its stream depths.
module stream_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]   mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;
  logic           push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != (AW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= nxt(wr_ptr);
      if (pop)  rd_ptr <= nxt(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));
endmodule
