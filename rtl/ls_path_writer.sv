// ls_path_writer: the writeLongstaffSchwartzPath dataflow stage. It takes
// the stream of reduced path maxima, converts each value back to IEEE
// single precision for the host and packs 16 values into each 512-bit
// memory word (first value in bits [31:0]), written to consecutive word
// addresses from `base`. The final word of a run may be partial; its
// byte strobe marks the valid lanes.
//
// How it works: values are collected in an assembly register; a completed
// word moves to a pending register that is offered on the write port while
// the next word is being assembled, so the input keeps one value per cycle
// as long as the memory accepts one word every 16 cycles.
//
// Interface and timing: `start` (while idle) latches base and n_elems.
// wr_valid/wr_ready is a write port with address, 512-bit data and 64-bit
// byte strobe. `busy` falls once the last word has been accepted by the
// memory, which is the kernel's completion point. 512-bit bursting follows
// the source study; the port itself is this design's choice.
module ls_path_writer
  import greeks_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  mem_addr_t        base,
  input  logic [CNT_W-1:0] n_elems,
  output logic             busy,
  input  logic             in_valid,
  output logic             in_ready,
  input  fix_t             in_data,
  output logic             wr_valid,
  input  logic             wr_ready,
  output mem_addr_t        wr_addr,
  output mem_word_t        wr_data,
  output logic [MEM_W/8-1:0] wr_strb
);
  mem_word_t          acc;
  logic [3:0]         lane;
  logic [CNT_W-1:0]   elems_left;
  logic               pending;
  mem_addr_t          next_addr;
  logic               in_fire, word_done;
  logic [MEM_W/8-1:0] strb_next;

  assign in_ready  = (elems_left != '0) && (!pending || wr_ready);
  assign in_fire   = in_valid && in_ready;
  assign word_done = in_fire && ((lane == 4'(LANES - 1)) || (elems_left == 1));
  assign wr_valid  = pending;
  assign busy      = (elems_left != '0) || pending;

  always_comb begin
    strb_next = '0;
    for (int i = 0; i < LANES; i++)
      if (i <= int'(lane)) strb_next[4*i +: 4] = 4'hf;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc        <= '0;
      lane       <= '0;
      elems_left <= '0;
      pending    <= 1'b0;
      next_addr  <= '0;
      wr_addr    <= '0;
      wr_data    <= '0;
      wr_strb    <= '0;
    end else if (start && !busy) begin
      acc        <= '0;
      lane       <= '0;
      elems_left <= n_elems;
      next_addr  <= base;
    end else begin
      if (wr_valid && wr_ready) pending <= 1'b0;
      if (in_fire) begin
        elems_left <= elems_left - 1'b1;
        if (word_done) begin
          wr_data   <= acc | (MEM_W'(fix_to_f32(in_data)) << (32 * lane));
          wr_strb   <= strb_next;
          wr_addr   <= next_addr;
          next_addr <= next_addr + 1'b1;
          pending   <= 1'b1;
          acc       <= '0;
          lane      <= '0;
        end else begin
          acc  <= acc | (MEM_W'(fix_to_f32(in_data)) << (32 * lane));
          lane <= lane + 1'b1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));
endmodule
