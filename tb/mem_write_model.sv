// mem_write_model: behavioural model of one write channel of the card's
// external memory, for testbenches only. Stores 512-bit words under their
// byte strobes. wr_ready is withheld at random STALL_PCT percent of the
// cycles and, if PAUSE_LEN > 0, for PAUSE_LEN consecutive cycles once every
// PAUSE_EVERY cycles (long back-pressure events). get() reads a word back.
// Nothing is written while rst_n is low.
module mem_write_model
  import greeks_pkg::*;
#(
  parameter int STALL_PCT   = 0,
  parameter int PAUSE_EVERY = 0,
  parameter int PAUSE_LEN   = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      wr_valid,
  output logic      wr_ready,
  input  mem_addr_t wr_addr,
  input  mem_word_t wr_data,
  input  logic [MEM_W/8-1:0] wr_strb
);
  mem_word_t mem [mem_addr_t];
  longint    cyc = 0;
  int        stall_pct   = STALL_PCT;
  int        pause_every = PAUSE_EVERY;
  longint    n_writes = 0, n_partial = 0, n_stalls = 0;

  function automatic mem_word_t get(input mem_addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void clear();
    mem.delete();
    n_writes  = 0;
    n_partial = 0;
  endfunction

  initial wr_ready = 1'b1;

  always @(posedge clk) begin
    mem_word_t w;
    cyc <= cyc + 1;
    if (rst_n && wr_valid && wr_ready) begin
      w = mem.exists(wr_addr) ? mem[wr_addr] : '0;
      for (int i = 0; i < MEM_W / 8; i++)
        if (wr_strb[i]) w[8*i +: 8] = wr_data[8*i +: 8];
      mem[wr_addr] = w;
      n_writes++;
      if (wr_strb != '1) n_partial++;
    end
    if (wr_valid && !wr_ready) n_stalls <= n_stalls + 1;
    if (pause_every > 0 && (cyc % longint'(pause_every)) < longint'(PAUSE_LEN)) wr_ready <= 1'b0;
    else wr_ready <= ($urandom_range(99) >= stall_pct);
  end
endmodule
