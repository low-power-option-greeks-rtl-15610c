// ls_path_reduction: the longstaffSchwartzPathReduction dataflow stage with
// its double (ping-pong) buffer. For each batch of paths it computes, for
// every (timestep, path), the maximum asset price over all assets, and
// streams the batch's n_steps x n_paths maxima out in (timestep, path)
// order, path fastest.
//
// How it works: asset prices arrive in the order (asset, timestep, path),
// so the maxima of one batch are built up in an on-chip buffer of
// timesteps x paths entries, read and updated as each asset's values stream
// in: the first asset writes its value, every later asset writes
// max(stored, new). There are two such buffers (UltraRAM in the source
// study). The reduction fills one while the other, holding the previous
// batch's finished maxima, is streamed out, and the two swap roles at every
// batch boundary, so reduction and output run concurrently from the second
// batch on. A buffer is "full" from the write of its batch's last element
// until its last read has been issued; the reduction waits at the start of
// a batch until the buffer it is about to fill is free, and the output side
// waits until the buffer it is about to drain is full.
//
// The reduce path is a two-cycle read-modify-write on a synchronous RAM:
// the stored value of an address is read in the cycle the element is
// accepted and written back in the next. The same address is touched again
// only n_steps x n_paths elements later. The output path reads one address
// per cycle into a three-entry stream FIFO, using credits so that a read is
// only issued when the FIFO has room for its data; three credits cover the
// three-cycle loop from read to FIFO pop, so the output sustains one value
// per cycle.
//
// Interface: loop bounds held stable during a run; `start` begins a run.
// in_* takes one asset price per cycle (except while waiting for a free
// buffer), out_* emits one maximum per cycle. Buffer contents need no
// reset. BATCH and MAX_STEPS size the buffers (500 paths and 1260
// timesteps in the source study).
module ls_path_reduction
  import greeks_pkg::*;
#(
  parameter int BATCH     = 500,
  parameter int MAX_STEPS = 1260
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_assets,
  input  logic [15:0] n_steps,
  input  logic [15:0] n_paths,
  input  logic [15:0] n_batches,
  output logic        busy,
  input  logic        in_valid,
  output logic        in_ready,
  input  fix_t        in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fix_t        out_data
);
  localparam int DEPTH = BATCH * MAX_STEPS;
  localparam int AW    = $clog2(DEPTH);

  // ---------------- buffers ----------------
  logic [1:0]    full;
  logic          we     [2];
  logic [AW-1:0] waddr  [2];
  fix_t          wdata  [2];
  logic [AW-1:0] raddr  [2];
  fix_t          rdata  [2];

  // ---------------- reduce side ----------------
  logic          f_active, accept, f_last;
  logic [15:0]   f_path, f_tstep, f_asset;
  logic          fill_sel;
  logic [AW-1:0] f_addr;
  logic          asset_done, batch_done;
  logic          s1_valid, s1_sel, s1_first, s1_batch_done;
  logic [AW-1:0] s1_addr;
  fix_t          s1_x, s1_max;

  // ---------------- output side ----------------
  logic          drain_sel, d_issue, d_last_issue, r_valid, r_sel;
  logic [AW-1:0] d_addr;
  logic [31:0]   n_elem;
  logic [1:0]    occ;              // reads in flight + words in the FIFO
  logic          fifo_in_ready;

  loop_counter u_loops (
    .clk, .rst_n, .start, .step(accept),
    .n_assets, .n_steps, .n_paths, .n_batches,
    .active(f_active), .path(f_path), .tstep(f_tstep), .asset(f_asset),
    .batch(), .last(f_last)
  );

  assign in_ready   = f_active && !full[fill_sel];
  assign accept     = in_valid && in_ready;
  assign asset_done = (f_path == n_paths - 1'b1) && (f_tstep == n_steps - 1'b1);
  assign batch_done = asset_done && (f_asset == n_assets - 1'b1);

  // reduce, stage 1: combine with the stored maximum and write back
  assign s1_max = s1_first ? s1_x : fmax(rdata[s1_sel], s1_x);

  // output side: drain the full buffer one address per cycle
  assign d_issue      = full[drain_sel] && (occ < 2'd3);
  assign d_last_issue = d_issue && (32'(d_addr) == n_elem - 1);

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      we[i]    = s1_valid && (s1_sel == 1'(i));
      waddr[i] = s1_addr;
      wdata[i] = s1_max;
      raddr[i] = (full[i] && (drain_sel == 1'(i))) ? d_addr : f_addr;
    end
  end

  for (genvar i = 0; i < 2; i++) begin : g_buf
    sdp_ram #(.W(FIX_W), .DEPTH(DEPTH)) u_buf (
      .clk, .we(we[i]), .waddr(waddr[i]), .wdata(wdata[i]),
      .raddr(raddr[i]), .rdata(rdata[i])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full          <= '0;
      fill_sel      <= 1'b0;
      drain_sel     <= 1'b0;
      f_addr        <= '0;
      s1_valid      <= 1'b0;
      s1_sel        <= 1'b0;
      s1_first      <= 1'b0;
      s1_batch_done <= 1'b0;
      s1_addr       <= '0;
      s1_x          <= '0;
      d_addr        <= '0;
      n_elem        <= '0;
      occ           <= '0;
      r_valid       <= 1'b0;
      r_sel         <= 1'b0;
    end else begin
      if (start && !f_active) begin
        n_elem   <= 32'(n_steps) * 32'(n_paths);
        f_addr   <= '0;
        fill_sel <= 1'b0;
        drain_sel <= 1'b0;
      end
      // reduce, stage 0: read the stored maximum
      s1_valid <= accept;
      if (accept) begin
        s1_sel        <= fill_sel;
        s1_addr       <= f_addr;
        s1_x          <= in_data;
        s1_first      <= (f_asset == '0);
        s1_batch_done <= batch_done;
        f_addr        <= asset_done ? '0 : f_addr + 1'b1;
        if (batch_done) fill_sel <= !fill_sel;
      end
      // buffer hand-over
      if (s1_valid && s1_batch_done) full[s1_sel] <= 1'b1;
      if (d_last_issue) begin
        full[drain_sel] <= 1'b0;
        drain_sel       <= !drain_sel;
      end
      // output side
      if (d_issue) d_addr <= d_last_issue ? '0 : d_addr + 1'b1;
      r_valid <= d_issue;
      r_sel   <= drain_sel;
      occ     <= occ + 2'(d_issue) - 2'(out_valid && out_ready);
    end
  end

  stream_fifo #(.W(FIX_W), .DEPTH(3)) u_out_fifo (
    .clk, .rst_n,
    .in_valid(r_valid), .in_ready(fifo_in_ready), .in_data(rdata[r_sel]),
    .out_valid, .out_ready, .out_data(out_data)
  );

  assign busy = f_active || s1_valid || (full != '0) || (occ != '0);

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n)
    r_valid |-> fifo_in_ready);
  a_batch_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (n_paths <= 16'(BATCH)) && (n_steps <= 16'(MAX_STEPS)));
endmodule
