// tb_greeks_accel: end-to-end test of the accelerator at its default
// parameters (six kernels, 500-path batches, 1260-timestep buffers).
//
// Every kernel gets its own random input cubes (normal samples stored as
// float32, 16 per 512-bit word) and its own memory models, and all six run
// concurrently. Two complete operations are run:
//   1. 3 assets x 6 timesteps x 500 paths x 3 batches per kernel, with
//      random read back-pressure and a write port that accepts only 2% of
//      the time, so that draining a buffer is slower than filling the
//      other: the reduction must wait for a free buffer and the whole
//      stream stalls back to the readers;
//   2. 2 assets x 5 timesteps x 200 paths x 3 batches, no back-pressure,
//      where the kernel must process one element per cycle: the run may
//      take at most (elements + one batch drain + 200) cycles.
// The written results (per batch, timestep, path: maximum asset price over
// assets) are compared with a double-precision reference of the Andersen QE
// scheme. Paths whose reference passes near the QE switch point psi = 1.5
// may legitimately take the other branch in fixed point; their results
// from that step on are not compared (at most 25% may be skipped). The
// tolerance is 1.5% of the price, the deviation the source study reports
// for this fixed-point format; the largest error seen is printed.
// Each mechanism of the design is counted and must occur at least once.
module tb_greeks_accel;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  localparam int NK = 6;               // the top's default NUM_KERNELS
  localparam int NA = 3;               // assets configured

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic         cfg_we = 1'b0;
  logic [15:0]  cfg_addr = '0;
  heston_cfg_t  cfg_data = '0;
  logic         start [NK];
  kernel_args_t args  [NK];
  logic         busy  [NK];
  logic         done  [NK];
  logic         zv_req_valid [NK], zv_req_ready [NK], zv_resp_valid [NK];
  mem_addr_t    zv_req_addr [NK];
  mem_word_t    zv_resp_data [NK];
  logic         zs_req_valid [NK], zs_req_ready [NK], zs_resp_valid [NK];
  mem_addr_t    zs_req_addr [NK];
  mem_word_t    zs_resp_data [NK];
  logic         wr_valid [NK], wr_ready [NK];
  mem_addr_t    wr_addr [NK];
  mem_word_t    wr_data [NK];
  logic [MEM_W/8-1:0] wr_strb [NK];

  greeks_accel dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .start, .args, .busy, .done,
    .zv_req_valid, .zv_req_ready, .zv_req_addr, .zv_resp_valid, .zv_resp_data,
    .zs_req_valid, .zs_req_ready, .zs_req_addr, .zs_resp_valid, .zs_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

  // mechanism counters
  longint n_quad = 0, n_expb = 0, n_zero_var = 0, n_cache_var = 0, n_cache_lp = 0;
  longint n_overlap = 0, n_buf_wait = 0, n_pipe_stall = 0, n_all_busy = 0;

  for (genvar k = 0; k < NK; k++) begin : g_mem
    mem_read_model  #(.LAT(12), .STALL_PCT(10)) u_zv (
      .clk, .rst_n, .rd_req_valid(zv_req_valid[k]), .rd_req_ready(zv_req_ready[k]),
      .rd_req_addr(zv_req_addr[k]), .rd_resp_valid(zv_resp_valid[k]),
      .rd_resp_data(zv_resp_data[k]));
    mem_read_model  #(.LAT(9), .STALL_PCT(10)) u_zs (
      .clk, .rst_n, .rd_req_valid(zs_req_valid[k]), .rd_req_ready(zs_req_ready[k]),
      .rd_req_addr(zs_req_addr[k]), .rd_resp_valid(zs_resp_valid[k]),
      .rd_resp_data(zs_resp_data[k]));
    mem_write_model #(.STALL_PCT(98)) u_wr (
      .clk, .rst_n, .wr_valid(wr_valid[k]), .wr_ready(wr_ready[k]), .wr_addr(wr_addr[k]),
      .wr_data(wr_data[k]), .wr_strb(wr_strb[k]));

    always @(posedge clk) if (rst_n) begin
      if (dut.g_kernel[k].u_kernel.u_variance.accept) begin
        if (dut.g_kernel[k].u_kernel.u_variance.exp_branch) n_expb++;
        else n_quad++;
        if (dut.g_kernel[k].u_kernel.u_variance.tstep != 0) n_cache_var++;
      end
      if (dut.g_kernel[k].u_kernel.u_variance.out_valid &&
          dut.g_kernel[k].u_kernel.u_variance.out_ready &&
          dut.g_kernel[k].u_kernel.u_variance.out_data.v_next == '0) n_zero_var++;
      if (dut.g_kernel[k].u_kernel.u_log_price.accept &&
          dut.g_kernel[k].u_kernel.u_log_price.tstep != 0) n_cache_lp++;
      if (dut.g_kernel[k].u_kernel.u_ls_reduce.accept &&
          dut.g_kernel[k].u_kernel.u_ls_reduce.d_issue) n_overlap++;
      if (dut.g_kernel[k].u_kernel.u_ls_reduce.in_valid &&
          dut.g_kernel[k].u_kernel.u_ls_reduce.f_active &&
          !dut.g_kernel[k].u_kernel.u_ls_reduce.in_ready) n_buf_wait++;
      if (dut.g_kernel[k].u_kernel.u_variance.z_valid &&
          !dut.g_kernel[k].u_kernel.u_variance.pipe_ready) n_pipe_stall++;
    end
  end

  always @(posedge clk) begin
    bit all;
    all = 1'b1;
    for (int k = 0; k < NK; k++) all &= busy[k];
    if (all) n_all_busy++;
  end

  heston_cfg_t cfgs [NA];

  // run one operation: A assets, T steps, P paths per batch, NB batches
  task automatic run_op(input int A, input int T, input int P, input int NB,
                        input bit stalls, input mem_addr_t base);
    real    zv [NK][], zs [NK][];
    real    ref_mx [NK][];
    bit     unc [NK][];
    int     n_in, n_out, n_skip, n_cmp;
    longint t0, t1 [NK];
    real    v [], lns [], vn, lnsn, psi, s, d, err, max_rel;
    bit     bad [];

    n_in  = NB * A * T * P;
    n_out = NB * T * P;
    n_skip = 0; n_cmp = 0; max_rel = 0.0;

    // ---- input data and reference ----
    for (int k = 0; k < NK; k++) begin
      zv[k] = new[n_in];
      zs[k] = new[n_in];
      ref_mx[k] = new[n_out];
      unc[k] = new[n_out];
      for (int e = 0; e < n_in; e++) begin
        zv[k][e] = f322r(r2f32(gauss()));
        zs[k][e] = f322r(r2f32(gauss()));
      end
      for (int o = 0; o < n_out; o++) begin
        ref_mx[k][o] = -1.0;
        unc[k][o] = 1'b0;
      end
      v = new[P]; lns = new[P]; bad = new[P];
      for (int b = 0; b < NB; b++)
        for (int a = 0; a < A; a++) begin
          for (int p = 0; p < P; p++) begin
            v[p] = fix2r(cfgs[a].v0); lns[p] = fix2r(cfgs[a].ln_s0); bad[p] = 1'b0;
          end
          for (int t = 0; t < T; t++)
            for (int p = 0; p < P; p++) begin
              int e, o;
              e = ((b * A + a) * T + t) * P + p;
              o = (b * T + t) * P + p;
              vn = ref_var_step(cfgs[a], v[p], zv[k][e], psi);
              if (psi > 1.45 && psi < 1.55) bad[p] = 1'b1;
              lnsn = ref_lns_step(cfgs[a], lns[p], v[p], vn, zs[k][e]);
              v[p] = vn; lns[p] = lnsn;
              s = $exp(lnsn);
              if (s > ref_mx[k][o]) ref_mx[k][o] = s;
              if (bad[p]) unc[k][o] = 1'b1;
            end
        end
      // store the cubes, 16 float32 per word
      for (int w = 0; w < (n_in + LANES - 1) / LANES; w++) begin
        mem_word_t wv, ws;
        wv = '0; ws = '0;
        for (int l = 0; l < LANES; l++)
          if (w * LANES + l < n_in) begin
            wv[32*l +: 32] = r2f32(zv[k][w * LANES + l]);
            ws[32*l +: 32] = r2f32(zs[k][w * LANES + l]);
          end
        case (k)
          0: begin g_mem[0].u_zv.put(base + w, wv); g_mem[0].u_zs.put(base + 32'h0100_0000 + w, ws); end
          1: begin g_mem[1].u_zv.put(base + w, wv); g_mem[1].u_zs.put(base + 32'h0100_0000 + w, ws); end
          2: begin g_mem[2].u_zv.put(base + w, wv); g_mem[2].u_zs.put(base + 32'h0100_0000 + w, ws); end
          3: begin g_mem[3].u_zv.put(base + w, wv); g_mem[3].u_zs.put(base + 32'h0100_0000 + w, ws); end
          4: begin g_mem[4].u_zv.put(base + w, wv); g_mem[4].u_zs.put(base + 32'h0100_0000 + w, ws); end
          default: begin g_mem[5].u_zv.put(base + w, wv); g_mem[5].u_zs.put(base + 32'h0100_0000 + w, ws); end
        endcase
      end
    end

    // ---- memory behaviour ----
    g_mem[0].u_zv.stall_pct = stalls ? 10 : 0;  g_mem[0].u_zs.stall_pct = stalls ? 10 : 0;
    g_mem[1].u_zv.stall_pct = stalls ? 10 : 0;  g_mem[1].u_zs.stall_pct = stalls ? 10 : 0;
    g_mem[2].u_zv.stall_pct = stalls ? 10 : 0;  g_mem[2].u_zs.stall_pct = stalls ? 10 : 0;
    g_mem[3].u_zv.stall_pct = stalls ? 10 : 0;  g_mem[3].u_zs.stall_pct = stalls ? 10 : 0;
    g_mem[4].u_zv.stall_pct = stalls ? 10 : 0;  g_mem[4].u_zs.stall_pct = stalls ? 10 : 0;
    g_mem[5].u_zv.stall_pct = stalls ? 10 : 0;  g_mem[5].u_zs.stall_pct = stalls ? 10 : 0;
    g_mem[0].u_wr.stall_pct = stalls ? 98 : 0;  g_mem[0].u_wr.pause_every = 0;
    g_mem[1].u_wr.stall_pct = stalls ? 98 : 0;  g_mem[1].u_wr.pause_every = 0;
    g_mem[2].u_wr.stall_pct = stalls ? 98 : 0;  g_mem[2].u_wr.pause_every = 0;
    g_mem[3].u_wr.stall_pct = stalls ? 98 : 0;  g_mem[3].u_wr.pause_every = 0;
    g_mem[4].u_wr.stall_pct = stalls ? 98 : 0;  g_mem[4].u_wr.pause_every = 0;
    g_mem[5].u_wr.stall_pct = stalls ? 98 : 0;  g_mem[5].u_wr.pause_every = 0;
    repeat (3) @(posedge clk);

    // ---- start all kernels ----
    for (int k = 0; k < NK; k++) begin
      args[k].n_assets  = 16'(A);
      args[k].n_steps   = 16'(T);
      args[k].n_paths   = 16'(P);
      args[k].n_batches = 16'(NB);
      args[k].zv_base   = base;
      args[k].zs_base   = base + 32'h0100_0000;
      args[k].out_base  = base + 32'h0200_0000;
      start[k] = 1'b1;
    end
    t0 = 0;
    @(posedge clk);
    for (int k = 0; k < NK; k++) begin
      start[k] = 1'b0;
      t1[k] = 0;
    end
    begin
      int nd;
      longint c;
      nd = 0; c = 1;
      while (nd < NK) begin
        @(posedge clk);
        c++;
        for (int k = 0; k < NK; k++) if (done[k]) begin t1[k] = c; nd++; end
      end
    end

    // ---- compare results ----
    for (int k = 0; k < NK; k++) begin
      for (int o = 0; o < n_out; o++) begin
        mem_word_t w;
        case (k)
          0: w = g_mem[0].u_wr.get(base + 32'h0200_0000 + o / LANES);
          1: w = g_mem[1].u_wr.get(base + 32'h0200_0000 + o / LANES);
          2: w = g_mem[2].u_wr.get(base + 32'h0200_0000 + o / LANES);
          3: w = g_mem[3].u_wr.get(base + 32'h0200_0000 + o / LANES);
          4: w = g_mem[4].u_wr.get(base + 32'h0200_0000 + o / LANES);
          default: w = g_mem[5].u_wr.get(base + 32'h0200_0000 + o / LANES);
        endcase
        d = f322r(w[32*(o % LANES) +: 32]);
        if (unc[k][o]) begin n_skip++; continue; end
        n_cmp++;
        err = (d > ref_mx[k][o]) ? d - ref_mx[k][o] : ref_mx[k][o] - d;
        if (err / ref_mx[k][o] > max_rel) max_rel = err / ref_mx[k][o];
        checks++;
        if (err > 1.5e-2 * ref_mx[k][o]) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH kernel %0d out %0d: got %f expected %f", k, o, d, ref_mx[k][o]);
        end
      end
      // the word after the last result must be untouched
      checks++;
      begin
        mem_word_t w;
        case (k)
          0: w = g_mem[0].u_wr.get(base + 32'h0200_0000 + (n_out + LANES - 1) / LANES);
          1: w = g_mem[1].u_wr.get(base + 32'h0200_0000 + (n_out + LANES - 1) / LANES);
          2: w = g_mem[2].u_wr.get(base + 32'h0200_0000 + (n_out + LANES - 1) / LANES);
          3: w = g_mem[3].u_wr.get(base + 32'h0200_0000 + (n_out + LANES - 1) / LANES);
          4: w = g_mem[4].u_wr.get(base + 32'h0200_0000 + (n_out + LANES - 1) / LANES);
          default: w = g_mem[5].u_wr.get(base + 32'h0200_0000 + (n_out + LANES - 1) / LANES);
        endcase
        if (w != '0) begin
          failures++;
          $display("kernel %0d wrote beyond its result block", k);
        end
      end
      if (!stalls) begin
        checks++;
        if (t1[k] > longint'(n_in) + longint'(T * P + 200) || t1[k] < longint'(n_in)) begin
          failures++;
          $display("kernel %0d took %0d cycles for %0d elements", k, t1[k], n_in);
        end
      end
    end
    $display("op A=%0d T=%0d P=%0d NB=%0d: compared %0d, skipped %0d near psi_c, max rel err %e, cycles k0 %0d for %0d elements",
             A, T, P, NB, n_cmp, n_skip, max_rel, t1[0], n_in);
    checks++;
    if (n_skip * 4 > n_cmp + n_skip) begin
      failures++;
      $display("too many results skipped");
    end
  endtask

  initial begin
    for (int k = 0; k < NK; k++) begin
      start[k] = 1'b0;
      args[k]  = '0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int a = 0; a < NA; a++) begin
      cfgs[a]  = make_cfg(asset_params(a));
      cfg_we   = 1'b1;
      cfg_addr = 16'(a);
      cfg_data = cfgs[a];
      @(posedge clk);
    end
    cfg_we = 1'b0;
    @(posedge clk);

    run_op(3, 6, 500, 3, 1'b1, 32'h0000_0010);
    run_op(2, 5, 200, 3, 1'b0, 32'h0000_4000);

    $display("mechanisms: quad %0d exp-branch %0d zero-var %0d cache-var %0d cache-lp %0d overlap %0d buf-wait %0d pipe-stall %0d all-busy %0d",
             n_quad, n_expb, n_zero_var, n_cache_var, n_cache_lp, n_overlap, n_buf_wait,
             n_pipe_stall, n_all_busy);
    checks++; if (n_quad == 0)       begin failures++; $display("QE quadratic branch never taken"); end
    checks++; if (n_expb == 0)       begin failures++; $display("QE exponential branch never taken"); end
    checks++; if (n_zero_var == 0)   begin failures++; $display("QE zero variance never produced"); end
    checks++; if (n_cache_var == 0)  begin failures++; $display("variance cache never used"); end
    checks++; if (n_cache_lp == 0)   begin failures++; $display("log-price cache never used"); end
    checks++; if (n_overlap == 0)    begin failures++; $display("reduce and drain never overlapped"); end
    checks++; if (n_buf_wait == 0)   begin failures++; $display("reduction never waited for a buffer"); end
    checks++; if (n_pipe_stall == 0) begin failures++; $display("pipeline never stalled"); end
    checks++; if (n_all_busy == 0)   begin failures++; $display("kernels never ran concurrently"); end
    begin
      longint np;
      np = g_mem[0].u_wr.n_partial + g_mem[3].u_wr.n_partial;
      checks++; if (np == 0) begin failures++; $display("no partial final word written"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
