// tb_heston_ls_kernel: one kernel at reduced sizes (32-path batches,
// 8-timestep buffers, 4 assets, QE pipeline latency 4) against behavioural
// memories. Two runs are made back to back on the same kernel:
//   1. 3 assets x 5 timesteps x 20 paths x 3 batches with read stalls and a
//      slow write port (so the reduction waits for a free buffer);
//   2. 2 assets x 7 timesteps x 13 paths x 2 batches with no stalls, whose
//      182 results end in a partial 512-bit word.
// The results in the output memory (maximum asset price per batch,
// timestep, path) are compared with a double-precision Andersen QE
// reference built from the same float32 inputs (1.5% relative tolerance;
// paths whose reference psi passes within 0.05 of 1.5 are skipped from
// that step, at most 25% of the results). The word after the result block
// must stay untouched, `done` must pulse exactly once per run and `busy`
// must be low after it.
module tb_heston_ls_kernel;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  localparam int NA = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic         start = 1'b0, busy, done;
  kernel_args_t args = '0;
  logic         cfg_we = 1'b0;
  logic [15:0]  cfg_addr = '0;
  heston_cfg_t  cfg_data = '0;
  logic         zv_req_valid, zv_req_ready, zv_resp_valid;
  mem_addr_t    zv_req_addr;
  mem_word_t    zv_resp_data;
  logic         zs_req_valid, zs_req_ready, zs_resp_valid;
  mem_addr_t    zs_req_addr;
  mem_word_t    zs_resp_data;
  logic         wr_valid, wr_ready;
  mem_addr_t    wr_addr;
  mem_word_t    wr_data;
  logic [MEM_W/8-1:0] wr_strb;
  int           n_done = 0;

  heston_ls_kernel #(.BATCH(32), .MAX_STEPS(8), .MAX_ASSETS(4), .LAT_QE(4), .LAT_EXP(3)) dut (
    .clk, .rst_n, .start, .args, .busy, .done, .cfg_we, .cfg_addr, .cfg_data,
    .zv_req_valid, .zv_req_ready, .zv_req_addr, .zv_resp_valid, .zv_resp_data,
    .zs_req_valid, .zs_req_ready, .zs_req_addr, .zs_resp_valid, .zs_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);

  mem_read_model #(.LAT(7), .STALL_PCT(0)) u_zv (
    .clk, .rst_n, .rd_req_valid(zv_req_valid), .rd_req_ready(zv_req_ready), .rd_req_addr(zv_req_addr),
    .rd_resp_valid(zv_resp_valid), .rd_resp_data(zv_resp_data));
  mem_read_model #(.LAT(5), .STALL_PCT(0)) u_zs (
    .clk, .rst_n, .rd_req_valid(zs_req_valid), .rd_req_ready(zs_req_ready), .rd_req_addr(zs_req_addr),
    .rd_resp_valid(zs_resp_valid), .rd_resp_data(zs_resp_data));
  mem_write_model #(.STALL_PCT(0)) u_wr (
    .clk, .rst_n, .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);

  always @(posedge clk) if (done) n_done++;

  heston_cfg_t cfgs [NA];

  task automatic run_op(input int A, input int T, input int P, input int NB,
                        input bit stalls, input mem_addr_t base);
    real zv [], zs [], ref_mx [];
    bit  unc [];
    real v [], lns [], vn, lnsn, psi, d, err, max_rel;
    bit  bad [];
    int  n_in, n_out, n_skip, n_cmp, nd0;
    mem_word_t w;

    n_in = NB * A * T * P;
    n_out = NB * T * P;
    n_skip = 0; n_cmp = 0; max_rel = 0.0;
    zv = new[n_in]; zs = new[n_in]; ref_mx = new[n_out]; unc = new[n_out];
    v = new[P]; lns = new[P]; bad = new[P];
    for (int e = 0; e < n_in; e++) begin
      zv[e] = f322r(r2f32(gauss()));
      zs[e] = f322r(r2f32(gauss()));
    end
    for (int o = 0; o < n_out; o++) begin ref_mx[o] = -1.0; unc[o] = 1'b0; end
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
            vn = ref_var_step(cfgs[a], v[p], zv[e], psi);
            if (psi > 1.45 && psi < 1.55) bad[p] = 1'b1;
            lnsn = ref_lns_step(cfgs[a], lns[p], v[p], vn, zs[e]);
            v[p] = vn; lns[p] = lnsn;
            if ($exp(lnsn) > ref_mx[o]) ref_mx[o] = $exp(lnsn);
            if (bad[p]) unc[o] = 1'b1;
          end
      end
    for (int i = 0; i < (n_in + LANES - 1) / LANES; i++) begin
      mem_word_t wv, ws;
      wv = '0; ws = '0;
      for (int l = 0; l < LANES; l++)
        if (i * LANES + l < n_in) begin
          wv[32*l +: 32] = r2f32(zv[i * LANES + l]);
          ws[32*l +: 32] = r2f32(zs[i * LANES + l]);
        end
      u_zv.put(base + i, wv);
      u_zs.put(base + 32'h10_0000 + i, ws);
    end
    u_zv.stall_pct = stalls ? 20 : 0;
    u_zs.stall_pct = stalls ? 20 : 0;
    u_wr.stall_pct = stalls ? 90 : 0;

    nd0 = n_done;
    @(negedge clk);
    args.n_assets = 16'(A); args.n_steps = 16'(T); args.n_paths = 16'(P);
    args.n_batches = 16'(NB);
    args.zv_base = base; args.zs_base = base + 32'h10_0000; args.out_base = base + 32'h20_0000;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("busy not raised after start"); end
    wait (done);
    repeat (3) @(negedge clk);
    checks++;
    if (busy || n_done != nd0 + 1) begin
      failures++;
      $display("after done: busy %0d, done pulses %0d", busy, n_done - nd0);
    end

    for (int o = 0; o < n_out; o++) begin
      w = u_wr.get(base + 32'h20_0000 + o / LANES);
      d = f322r(w[32*(o % LANES) +: 32]);
      if (unc[o]) begin n_skip++; continue; end
      n_cmp++;
      err = (d > ref_mx[o]) ? d - ref_mx[o] : ref_mx[o] - d;
      if (err / ref_mx[o] > max_rel) max_rel = err / ref_mx[o];
      checks++;
      if (err > 1.5e-2 * ref_mx[o]) begin
        failures++;
        if (failures < 10) $display("out %0d: got %f expected %f", o, d, ref_mx[o]);
      end
    end
    checks++;
    if (u_wr.get(base + 32'h20_0000 + (n_out + LANES - 1) / LANES) != '0) begin
      failures++;
      $display("write beyond the result block");
    end
    checks++;
    if (n_skip * 4 > n_cmp + n_skip) begin failures++; $display("too many results skipped"); end
    $display("run A=%0d T=%0d P=%0d NB=%0d: compared %0d, skipped %0d, max rel err %e",
             A, T, P, NB, n_cmp, n_skip, max_rel);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < NA; a++) begin
      @(negedge clk);
      cfgs[a]  = make_cfg(asset_params(a));
      cfg_we   = 1'b1;
      cfg_addr = 16'(a);
      cfg_data = cfgs[a];
    end
    @(negedge clk);
    cfg_we = 1'b0;
    run_op(3, 5, 20, 3, 1'b1, 32'h0000_0100);
    run_op(2, 7, 13, 2, 1'b0, 32'h0040_0000);
    checks++;
    if (u_wr.n_partial == 0) begin failures++; $display("no partial final word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
