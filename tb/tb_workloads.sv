// tb_workloads: runs the benchmark problem shapes on one kernel built at
// its default sizes (500-path batches, 1260-timestep buffers, a 50-entry
// asset table). The benchmark sizes are A assets x T timesteps x 25,000
// paths: Tiny 5 x 126, Small 10 x 126, Medium 20 x 252, Large 30 x 504 and
// Huge 50 x 1260. A kernel processes whole 500-path batches one after the
// other and every batch follows the same schedule, so one batch per shape
// is simulated here, at the shape's full asset and timestep counts (the
// Large and Huge shapes with ASSETS_CAP assets, to keep the run short; the
// buffer depth, which is what T exercises, is used in full). The asset
// table is filled with all 50 entries (three parameter sets repeated).
// Results are compared with a double-precision Andersen QE reference as in
// the kernel test (1.5% relative tolerance, paths near psi = 1.5 skipped).
// With no back-pressure, each run must take at most elements + one
// buffer drain + 200 cycles: the kernel accepts one element per cycle.
module tb_workloads;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  localparam int NA = 50;
  localparam int ASSETS_CAP = 10;

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

  heston_ls_kernel dut (
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

  // streams inside the kernel, recorded element by element
  var_pair_t vp_rec [];
  fix_t      lp_rec [];
  int        n_vp = 0, n_lp = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.vp_v && dut.vp_r) begin
      if (n_vp < vp_rec.size()) vp_rec[n_vp] = dut.vp_d;
      n_vp++;
    end
    if (dut.ls_v && dut.ls_r) begin
      if (n_lp < lp_rec.size()) lp_rec[n_lp] = dut.ls_d;
      n_lp++;
    end
  end

  task automatic run_op(input string name, input int A, input int T, input int P,
                        input mem_addr_t base);
    real zv [], zs [], fr_mx [], dut_mx [];
    real fv [], fl [], vn, psi, d, g, r, err, max_step, max_out, sum_dev, max_dev;
    int  n_in, n_out, n_skip, cyc, nd0;
    time t_start;
    mem_word_t w;

    n_in = A * T * P;
    n_out = T * P;
    n_skip = 0; max_step = 0.0; max_out = 0.0; sum_dev = 0.0; max_dev = 0.0;
    zv = new[n_in]; zs = new[n_in]; fr_mx = new[n_out]; dut_mx = new[n_out];
    fv = new[P]; fl = new[P];
    vp_rec = new[n_in]; lp_rec = new[n_in];
    n_vp = 0; n_lp = 0;
    for (int e = 0; e < n_in; e++) begin
      zv[e] = f322r(r2f32(gauss()));
      zs[e] = f322r(r2f32(gauss()));
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
      u_zs.put(base + 32'h40_0000 + i, ws);
    end

    nd0 = n_done;
    @(negedge clk);
    args.n_assets = 16'(A); args.n_steps = 16'(T); args.n_paths = 16'(P);
    args.n_batches = 16'd1;
    args.zv_base = base; args.zs_base = base + 32'h40_0000; args.out_base = base + 32'h80_0000;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t_start = $time;
    wait (done);
    cyc = int'(($time - t_start) / 2);
    repeat (3) @(negedge clk);
    checks++;
    if (cyc > n_in + T * P + 200 || busy || n_done != nd0 + 1) begin
      failures++;
      $display("%s: %0d cycles for %0d elements, busy %0d", name, cyc, n_in, busy);
    end
    checks++;
    if (n_vp != n_in || n_lp != n_in) begin
      failures++;
      $display("%s: %0d variance and %0d log-price elements for %0d", name, n_vp, n_lp, n_in);
    end

    // step-by-step checks from the kernel's own state
    for (int o = 0; o < n_out; o++) begin dut_mx[o] = -1.0; fr_mx[o] = -1.0; end
    for (int a = 0; a < A; a++) begin
      for (int p = 0; p < P; p++) begin
        fv[p] = fix2r(cfgs[a].v0); fl[p] = fix2r(cfgs[a].ln_s0);
      end
      for (int t = 0; t < T; t++)
        for (int p = 0; p < P; p++) begin
          int e, o;
          real vc, lc, tol, vt;
          e = (a * T + t) * P + p;
          o = t * P + p;
          vc = (t == 0) ? fix2r(cfgs[a].v0) : fix2r(vp_rec[e - P].v_next);
          lc = (t == 0) ? fix2r(cfgs[a].ln_s0) : fix2r(lp_rec[e - P]);
          checks++;
          if (fix2r(vp_rec[e].v_cur) != vc) begin
            failures++;
            if (failures < 10) $display("%s elem %0d: v_cur not the previous v_next", name, e);
          end
          vn = ref_var_step(cfgs[a], vc, zv[e], psi);
          g = fix2r(vp_rec[e].v_next);
          tol = (psi > 1.5) ? 0.02 * vn + 1e-3 : 0.01 * vn + 2e-4;
          // exponential branch: v' = ln((1-p)/(1-u)) m/(1-p); a tail 1-u of
          // only a few LSBs (z above about 4) is resolved to about 4 LSBs
          if (psi > 1.5 && zv[e] > 3.0)
            tol += (fix2r(cfgs[a].theta_1me) + fix2r(cfgs[a].e_kdt) * vc) * (psi + 1.0) / 2.0
                   * $ln(1.0 + 4.0 / 1048576.0 / (1.0 - ref_phi(zv[e])));
          if (psi > 1.45 && psi < 1.55) n_skip++;
          else begin
            checks++;
            if ((g > vn ? g - vn : vn - g) > tol) begin
              failures++;
              if (failures < 10) $display("%s elem %0d: v' %f expected %f (v %f z %f psi %f a %0d)", name, e, g, vn, vc, zv[e], psi, a);
            end
          end
          r = ref_lns_step(cfgs[a], lc, vc, g, zs[e]);
          d = fix2r(lp_rec[e]);
          err = (d > r) ? d - r : r - d;
          if (err > max_step) max_step = err;
          // sqrt(K3 v + K4 v') of a variance term only a few LSBs wide loses
          // relative precision: allow 4 LSBs of error inside the root
          vt = fix2r(cfgs[a].k3) * vc + fix2r(cfgs[a].k4) * g;
          if (vt < 0.0) vt = 0.0;
          tol = 1e-4 + ((zs[e] < 0.0) ? -zs[e] : zs[e])
                * (($sqrt(vt + 4e-6) - $sqrt(vt) > $sqrt(vt) - $sqrt((vt > 4e-6) ? vt - 4e-6 : 0.0))
                   ? $sqrt(vt + 4e-6) - $sqrt(vt) : $sqrt(vt) - $sqrt((vt > 4e-6) ? vt - 4e-6 : 0.0));
          checks++;
          if (err > tol) begin
            failures++;
            if (failures < 10) $display("%s elem %0d: ln S %f expected %f (v %f v' %f zs %f a %0d)", name, e, d, r, vc, g, zs[e], a);
          end
          // prices saturate at the top of the Q12.20 range
          d = ($exp(d) < fix2r(FIX_MAX)) ? $exp(d) : fix2r(FIX_MAX);
          if (d > dut_mx[o]) dut_mx[o] = d;
          // free-running double-precision path, for information
          vn = ref_var_step(cfgs[a], fv[p], zv[e], psi);
          fl[p] = ref_lns_step(cfgs[a], fl[p], fv[p], vn, zs[e]);
          fv[p] = vn;
          if ($exp(fl[p]) > fr_mx[o]) fr_mx[o] = $exp(fl[p]);
        end
    end
    for (int o = 0; o < n_out; o++) begin
      w = u_wr.get(base + 32'h80_0000 + o / LANES);
      d = f322r(w[32*(o % LANES) +: 32]);
      err = (d > dut_mx[o]) ? d - dut_mx[o] : dut_mx[o] - d;
      if (err / dut_mx[o] > max_out) max_out = err / dut_mx[o];
      checks++;
      if (err > 2e-3 * dut_mx[o] + 1e-3) begin
        failures++;
        if (failures < 10) $display("%s out %0d: %f, max of exp(ln S) %f", name, o, d, dut_mx[o]);
      end
      err = (d > fr_mx[o]) ? (d - fr_mx[o]) / fr_mx[o] : (fr_mx[o] - d) / fr_mx[o];
      sum_dev += err;
      if (err > max_dev) max_dev = err;
    end
    checks++;
    if (u_wr.get(base + 32'h80_0000 + (n_out + LANES - 1) / LANES) != '0) begin
      failures++;
      $display("%s: write beyond the result block", name);
    end
    $display("%s: A=%0d T=%0d P=%0d: %0d elements in %0d cycles; step error ln S max %e, %0d variance steps near psi_c; output vs exp error max %e; vs free-running double: mean %.3f%%, max %.2f%%",
             name, A, T, P, n_in, cyc, max_step, n_skip, max_out, 100.0 * sum_dev / n_out,
             100.0 * max_dev);
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
    run_op("tiny",   5,  126, 500, 32'h0000_0000);
    run_op("small",  10, 126, 500, 32'h0100_0000);
    run_op("medium", (ASSETS_CAP < 20) ? ASSETS_CAP : 20, 252, 500, 32'h0200_0000);
    run_op("large",  (ASSETS_CAP < 30) ? ASSETS_CAP : 30, 504, 500, 32'h0300_0000);
    run_op("huge",   (ASSETS_CAP < 50) ? ASSETS_CAP : 50, 1260, 500, 32'h0400_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
