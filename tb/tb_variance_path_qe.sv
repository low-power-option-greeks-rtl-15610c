// tb_variance_path_qe: drives the VariancePathQE stage with normal samples
// for 3 assets x 6 timesteps x 12 paths x 2 batches under random input gaps
// and output back-pressure, and checks for every result:
//   - v_cur is the asset's v0 at timestep 0 and otherwise exactly the v_next
//     this path produced at the previous timestep (the per-path cache);
//   - v_next matches a double-precision Andersen QE step from v_cur
//     (tolerance 1% + 2e-4 on the quadratic branch; 2% + 1e-3 on the
//     exponential branch, where psi = s2/m^2 of a small mean loses relative
//     precision in Q12.20; skipped when psi is within 1.5 +- 0.05, where
//     fixed point may pick the other branch);
//   - results come in input order and none is lost.
// Both QE branches and the zero-variance case must occur. With
// n_paths = 12 > LAT = 4 the cache read of a path always follows its write.
module tb_variance_path_qe;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  localparam int BATCH = 16;
  localparam int LAT   = 4;
  localparam int NA = 3, NT = 6, NP = 12, NB = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic        start = 1'b0, busy;
  logic [15:0] cfg_asset;
  heston_cfg_t cfg;
  heston_cfg_t cfgs [NA];
  logic        z_valid = 1'b0, z_ready, out_valid, out_ready = 1'b0;
  fix_t        z_data = '0;
  var_pair_t   out_data;
  fix_t        zs [NB*NA*NT*NP];
  fix_t        last_v [NP];
  int          n_acc = 0, n_out = 0, n_skip = 0, n_quad = 0, n_expb = 0, n_zero = 0;

  variance_path_qe #(.BATCH(BATCH), .LAT(LAT)) dut (
    .clk, .rst_n, .start, .n_assets(16'(NA)), .n_steps(16'(NT)), .n_paths(16'(NP)),
    .n_batches(16'(NB)), .busy, .cfg_asset, .cfg,
    .z_valid, .z_ready, .z_data, .out_valid, .out_ready, .out_data);

  assign cfg = cfgs[int'(cfg_asset) % NA];

  always @(posedge clk) if (rst_n) begin
    if (z_valid && z_ready) n_acc <= n_acc + 1;
    if (out_valid && out_ready) begin
      int e, p, t, a;
      real vref, psi, g;
      e = n_out;
      p = e % NP; t = (e / NP) % NT; a = (e / (NP * NT)) % NA;
      checks++;
      if (out_data.v_cur != ((t == 0) ? cfgs[a].v0 : last_v[p])) begin
        failures++;
        if (failures < 10) $display("elem %0d: v_cur %h, expected %h", e, out_data.v_cur,
                                    (t == 0) ? cfgs[a].v0 : last_v[p]);
      end
      vref = ref_var_step(cfgs[a], fix2r(out_data.v_cur), fix2r(zs[e]), psi);
      g = fix2r(out_data.v_next);
      if (psi > 1.5) n_expb++; else n_quad++;
      if (out_data.v_next == '0) n_zero++;
      if (psi > 1.45 && psi < 1.55) n_skip++;
      else begin
        checks++;
        if ((g > vref ? g - vref : vref - g) > ((psi > 1.5) ? 0.02 * vref + 1e-3 : 0.01 * vref + 2e-4)) begin
          failures++;
          if (failures < 10) $display("elem %0d: v_next %f, expected %f (psi %f)", e, g, vref, psi);
        end
      end
      last_v[p] = out_data.v_next;
      n_out++;
    end
  end

  initial begin
    for (int a = 0; a < NA; a++) cfgs[a] = make_cfg(asset_params(a));
    for (int i = 0; i < NB*NA*NT*NP; i++) zs[i] = r2fix(gauss());
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (n_out < NB*NA*NT*NP) begin
      z_valid   = (n_acc < NB*NA*NT*NP) && ($urandom_range(99) < 75);
      z_data    = (n_acc < NB*NA*NT*NP) ? zs[n_acc] : '0;
      out_ready = ($urandom_range(99) < 70);
      @(negedge clk);
    end
    z_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (busy || out_valid) begin failures++; $display("still busy after the last element"); end
    $display("quad %0d exp %0d zero %0d skipped %0d", n_quad, n_expb, n_zero, n_skip);
    checks++; if (n_quad == 0) begin failures++; $display("quadratic branch never taken"); end
    checks++; if (n_expb == 0) begin failures++; $display("exponential branch never taken"); end
    checks++; if (n_zero == 0) begin failures++; $display("zero variance never produced"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
