// tb_log_price_path_qe: drives the LogPricePathQE stage with random
// variance pairs and normal samples on two independently gapped input
// streams, for 3 assets x 5 timesteps x 10 paths x 2 batches, and checks
// each ln S' against a double-precision Y1QE step taken from ln S0 at
// timestep 0 and otherwise from this path's previous result (the
// cached_asspath), to within 1e-4. Results must come in order, none lost,
// and the stage must be idle afterwards.
module tb_log_price_path_qe;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  localparam int BATCH = 16;
  localparam int LAT   = 4;
  localparam int NA = 3, NT = 5, NP = 10, NB = 2;
  localparam int N  = NB*NA*NT*NP;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic        start = 1'b0, busy;
  logic [15:0] cfg_asset;
  heston_cfg_t cfg;
  heston_cfg_t cfgs [NA];
  logic        var_valid = 1'b0, var_ready, z_valid = 1'b0, z_ready;
  logic        out_valid, out_ready = 1'b0;
  var_pair_t   var_data = '0;
  fix_t        z_data = '0, out_data;
  var_pair_t   vps [N];
  fix_t        zs [N];
  real         last_lns [NP];
  int          n_v = 0, n_z = 0, n_out = 0;

  log_price_path_qe #(.BATCH(BATCH), .LAT(LAT)) dut (
    .clk, .rst_n, .start, .n_assets(16'(NA)), .n_steps(16'(NT)), .n_paths(16'(NP)),
    .n_batches(16'(NB)), .busy, .cfg_asset, .cfg,
    .var_valid, .var_ready, .var_data, .z_valid, .z_ready, .z_data,
    .out_valid, .out_ready, .out_data);

  assign cfg = cfgs[int'(cfg_asset) % NA];

  always @(posedge clk) if (rst_n) begin
    if (var_valid && var_ready) n_v <= n_v + 1;
    if (z_valid && z_ready) n_z <= n_z + 1;
    if (out_valid && out_ready) begin
      int e, p, t, a;
      real lref, g;
      e = n_out;
      p = e % NP; t = (e / NP) % NT; a = (e / (NP * NT)) % NA;
      lref = ref_lns_step(cfgs[a], (t == 0) ? fix2r(cfgs[a].ln_s0) : last_lns[p],
                          fix2r(vps[e].v_cur), fix2r(vps[e].v_next), fix2r(zs[e]));
      g = fix2r(out_data);
      checks++;
      if ((g > lref ? g - lref : lref - g) > 1e-4) begin
        failures++;
        if (failures < 10) $display("elem %0d: ln S %f, expected %f", e, g, lref);
      end
      last_lns[p] = g;
      n_out++;
    end
  end

  initial begin
    for (int a = 0; a < NA; a++) cfgs[a] = make_cfg(asset_params(a));
    for (int i = 0; i < N; i++) begin
      vps[i].v_cur  = r2fix(0.3 * real'($urandom_range(1000)) / 1000.0);
      vps[i].v_next = ($urandom_range(9) == 0) ? '0 : r2fix(0.3 * real'($urandom_range(1000)) / 1000.0);
      zs[i] = r2fix(gauss());
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (n_out < N) begin
      var_valid = (n_v < N) && ($urandom_range(99) < 70);
      var_data  = (n_v < N) ? vps[n_v] : '0;
      z_valid   = (n_z < N) && ($urandom_range(99) < 70);
      z_data    = (n_z < N) ? zs[n_z] : '0;
      out_ready = ($urandom_range(99) < 75);
      @(negedge clk);
    end
    var_valid = 1'b0;
    z_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (busy || out_valid || n_v != N || n_z != N) begin
      failures++;
      $display("not finished cleanly: busy %0d, %0d/%0d inputs", busy, n_v, n_z);
    end
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
