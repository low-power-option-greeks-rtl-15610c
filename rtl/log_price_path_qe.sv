// log_price_path_qe: the LogPricePathQE dataflow stage. For every element it
// advances that path's log asset price by one timestep (the Y1QE step of
// Andersen's QE scheme), using the variance at both ends of the step from
// VariancePathQE and one normal sample from corrpathcube_p1:
//   ln S' = ln S + k0 + k1 V + k2 V' + sqrt(k3 V + k4 V') Z
//
// How it works: as in the source study's reordered logPricePathQE, the log
// price each path reached at the previous timestep is held in a per-path
// cache (cached_asspath, BATCH entries); at timestep 0 the asset's ln S0 is
// used. The step is computed combinationally, passes a LAT-stage pipeline,
// and the cache is written when the result leaves it. Because the same
// path returns only n_paths elements later, n_paths > LAT is required; this
// is the condition under which the source study's loop interchange removes
// the loop-carried dependency.
//
// Interface: the two input streams are joined: an element is taken when
// both carry a value and the pipeline advances. out_* carries ln S' per
// element in input order. cfg_asset/cfg is a combinational configuration
// lookup. One element per cycle; latency LAT cycles.
module log_price_path_qe
  import greeks_pkg::*;
#(
  parameter int BATCH = 500,
  parameter int LAT   = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_assets,
  input  logic [15:0] n_steps,
  input  logic [15:0] n_paths,
  input  logic [15:0] n_batches,
  output logic        busy,
  output logic [15:0] cfg_asset,
  input  heston_cfg_t cfg,
  input  logic        var_valid,
  output logic        var_ready,
  input  var_pair_t   var_data,
  input  logic        z_valid,
  output logic        z_ready,
  input  fix_t        z_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fix_t        out_data
);
  localparam int PW = (BATCH > 1) ? $clog2(BATCH) : 1;

  typedef struct packed {
    logic [PW-1:0] path;
    fix_t          ln_s;
  } item_t;

  fix_t        cached_asspath [BATCH];
  logic        active, pipe_ready, accept;
  logic [15:0] path, tstep;
  fix_t        ln_s_cur;
  item_t       in_item, out_item;

  loop_counter u_loops (
    .clk, .rst_n, .start, .step(accept),
    .n_assets, .n_steps, .n_paths, .n_batches,
    .active, .path, .tstep, .asset(cfg_asset), .batch(), .last()
  );

  assign accept    = active && pipe_ready && var_valid && z_valid;
  assign var_ready = active && pipe_ready && z_valid;
  assign z_ready   = active && pipe_ready && var_valid;
  assign ln_s_cur  = (tstep == '0) ? cfg.ln_s0 : cached_asspath[PW'(path)];

  always_comb begin
    in_item.path = PW'(path);
    in_item.ln_s = y1qe(cfg, ln_s_cur, var_data, z_data);
  end

  stall_pipe #(.W($bits(item_t)), .LAT(LAT)) u_pipe (
    .clk, .rst_n,
    .in_valid(accept), .in_ready(pipe_ready), .in_data(in_item),
    .out_valid, .out_ready, .out_data(out_item)
  );

  assign out_data = out_item.ln_s;
  assign busy     = active || out_valid;

  always_ff @(posedge clk) begin
    if (out_valid && out_ready) cached_asspath[out_item.path] <= out_item.ln_s;
  end

  a_batch_deeper_than_pipe: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (n_paths > 16'(LAT)));
  a_batch_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (n_paths <= 16'(BATCH)));
endmodule
