// variance_path_qe: the VariancePathQE dataflow stage. For every element
// (batch, asset, timestep, path) it advances that path's Heston variance by
// one timestep with Andersen's quadratic-exponential (QE) scheme, driven by
// one normal sample from corrpathcube.
//
// How it works: elements arrive in the interchanged loop order (path
// innermost). The variance each path reached at the previous timestep is
// kept in a per-path cache (cached variance, BATCH entries); at timestep 0
// the asset's initial variance v0 is used instead. The QE step is computed
// combinationally (greeks_pkg::qe_variance) and then passes a LAT-stage
// pipeline; the cache is written when the result leaves the pipeline. The
// next read of the same path happens n_paths elements later, so the scheme
// is correct only if n_paths > LAT: the same rule as in the source study,
// where a batch must hold more paths than the QE pipeline is deep.
//
// Interface: `start` latches nothing itself; the loop bounds must be held
// stable for the whole run. z_* is the input stream, out_* carries
// (v_cur, v_next) pairs to the log-price stage, one per element, in input
// order. cfg_asset selects the asset whose configuration must be presented
// on `cfg` in the same cycle (combinational lookup). One element per
// cycle; latency LAT cycles.
module variance_path_qe
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
  input  logic        z_valid,
  output logic        z_ready,
  input  fix_t        z_data,
  output logic        out_valid,
  input  logic        out_ready,
  output var_pair_t   out_data
);
  localparam int PW = (BATCH > 1) ? $clog2(BATCH) : 1;

  typedef struct packed {
    logic [PW-1:0] path;
    var_pair_t     vp;
  } item_t;

  fix_t        cache [BATCH];
  logic        active, pipe_ready, accept, exp_branch;
  logic [15:0] path, tstep;
  fix_t        v_cur;
  item_t       in_item, out_item;

  loop_counter u_loops (
    .clk, .rst_n, .start, .step(accept),
    .n_assets, .n_steps, .n_paths, .n_batches,
    .active, .path, .tstep, .asset(cfg_asset), .batch(), .last()
  );

  assign z_ready = active && pipe_ready;
  assign accept  = z_valid && z_ready;
  assign v_cur   = (tstep == '0) ? cfg.v0 : cache[PW'(path)];

  always_comb begin
    in_item.path = PW'(path);
    in_item.vp   = qe_variance(cfg, v_cur, z_data, exp_branch);
  end

  stall_pipe #(.W($bits(item_t)), .LAT(LAT)) u_pipe (
    .clk, .rst_n,
    .in_valid(accept), .in_ready(pipe_ready), .in_data(in_item),
    .out_valid, .out_ready, .out_data(out_item)
  );

  assign out_data = out_item.vp;
  assign busy     = active || out_valid;

  always_ff @(posedge clk) begin
    if (out_valid && out_ready) cache[out_item.path] <= out_item.vp.v_next;
  end

  a_batch_deeper_than_pipe: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (n_paths > 16'(LAT)));
  a_batch_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (n_paths <= 16'(BATCH)));
endmodule
