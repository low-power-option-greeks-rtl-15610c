// heston_ls_kernel: one compute kernel of the accelerator. It runs the
// Heston stochastic-volatility path generation (Andersen QE) and the
// Longstaff-Schwartz path reduction as a chain of concurrently running
// dataflow stages joined by stream FIFOs:
//
//   cube_reader (corrpathcube)    -> variance_path_qe --+
//   cube_reader (corrpathcube_p1) ----------------------+-> log_price_path_qe
//     -> asset_path_exp -> ls_path_reduction (ping-pong) -> ls_path_writer
//
// The stage chain, the two input cubes and the single output follow the
// source study's dataflow diagram. Every stage walks the same interchanged
// loop nest (batch, asset, timestep, path; path innermost), so a path's
// state is revisited only once per n_paths elements and each stage accepts
// one element per clock cycle.
//
// Interface: the per-asset Heston configuration is written beforehand
// through cfg_we/cfg_addr/cfg_data into a MAX_ASSETS-entry table. `start`
// (while idle) latches the run-time arguments `args`; one cycle later all
// stages start together. `busy` is high from start until the writer's last
// memory word has been accepted, and `done` pulses for one cycle then. The
// kernel has three memory ports, as in the source study: two 512-bit read
// ports (request/response, responses in request order, always accepted)
// and one 512-bit write port with byte strobes.
//
// Constraints on args: LAT_QE < n_paths <= BATCH, n_steps <= MAX_STEPS,
// n_assets <= MAX_ASSETS; element counts below 2^32.
module heston_ls_kernel
  import greeks_pkg::*;
#(
  parameter int BATCH      = 500,
  parameter int MAX_STEPS  = 1260,
  parameter int MAX_ASSETS = 50,
  parameter int LAT_QE     = 8,
  parameter int LAT_EXP    = 4,
  parameter int FIFO_DEPTH = 2,
  parameter int PREFETCH   = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  kernel_args_t    args,
  output logic            busy,
  output logic            done,
  // Heston configuration table
  input  logic            cfg_we,
  input  logic [15:0]     cfg_addr,
  input  heston_cfg_t     cfg_data,
  // corrpathcube read port
  output logic            zv_req_valid,
  input  logic            zv_req_ready,
  output mem_addr_t       zv_req_addr,
  input  logic            zv_resp_valid,
  input  mem_word_t       zv_resp_data,
  // corrpathcube_p1 read port
  output logic            zs_req_valid,
  input  logic            zs_req_ready,
  output mem_addr_t       zs_req_addr,
  input  logic            zs_resp_valid,
  input  mem_word_t       zs_resp_data,
  // result write port
  output logic            wr_valid,
  input  logic            wr_ready,
  output mem_addr_t       wr_addr,
  output mem_word_t       wr_data,
  output logic [MEM_W/8-1:0] wr_strb
);
  localparam int AIW = (MAX_ASSETS > 1) ? $clog2(MAX_ASSETS) : 1;
  typedef enum logic [1:0] {IDLE, LAUNCH, RUN} state_t;

  state_t           state;
  kernel_args_t     a;
  logic [CNT_W-1:0] n_in, n_out;
  logic             go;
  heston_cfg_t      cfg_mem [MAX_ASSETS];
  logic [15:0]      var_asset, lp_asset;
  heston_cfg_t      var_cfg, lp_cfg;
  logic             wr_busy;

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      a     <= '0;
      n_in  <= '0;
      n_out <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          a     <= args;
          n_out <= CNT_W'(args.n_batches) * CNT_W'(args.n_steps) * CNT_W'(args.n_paths);
          n_in  <= CNT_W'(args.n_batches) * CNT_W'(args.n_steps) * CNT_W'(args.n_paths)
                   * CNT_W'(args.n_assets);
          state <= LAUNCH;
        end
        LAUNCH: state <= RUN;
        RUN: if (!wr_busy) begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign go   = (state == LAUNCH);
  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    if (cfg_we && (state == IDLE) && (cfg_addr < 16'(MAX_ASSETS)))
      cfg_mem[AIW'(cfg_addr)] <= cfg_data;
  end

  assign var_cfg = cfg_mem[AIW'(var_asset)];
  assign lp_cfg  = cfg_mem[AIW'(lp_asset)];

  // ---------------- streams ----------------
  logic zv_v, zv_r;      fix_t zv_d;      // reader -> fifo
  logic zv2_v, zv2_r;    fix_t zv2_d;     // fifo -> variance
  logic zs_v, zs_r;      fix_t zs_d;
  logic zs2_v, zs2_r;    fix_t zs2_d;
  logic vp_v, vp_r;      var_pair_t vp_d;
  logic vp2_v, vp2_r;    var_pair_t vp2_d;
  logic ls_v, ls_r;      fix_t ls_d;      // log price
  logic ls2_v, ls2_r;    fix_t ls2_d;
  logic sp_v, sp_r;      fix_t sp_d;      // asset price
  logic sp2_v, sp2_r;    fix_t sp2_d;
  logic mx_v, mx_r;      fix_t mx_d;      // reduced maxima
  logic mx2_v, mx2_r;    fix_t mx2_d;

  cube_reader #(.PREFETCH(PREFETCH)) u_read_corrpathcube (
    .clk, .rst_n, .start(go), .base(a.zv_base), .n_elems(n_in), .busy(),
    .rd_req_valid(zv_req_valid), .rd_req_ready(zv_req_ready), .rd_req_addr(zv_req_addr),
    .rd_resp_valid(zv_resp_valid), .rd_resp_data(zv_resp_data),
    .out_valid(zv_v), .out_ready(zv_r), .out_data(zv_d)
  );

  cube_reader #(.PREFETCH(PREFETCH)) u_read_corrpathcube_p1 (
    .clk, .rst_n, .start(go), .base(a.zs_base), .n_elems(n_in), .busy(),
    .rd_req_valid(zs_req_valid), .rd_req_ready(zs_req_ready), .rd_req_addr(zs_req_addr),
    .rd_resp_valid(zs_resp_valid), .rd_resp_data(zs_resp_data),
    .out_valid(zs_v), .out_ready(zs_r), .out_data(zs_d)
  );

  stream_fifo #(.W(FIX_W), .DEPTH(FIFO_DEPTH)) u_s_zv (
    .clk, .rst_n, .in_valid(zv_v), .in_ready(zv_r), .in_data(zv_d),
    .out_valid(zv2_v), .out_ready(zv2_r), .out_data(zv2_d));

  stream_fifo #(.W(FIX_W), .DEPTH(FIFO_DEPTH)) u_s_zs (
    .clk, .rst_n, .in_valid(zs_v), .in_ready(zs_r), .in_data(zs_d),
    .out_valid(zs2_v), .out_ready(zs2_r), .out_data(zs2_d));

  variance_path_qe #(.BATCH(BATCH), .LAT(LAT_QE)) u_variance (
    .clk, .rst_n, .start(go),
    .n_assets(a.n_assets), .n_steps(a.n_steps), .n_paths(a.n_paths), .n_batches(a.n_batches),
    .busy(), .cfg_asset(var_asset), .cfg(var_cfg),
    .z_valid(zv2_v), .z_ready(zv2_r), .z_data(zv2_d),
    .out_valid(vp_v), .out_ready(vp_r), .out_data(vp_d)
  );

  stream_fifo #(.W($bits(var_pair_t)), .DEPTH(FIFO_DEPTH)) u_s_var (
    .clk, .rst_n, .in_valid(vp_v), .in_ready(vp_r), .in_data(vp_d),
    .out_valid(vp2_v), .out_ready(vp2_r), .out_data(vp2_d));

  log_price_path_qe #(.BATCH(BATCH), .LAT(LAT_QE)) u_log_price (
    .clk, .rst_n, .start(go),
    .n_assets(a.n_assets), .n_steps(a.n_steps), .n_paths(a.n_paths), .n_batches(a.n_batches),
    .busy(), .cfg_asset(lp_asset), .cfg(lp_cfg),
    .var_valid(vp2_v), .var_ready(vp2_r), .var_data(vp2_d),
    .z_valid(zs2_v), .z_ready(zs2_r), .z_data(zs2_d),
    .out_valid(ls_v), .out_ready(ls_r), .out_data(ls_d)
  );

  stream_fifo #(.W(FIX_W), .DEPTH(FIFO_DEPTH)) u_s_logprice (
    .clk, .rst_n, .in_valid(ls_v), .in_ready(ls_r), .in_data(ls_d),
    .out_valid(ls2_v), .out_ready(ls2_r), .out_data(ls2_d));

  asset_path_exp #(.LAT(LAT_EXP)) u_exp (
    .clk, .rst_n,
    .in_valid(ls2_v), .in_ready(ls2_r), .in_data(ls2_d),
    .out_valid(sp_v), .out_ready(sp_r), .out_data(sp_d)
  );

  stream_fifo #(.W(FIX_W), .DEPTH(FIFO_DEPTH)) u_s_price (
    .clk, .rst_n, .in_valid(sp_v), .in_ready(sp_r), .in_data(sp_d),
    .out_valid(sp2_v), .out_ready(sp2_r), .out_data(sp2_d));

  ls_path_reduction #(.BATCH(BATCH), .MAX_STEPS(MAX_STEPS)) u_ls_reduce (
    .clk, .rst_n, .start(go),
    .n_assets(a.n_assets), .n_steps(a.n_steps), .n_paths(a.n_paths), .n_batches(a.n_batches),
    .busy(),
    .in_valid(sp2_v), .in_ready(sp2_r), .in_data(sp2_d),
    .out_valid(mx_v), .out_ready(mx_r), .out_data(mx_d)
  );

  stream_fifo #(.W(FIX_W), .DEPTH(FIFO_DEPTH)) u_s_max (
    .clk, .rst_n, .in_valid(mx_v), .in_ready(mx_r), .in_data(mx_d),
    .out_valid(mx2_v), .out_ready(mx2_r), .out_data(mx2_d));

  ls_path_writer u_write (
    .clk, .rst_n, .start(go), .base(a.out_base), .n_elems(n_out), .busy(wr_busy),
    .in_valid(mx2_v), .in_ready(mx2_r), .in_data(mx2_d),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

  a_args_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (state == IDLE && start) |-> (args.n_paths > 16'(LAT_QE)) && (args.n_paths <= 16'(BATCH))
      && (args.n_steps <= 16'(MAX_STEPS)) && (args.n_assets <= 16'(MAX_ASSETS)));
endmodule
