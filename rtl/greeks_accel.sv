// greeks_accel: the accelerator top. NUM_KERNELS copies of the Heston /
// Longstaff-Schwartz dataflow kernel run side by side; the host splits the
// batches of paths of a problem between them, gives each kernel its own
// run-time arguments (batch count and buffer addresses) and starts them.
//
// Replicating the kernel over subsets of the path batches follows the
// source study. Its default of six kernels is the study's count for a build
// with 1260 maximum timesteps (enough for every problem size it evaluates),
// where on-chip memory (about 16% of the UltraRAM per kernel) limits the
// count; builds with 504 maximum timesteps fit ten kernels there, a limit
// set by the 32 memory ports of the platform (three per kernel).
//
// Interface: the Heston configuration table write port is broadcast to all
// kernels, since every kernel works on the same assets. Every kernel has
// its own start/args/busy/done and its own three 512-bit memory ports
// (two read, one write), given here as arrays indexed by kernel. In the
// source study these ports are AXI4 masters into HBM2 or DDR behind the
// vendor shell, which is outside this design.
module greeks_accel
  import greeks_pkg::*;
#(
  parameter int NUM_KERNELS = 6,
  parameter int BATCH       = 500,
  parameter int MAX_STEPS   = 1260,
  parameter int MAX_ASSETS  = 50,
  parameter int LAT_QE      = 8,
  parameter int LAT_EXP     = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_we,
  input  logic [15:0]  cfg_addr,
  input  heston_cfg_t  cfg_data,
  input  logic         start     [NUM_KERNELS],
  input  kernel_args_t args      [NUM_KERNELS],
  output logic         busy      [NUM_KERNELS],
  output logic         done      [NUM_KERNELS],
  output logic         zv_req_valid  [NUM_KERNELS],
  input  logic         zv_req_ready  [NUM_KERNELS],
  output mem_addr_t    zv_req_addr   [NUM_KERNELS],
  input  logic         zv_resp_valid [NUM_KERNELS],
  input  mem_word_t    zv_resp_data  [NUM_KERNELS],
  output logic         zs_req_valid  [NUM_KERNELS],
  input  logic         zs_req_ready  [NUM_KERNELS],
  output mem_addr_t    zs_req_addr   [NUM_KERNELS],
  input  logic         zs_resp_valid [NUM_KERNELS],
  input  mem_word_t    zs_resp_data  [NUM_KERNELS],
  output logic         wr_valid      [NUM_KERNELS],
  input  logic         wr_ready      [NUM_KERNELS],
  output mem_addr_t    wr_addr       [NUM_KERNELS],
  output mem_word_t    wr_data       [NUM_KERNELS],
  output logic [MEM_W/8-1:0] wr_strb [NUM_KERNELS]
);
  for (genvar k = 0; k < NUM_KERNELS; k++) begin : g_kernel
    heston_ls_kernel #(
      .BATCH(BATCH), .MAX_STEPS(MAX_STEPS), .MAX_ASSETS(MAX_ASSETS),
      .LAT_QE(LAT_QE), .LAT_EXP(LAT_EXP)
    ) u_kernel (
      .clk, .rst_n,
      .start(start[k]), .args(args[k]), .busy(busy[k]), .done(done[k]),
      .cfg_we, .cfg_addr, .cfg_data,
      .zv_req_valid(zv_req_valid[k]), .zv_req_ready(zv_req_ready[k]),
      .zv_req_addr(zv_req_addr[k]), .zv_resp_valid(zv_resp_valid[k]),
      .zv_resp_data(zv_resp_data[k]),
      .zs_req_valid(zs_req_valid[k]), .zs_req_ready(zs_req_ready[k]),
      .zs_req_addr(zs_req_addr[k]), .zs_resp_valid(zs_resp_valid[k]),
      .zs_resp_data(zs_resp_data[k]),
      .wr_valid(wr_valid[k]), .wr_ready(wr_ready[k]), .wr_addr(wr_addr[k]),
      .wr_data(wr_data[k]), .wr_strb(wr_strb[k])
    );
  end
endmodule
