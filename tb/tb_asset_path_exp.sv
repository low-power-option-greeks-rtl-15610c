// tb_asset_path_exp: checks S = exp(ln S) of the AssetPathExponential stage
// against the real-valued exponential over the range used by log prices
// and beyond (including saturation at the top of the fixed-point range),
// the order of results under random back-pressure, and the latency of LAT
// cycles with one result per cycle when nothing stalls.
module tb_asset_path_exp;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  localparam int LAT = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  fix_t in_data = '0, out_data;
  fix_t sent [$];
  longint cyc = 0, t_in [$];
  int n_out = 0;

  asset_path_exp #(.LAT(LAT)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      real x, e, g, tol;
      x = fix2r(sent.pop_front());
      e = $exp(x);
      if (e > 2047.99) e = 2047.99;
      g = fix2r(out_data);
      tol = 2e-4 * e + 4e-6;
      checks++;
      if ((g > e ? g - e : e - g) > tol) begin
        failures++;
        if (failures < 10) $display("exp(%f): got %f expected %f", x, g, e);
      end
      n_out++;
    end
    if (in_valid && in_ready) sent.push_back(in_data);
  end

  initial begin
    longint t0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(99) < 70);
        // ln S over [-12, 8]: below 2^-20 to above the saturation point
        in_data  = r2fix(-12.0 + 20.0 * real'($urandom_range(100000)) / 100000.0);
      end
      out_ready = ($urandom_range(99) < 70);
    end
    @(negedge clk);
    in_valid = 1'b0;
    out_ready = 1'b1;
    repeat (LAT + 4) @(posedge clk);
    // latency: a single value, nothing stalling
    @(negedge clk);
    in_valid = 1'b1;
    in_data = r2fix(4.6);
    t0 = cyc;
    @(negedge clk);
    in_valid = 1'b0;
    while (!out_valid) @(negedge clk);
    checks++;
    if (cyc - t0 != longint'(LAT)) begin failures++; $display("latency %0d, expected %0d", cyc - t0, LAT); end
    repeat (3) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("%0d results missing", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
