// tb_ls_path_reduction: feeds the path-reduction stage with random values
// in (asset, timestep, path) order for 3 assets x 4 timesteps x 10 paths x
// 4 batches under random input gaps and random output back-pressure, and
// checks that every batch's 40 maxima come out in (timestep, path) order
// and equal the maximum over the assets. Values are drawn from a range
// including negatives, so a buffer that kept stale contents or dropped the
// first asset's write would be caught. It also counts cycles where input
// was offered but refused because the buffer to be filled was still being
// drained (the ping-pong wait), and cycles where input was accepted while
// output was being produced (fill and drain overlapping); both must occur.
module tb_ls_path_reduction;
  import greeks_pkg::*;

  localparam int BATCH = 12, MAX_STEPS = 5;
  localparam int NA = 3, NT = 4, NP = 10, NB = 4;
  localparam int N_IN = NB*NA*NT*NP, N_OUT = NB*NT*NP;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  logic start = 1'b0, busy, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  fix_t in_data = '0, out_data;
  fix_t xs [N_IN];
  fix_t exp_max [N_OUT];
  int   n_acc = 0, n_out = 0, n_wait = 0, n_overlap = 0;
  int   out_pct = 70;

  ls_path_reduction #(.BATCH(BATCH), .MAX_STEPS(MAX_STEPS)) dut (
    .clk, .rst_n, .start, .n_assets(16'(NA)), .n_steps(16'(NT)), .n_paths(16'(NP)),
    .n_batches(16'(NB)), .busy, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready && dut.f_active) n_wait++;
    if (in_valid && in_ready && out_valid) n_overlap++;
    if (in_valid && in_ready) n_acc <= n_acc + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != exp_max[n_out]) begin
        failures++;
        if (failures < 10) $display("out %0d: %h, expected %h", n_out, out_data, exp_max[n_out]);
      end
      n_out++;
    end
  end

  initial begin
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < NA; a++)
        for (int t = 0; t < NT; t++)
          for (int p = 0; p < NP; p++) begin
            int i, o;
            i = ((b*NA + a)*NT + t)*NP + p;
            o = (b*NT + t)*NP + p;
            xs[i] = fix_t'($urandom_range(2000000)) - fix_t'(1000000);
            if (a == 0 || xs[i] > exp_max[o]) exp_max[o] = xs[i];
          end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (n_out < N_OUT) begin
      // a slow-output phase in the middle forces the fill side to wait
      out_pct   = (n_out > 40 && n_out < 100) ? 15 : 70;
      in_valid  = (n_acc < N_IN) && ($urandom_range(99) < 80);
      in_data   = (n_acc < N_IN) ? xs[n_acc] : '0;
      out_ready = ($urandom_range(99) < out_pct);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (busy || out_valid || n_acc != N_IN) begin
      failures++;
      $display("not finished cleanly: busy %0d, %0d inputs", busy, n_acc);
    end
    $display("buffer waits %0d, fill/drain overlap %0d", n_wait, n_overlap);
    checks++; if (n_wait == 0) begin failures++; $display("fill never waited for a buffer"); end
    checks++; if (n_overlap == 0) begin failures++; $display("fill and drain never overlapped"); end
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
