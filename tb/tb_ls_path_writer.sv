// tb_ls_path_writer: streams fixed-point values into the writer and checks
// the memory image: 16 float32 values per word in order, each within the
// float32 rounding of the fixed-point value, consecutive addresses from the
// base, a partial last word with the right byte strobe, nothing written
// beyond it, and `busy` falling only after the last write. Random input
// gaps and write back-pressure are applied; a second run without
// back-pressure must take one value per cycle.
module tb_ls_path_writer;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic             start = 1'b0, busy;
  mem_addr_t        base = '0;
  logic [CNT_W-1:0] n_elems = '0;
  logic             in_valid = 1'b0, in_ready;
  fix_t             in_data = '0;
  logic             wr_valid, wr_ready;
  mem_addr_t        wr_addr;
  mem_word_t        wr_data;
  logic [MEM_W/8-1:0] wr_strb;
  longint           cyc = 0;
  int               acc_cnt = 0;

  always @(posedge clk) if (in_valid && in_ready) acc_cnt <= acc_cnt + 1;

  ls_path_writer dut (
    .clk, .rst_n, .start, .base, .n_elems, .busy,
    .in_valid, .in_ready, .in_data, .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);

  mem_write_model #(.STALL_PCT(40)) u_mem (
    .clk, .rst_n, .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);

  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input int n, input mem_addr_t b, input bit stall, output longint cycles);
    fix_t   vals [];
    longint t0;
    vals = new[n];
    for (int i = 0; i < n; i++) vals[i] = fix_t'($urandom_range(32'h7fff_ffff)) - fix_t'(32'h3fff_ffff);
    u_mem.clear();
    u_mem.stall_pct = stall ? 40 : 0;
    @(negedge clk);
    base = b;
    n_elems = n;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc;
    acc_cnt = 0;
    while (busy) begin
      in_valid = (acc_cnt < n) && (!stall || $urandom_range(99) < 70);
      in_data  = (acc_cnt < n) ? vals[acc_cnt] : '0;
      @(negedge clk);
    end
    cycles = cyc - t0;
    in_valid = 1'b0;
    for (int i = 0; i < n; i++) begin
      mem_word_t w;
      real g, e;
      w = u_mem.get(b + i / LANES);
      g = f322r(w[32*(i % LANES) +: 32]);
      e = fix2r(vals[i]);
      checks++;
      if ((g > e ? g - e : e - g) > 1.2e-7 * (e < 0 ? -e : e) + 1e-9) begin
        failures++;
        if (failures < 10) $display("value %0d: got %f expected %f", i, g, e);
      end
    end
    checks++;
    if (int'(u_mem.n_writes) != (n + LANES - 1) / LANES) begin
      failures++;
      $display("%0d writes for %0d values", u_mem.n_writes, n);
    end
    checks++;
    if (u_mem.get(b + (n + LANES - 1) / LANES) != '0) begin failures++; $display("wrote past the end"); end
    if (n % LANES != 0) begin
      checks++;
      if (u_mem.n_partial != 1) begin failures++; $display("partial writes: %0d", u_mem.n_partial); end
      checks++;
      if ((u_mem.get(b + n / LANES) >> (32 * (n % LANES))) != '0) begin
        failures++;
        $display("strobe let unused lanes through");
      end
    end
  endtask

  // the writer must not take a value faster than the model accounts for
  always @(posedge clk) if (rst_n && in_valid && in_ready && !busy) begin
    failures++;
    $display("value taken while idle");
  end

  initial begin
    longint c;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(16 * 40 + 9, 32'h0000_0100, 1'b1, c);
    run(16 * 64, 32'h0001_0000, 1'b0, c);
    checks++;
    if (c > 16 * 64 + 8) begin failures++; $display("1024 values took %0d cycles", c); end
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
