// tb_cube_reader: checks the cube reader against a memory model holding
// float32 values: every value arrives, in order, converted to fixed point
// (within one LSB of the real value, since the conversion truncates), from
// the right addresses, including a final partial word, under random
// request and output back-pressure. A second run without back-pressure must
// deliver one value per cycle after the first word's latency.
module tb_cube_reader;
  import greeks_pkg::*;
  import tb_heston_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic             start = 1'b0, busy;
  mem_addr_t        base = '0;
  logic [CNT_W-1:0] n_elems = '0;
  logic             rd_req_valid, rd_req_ready, rd_resp_valid;
  mem_addr_t        rd_req_addr;
  mem_word_t        rd_resp_data;
  logic             out_valid, out_ready = 1'b0;
  fix_t             out_data;
  real              vals [$];
  longint           cyc = 0;
  int               n_req = 0;
  mem_addr_t        lo_addr, hi_addr;

  cube_reader #(.PREFETCH(4)) dut (
    .clk, .rst_n, .start, .base, .n_elems, .busy,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .out_valid, .out_ready, .out_data);

  mem_read_model #(.LAT(8), .STALL_PCT(25)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      n_req++;
      if (rd_req_addr < lo_addr || rd_req_addr > hi_addr) begin
        failures++;
        $display("request outside the cube: %h", rd_req_addr);
      end
    end
    if (out_valid && out_ready) begin
      real e, g;
      checks++;
      if (vals.size() == 0) begin
        failures++;
        $display("extra value");
      end else begin
        e = vals.pop_front();
        g = fix2r(out_data);
        if ((g > e ? g - e : e - g) > 1.0 / real'(1 << FRAC)) begin
          failures++;
          if (failures < 10) $display("got %f expected %f", g, e);
        end
      end
    end
  end

  task automatic run(input int n, input mem_addr_t b, input bit stall, output longint cycles);
    longint t0;
    vals.delete();
    for (int w = 0; w < (n + LANES - 1) / LANES; w++) begin
      mem_word_t d;
      d = '0;
      for (int l = 0; l < LANES; l++) begin
        real x;
        x = f322r(r2f32(100.0 * (real'($urandom_range(200000)) / 100000.0 - 1.0)));
        d[32*l +: 32] = r2f32(x);
        if (w * LANES + l < n) vals.push_back(x);
      end
      u_mem.put(b + w, d);
    end
    lo_addr = b;
    hi_addr = b + (n + LANES - 1) / LANES - 1;
    n_req = 0;
    u_mem.stall_pct = stall ? 25 : 0;
    @(negedge clk);
    base = b;
    n_elems = n;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc;
    while (busy) begin
      out_ready = stall ? ($urandom_range(99) < 60) : 1'b1;
      @(negedge clk);
    end
    cycles = cyc - t0;
    checks++;
    if (vals.size() != 0) begin failures++; $display("%0d values missing", vals.size()); end
    checks++;
    if (n_req != (n + LANES - 1) / LANES) begin
      failures++;
      $display("%0d requests for %0d values", n_req, n);
    end
  endtask

  initial begin
    longint c;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1000 + 7, 32'h0000_1230, 1'b1, c);
    repeat (5) @(posedge clk);
    run(2000, 32'h0002_0000, 1'b0, c);
    checks++;
    if (c > 2000 + 20) begin failures++; $display("2000 values took %0d cycles", c); end
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
