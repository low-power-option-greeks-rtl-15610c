// tb_stream_fifo: checks the stream FIFO against a queue model under random
// valid/ready patterns (order, no loss, no duplication, full and empty
// boundaries), and that it passes one word per cycle when both sides are
// always ready, also when it is full.
module tb_stream_fifo;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic        in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [15:0] in_data = '0, out_data;
  logic [15:0] model [$];
  int          n_full = 0;

  stream_fifo #(.W(16), .DEPTH(3)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_data != model[0]) begin
        failures++;
        $display("pop mismatch: got %h", out_data);
      end
      if (model.size() > 0) void'(model.pop_front());
    end
    if (in_valid && in_ready) model.push_back(in_data);
    if (!in_ready) n_full++;
  end

  initial begin
    int popped;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(99) < 60);
        in_data  = 16'($urandom);
      end
      out_ready = ($urandom_range(99) < (((i / 500) % 2 != 0) ? 80 : 30));
    end
    @(negedge clk);
    in_valid = 1'b0;
    out_ready = 1'b1;
    repeat (10) @(posedge clk);
    checks++;
    if (model.size() != 0) begin failures++; $display("words lost: %0d", model.size()); end
    checks++;
    if (n_full == 0) begin failures++; $display("FIFO never filled"); end
    // fill it, then stream with both sides ready: one word per cycle
    @(negedge clk);
    out_ready = 1'b0;
    in_valid = 1'b1;
    repeat (3) begin in_data = 16'($urandom); @(negedge clk); end
    checks++;
    if (in_ready) begin failures++; $display("full FIFO not back-pressuring"); end
    out_ready = 1'b1;
    popped = 0;
    for (int i = 0; i < 50; i++) begin
      in_data = 16'($urandom);
      if (out_valid && out_ready) popped++;
      @(negedge clk);
    end
    checks++;
    if (popped != 50) begin failures++; $display("throughput %0d/50", popped); end
    in_valid = 1'b0;
    repeat (6) @(posedge clk);
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
