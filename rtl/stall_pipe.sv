// stall_pipe: LAT-stage register pipeline with a global stall, placed after
// the combinational arithmetic of a dataflow stage. It stands for the
// arithmetic pipeline depth of that stage: a retiming synthesis flow moves
// the registers into the logic in front of it.
//
// Interface: in_ready is high when the pipeline advances this cycle, which
// is whenever its last stage is empty or being drained (out_ready). A word
// accepted at the input appears at the output LAT cycles later if nothing
// stalls; while out_valid && !out_ready every stage holds. Throughput is
// one word per cycle.
module stall_pipe #(
  parameter int W   = 32,
  parameter int LAT = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic [LAT-1:0] vld;
  logic [W-1:0]   data [LAT];
  logic           adv;

  assign adv       = !vld[LAT-1] || out_ready;
  assign in_ready  = adv;
  assign out_valid = vld[LAT-1];
  assign out_data  = data[LAT-1];

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else if (adv) vld <= (vld << 1) | LAT'(in_valid);
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      data[0] <= in_data;
      for (int i = 1; i < LAT; i++) data[i] <= data[i-1];
    end
  end
endmodule
