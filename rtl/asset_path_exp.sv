// asset_path_exp: the AssetPathExponential dataflow stage. It turns each
// log asset price into the asset price, S = exp(ln S), element by element,
// with no state between elements.
//
// How it works: greeks_pkg::fexp (power-of-two range reduction and a
// degree-6 polynomial in fixed point, saturating at the top of the 12-bit
// integer range) followed by a LAT-stage pipeline.
//
// Interface: valid/ready streams in and out, one element per cycle,
// latency LAT cycles, order preserved.
module asset_path_exp
  import greeks_pkg::*;
#(
  parameter int LAT = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fix_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output fix_t out_data
);
  fix_t s;

  assign s = fexp(in_data);

  stall_pipe #(.W(FIX_W), .LAT(LAT)) u_pipe (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(s),
    .out_valid, .out_ready, .out_data(out_data)
  );
endmodule
