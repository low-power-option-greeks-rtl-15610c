// loop_counter: the four nested loop indices of the reordered kernel
// (batch, asset, timestep, path-in-batch; path innermost), advanced once per
// processed element. This is the loop order the source study obtains by
// loop interchange: consecutive elements belong to different paths, so a
// path's next timestep arrives n_paths elements after its previous one.
//
// Interface: `start` loads zero indices and raises `active`; each `step`
// advances the indices; `last` is high while the indices point at the final
// element, and the step on it clears `active`. The indices are registered.
module loop_counter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        step,
  input  logic [15:0] n_assets,
  input  logic [15:0] n_steps,
  input  logic [15:0] n_paths,
  input  logic [15:0] n_batches,
  output logic        active,
  output logic [15:0] path,
  output logic [15:0] tstep,
  output logic [15:0] asset,
  output logic [15:0] batch,
  output logic        last
);
  logic path_end, step_end, asset_end, batch_end;

  assign path_end  = (path  == n_paths   - 1'b1);
  assign step_end  = (tstep == n_steps   - 1'b1);
  assign asset_end = (asset == n_assets  - 1'b1);
  assign batch_end = (batch == n_batches - 1'b1);
  assign last      = path_end && step_end && asset_end && batch_end;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      path   <= '0;
      tstep  <= '0;
      asset  <= '0;
      batch  <= '0;
    end else if (start && !active) begin
      active <= (n_assets != 0) && (n_steps != 0) && (n_paths != 0) && (n_batches != 0);
      path   <= '0;
      tstep  <= '0;
      asset  <= '0;
      batch  <= '0;
    end else if (step && active) begin
      path <= path_end ? '0 : path + 1'b1;
      if (path_end) begin
        tstep <= step_end ? '0 : tstep + 1'b1;
        if (step_end) begin
          asset <= asset_end ? '0 : asset + 1'b1;
          if (asset_end) batch <= batch + 1'b1;
        end
      end
      if (last) active <= 1'b0;
    end
  end
endmodule
