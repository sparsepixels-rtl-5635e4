// dense_layer: fully connected layer of the MLP classifier that follows the flattening,
// y[o] = b[o] + sum_i w[o][i] * x[i], with an optional ReLU on the result.
//
// All N_IN * N_OUT products are computed in parallel (fully unrolled, as the rest of the
// network). The layer itself is a conventional dense layer; its arithmetic is this
// design's choice: exact products, bias aligned to them, shift back to FRAC fractional bits
// (truncation towards minus infinity) and saturation to DW bits.
//
// Timing: one register stage. in_valid loads the result; out_valid follows one cycle later
// and the output holds until the next in_valid.
module dense_layer
  import sparsepixels_pkg::*;
#(
  parameter int unsigned N_IN  = 48,
  parameter int unsigned N_O   = HIDDEN,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned FRAC  = FRAC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_x   [N_IN],
  input  logic signed [DW-1:0] weight [N_O][N_IN],
  input  logic signed [DW-1:0] bias   [N_O],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_y  [N_O]
);

  localparam int ACC_W = 2 * DW + $clog2(N_IN + 2) + 1;

  logic signed [DW-1:0] res [N_O];

  // one multiply-accumulate tree per output
  for (genvar o = 0; o < N_O; o++) begin : g_out
    always_comb begin
      logic signed [ACC_W-1:0] acc;
      logic signed [DW-1:0]    s;
      acc = ACC_W'(bias[o]) <<< FRAC;
      for (int i = 0; i < N_IN; i++) acc = acc + ACC_W'(weight[o][i] * in_x[i]);
      s = sat(48'(acc >>> FRAC));
      res[o] = (RELU && s[DW-1]) ? '0 : s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < N_O; o++) out_y[o] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_y <= res;
    end
  end

endmodule
