// sparse_relu: element-wise ReLU on the sparse feature array; the hash array is passed on
// unchanged.
//
// All N*C elements are processed in parallel (the published layer unrolls this loop and
// takes one clock cycle). Padded slots hold zero and stay zero.
//
// Timing: one register stage. in_valid loads the result; out_valid follows one cycle later
// and the outputs hold until the next in_valid.
module sparse_relu
  import sparsepixels_pkg::*;
#(
  parameter int unsigned N       = N_ACTIVE_MAX,
  parameter int unsigned C       = C1,
  parameter int unsigned DW      = DATA_W,
  parameter int unsigned COORD_W = $clog2(IMG_H + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_feat  [N][C],
  input  logic [COORD_W-1:0]   in_h     [N],
  input  logic [COORD_W-1:0]   in_w     [N],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_feat [N][C],
  output logic [COORD_W-1:0]   out_h    [N],
  output logic [COORD_W-1:0]   out_w    [N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) begin
        out_h[i] <= '0;
        out_w[i] <= '0;
        for (int c = 0; c < C; c++) out_feat[i][c] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N; i++)
          for (int c = 0; c < C; c++)
            out_feat[i][c] <= in_feat[i][c][DW-1] ? '0 : in_feat[i][c];
        out_h <= in_h;
        out_w <= in_w;
      end
    end
  end

endmodule
