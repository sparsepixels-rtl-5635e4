// sparse_conv: sparsity-preserving 2D convolution (same padding, unit stride) computed on
// the feature and hash arrays only.
//
// For every output slot and output channel, every input slot is visited: the coordinate
// offset (dh, dw) between the two slots is taken from the hash array, and if it lies inside
// the K x K field (|dh|, |dw| <= (K-1)/2) the kernel position (R-dh)*K + (R-dw) selects the
// weights, which are dotted with the input slot's channels. Offsets outside the field add
// nothing. No loop runs over the K*K kernel positions, so the work is N*N*CIN*COUT
// multiplies whatever K is. The bias is added, and a padded output slot (coordinates
// (0,0)) is forced to zero so that it stays inactive. The hash array leaves unchanged.
// All of this follows the published algorithm; every loop is unrolled into parallel logic.
//
// Weight layout: weight[pos][cout][cin] with pos the flattened kernel position, as in the
// published index order (position, then output channel, then input channel).
// Arithmetic (own choice): products are kept exact, summed with the bias aligned to them,
// then shifted back to FRAC fractional bits (truncation towards minus infinity) and
// saturated to DW bits.
//
// Timing: one register stage. in_valid loads the result; out_valid follows one cycle later
// and the outputs hold until the next in_valid.
module sparse_conv
  import sparsepixels_pkg::*;
#(
  parameter int unsigned N       = N_ACTIVE_MAX,
  parameter int unsigned CIN     = IMG_C,
  parameter int unsigned COUT    = C1,
  parameter int unsigned K       = K1,
  parameter int unsigned DW      = DATA_W,
  parameter int unsigned FRAC    = FRAC_W,
  parameter int unsigned COORD_W = $clog2(IMG_H + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_feat  [N][CIN],
  input  logic [COORD_W-1:0]   in_h     [N],
  input  logic [COORD_W-1:0]   in_w     [N],
  input  logic signed [DW-1:0] weight   [K*K][COUT][CIN],
  input  logic signed [DW-1:0] bias     [COUT],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_feat [N][COUT],
  output logic [COORD_W-1:0]   out_h    [N],
  output logic [COORD_W-1:0]   out_w    [N]
);

  localparam int R     = (int'(K) - 1) / 2;
  localparam int ACC_W = 2 * DW + $clog2(N * CIN + 2) + 1;

  logic signed [DW-1:0] res [N][COUT];

  // one multiply-accumulate tree per output slot and filter
  for (genvar po = 0; po < N; po++) begin : g_out
    for (genvar co = 0; co < COUT; co++) begin : g_filt
      always_comb begin
        int                      dh, dw, pos;
        logic signed [ACC_W-1:0] acc;
        dh  = 0;
        dw  = 0;
        pos = 0;
        acc = '0;
        for (int pi = 0; pi < N; pi++) begin
          dh = int'(in_h[po]) - int'(in_h[pi]);
          dw = int'(in_w[po]) - int'(in_w[pi]);
          if (dh >= -R && dh <= R && dw >= -R && dw <= R) begin
            pos = (R - dh) * int'(K) + (R - dw);
            for (int ci = 0; ci < CIN; ci++)
              acc = acc + ACC_W'(weight[pos][co][ci] * in_feat[pi][ci]);
          end
        end
        acc = acc + (ACC_W'(bias[co]) <<< FRAC);
        if (in_h[po] == '0 && in_w[po] == '0) res[po][co] = '0;   // padded slot
        else                                  res[po][co] = sat(48'(acc >>> FRAC));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) begin
        out_h[i] <= '0;
        out_w[i] <= '0;
        for (int c = 0; c < COUT; c++) out_feat[i][c] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_feat <= res;
        out_h    <= in_h;
        out_w    <= in_w;
      end
    end
  end

endmodule
