// sparse_avgpool: P x P average pooling (stride P) on the sparse arrays.
//
// Each slot's 1-based coordinates are mapped to pooled coordinates floor((h-1)/P)+1,
// floor((w-1)/P)+1; the invalid flag (0,0) maps to itself. For every slot i and channel c
// the features of all slots that land in the same pool are summed and divided by P*P, so
// absent pixels of the pool count as zeros. Following the published algorithm, a slot's
// features are consumed by the first slot of its pool: the first slot of each pool gets
// the sum and any later slot of the same pool gets zero. This design also writes the
// invalid flag (0,0) into the coordinates of those later slots. The published algorithm
// leaves them at the pooled coordinates, which would make the later sparse convolution
// compute them again and let the flattening overwrite the pooled value with their zero;
// flagging them keeps the pixel set of the next layer free of duplicates.
// All loops are unrolled into parallel logic.
//
// Arithmetic (own choice): the sum is exact; the division by P*P truncates towards zero.
//
// Timing: one register stage. in_valid loads the result; out_valid follows one cycle later
// and the outputs hold until the next in_valid.
module sparse_avgpool
  import sparsepixels_pkg::*;
#(
  parameter int unsigned N       = N_ACTIVE_MAX,
  parameter int unsigned C       = C1,
  parameter int unsigned P       = POOL1,
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

  localparam int SUM_W = DW + $clog2(N + 1) + 1;

  logic [COORD_W-1:0]   ph    [N];
  logic [COORD_W-1:0]   pw    [N];
  logic                 first [N];
  logic signed [DW-1:0] res   [N][C];
  logic [COORD_W-1:0]   rh    [N];
  logic [COORD_W-1:0]   rw    [N];

  // pooled coordinates
  always_comb begin
    for (int i = 0; i < N; i++) begin
      ph[i] = (in_h[i] == '0) ? '0 : COORD_W'((in_h[i] - 1'b1) / COORD_W'(P) + 1'b1);
      pw[i] = (in_w[i] == '0) ? '0 : COORD_W'((in_w[i] - 1'b1) / COORD_W'(P) + 1'b1);
    end
  end

  // first slot of each pool collects the pool; later slots of the same pool are consumed
  always_comb begin
    logic signed [SUM_W-1:0] acc;
    for (int i = 0; i < N; i++) begin
      first[i] = 1'b1;
      for (int j = 0; j < i; j++)
        if (ph[j] == ph[i] && pw[j] == pw[i]) first[i] = 1'b0;
      for (int c = 0; c < C; c++) begin
        acc = '0;
        for (int j = 0; j < N; j++)
          if (ph[j] == ph[i] && pw[j] == pw[i]) acc = acc + SUM_W'(in_feat[j][c]);
        res[i][c] = first[i] ? DW'(acc / $signed(SUM_W'(P * P))) : '0;
      end
      rh[i] = first[i] ? ph[i] : '0;
      rw[i] = first[i] ? pw[i] : '0;
    end
  end

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
        out_feat <= res;
        out_h    <= rh;
        out_w    <= rw;
      end
    end
  end

endmodule
