// sparse_flatten: turns the sparse arrays back into a flat dense array (channel-last,
// row-major) for the dense layers that follow.
//
// The output starts as all zeros; each valid slot i (coordinates not (0,0)) writes its C
// features at C*((h-1)*W + (w-1)) + c. Slots are applied in index order, so if two slots
// carried the same coordinates the later one would win, as in the published loop. Invalid
// slots write nothing (the published loop has no such case: an invalid slot would give a
// negative index there). All loops are unrolled into parallel logic.
//
// Timing: one register stage. in_valid loads the result; out_valid follows one cycle later
// and the output holds until the next in_valid.
module sparse_flatten
  import sparsepixels_pkg::*;
#(
  parameter int unsigned N       = N_ACTIVE_MAX,
  parameter int unsigned H       = 4,
  parameter int unsigned W       = 4,
  parameter int unsigned C       = C2,
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
  output logic signed [DW-1:0] out_flat [H*W*C]
);

  logic signed [DW-1:0] res [H*W*C];

  always_comb begin
    int pix;
    pix = 0;
    for (int k = 0; k < H * W * C; k++) res[k] = '0;
    for (int i = 0; i < N; i++) begin
      if (in_h[i] != '0 && in_w[i] != '0 && int'(in_h[i]) <= H && int'(in_w[i]) <= W) begin
        pix = (int'(in_h[i]) - 1) * int'(W) + (int'(in_w[i]) - 1);
        for (int c = 0; c < C; c++) res[int'(C) * pix + c] = in_feat[i][c];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < H * W * C; k++) out_flat[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_flat <= res;
    end
  end

endmodule
