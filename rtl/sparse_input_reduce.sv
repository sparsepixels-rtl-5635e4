// sparse_input_reduce: keeps up to N_MAX active pixels of a dense image in two compact
// arrays, the feature array (all C channels of each kept pixel) and the hash array (its
// 1-based row and column).
//
// A pixel is active when its channel-0 value is strictly above the threshold. The image is
// captured whole (parallel input). Then, once per slot, a fixed-shape reduction tree
// (active_reduce_tree) returns the leftmost active pixel of the flattened row-major image
// together with its features, which travel up the tree with its index; the features and
// the coordinates (index / W + 1, index % W + 1) are written to the next slot, and the
// pixel is masked so the following pass finds the next one. After N_MAX passes the arrays hold the first N_MAX
// active pixels in row-major order. Slots left over when the image has fewer active pixels
// are padded: coordinates (0,0), which is the invalid flag, and zero features. Every image
// takes the same number of cycles, whatever its sparsity.
//
// The scheme (tree split, combiner, mask-and-repeat, row-major order, padding) follows the
// published algorithm. Own choices: a taken pixel is masked with a separate bit rather
// than by zeroing its value (the same result for any threshold >= 0, and also correct for a
// negative one); padded slots use (0,0) with zero features; one tree pass per clock cycle
// (the published HLS layer needs a few cycles per slot); each pixel's storage, mask bit
// and index decode sit in their own generate block.
//
// Timing: in_ready is high while idle; an image is taken on in_valid && in_ready. The scan
// then runs for N_MAX cycles, after which out_valid is high for one cycle and the outputs
// hold until the next image finishes. Latency from the accepting edge to the out_valid
// cycle is N_MAX + 1 cycles, and a new image can be taken every N_MAX + 1 cycles, which is
// the initiation interval of a whole network built on this layer.
module sparse_input_reduce
  import sparsepixels_pkg::*;
#(
  parameter int unsigned H       = IMG_H,
  parameter int unsigned W       = IMG_W,
  parameter int unsigned C       = IMG_C,
  parameter int unsigned N_MAX   = N_ACTIVE_MAX,
  parameter int unsigned DW      = DATA_W,
  parameter int unsigned COORD_W = $clog2((H > W ? H : W) + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DW-1:0]     in_img    [H*W][C],
  input  logic signed [DW-1:0]     threshold,
  output logic                     out_valid,
  output logic signed [DW-1:0]     out_feat  [N_MAX][C],
  output logic [COORD_W-1:0]       out_h     [N_MAX],
  output logic [COORD_W-1:0]       out_w     [N_MAX]
);

  localparam int unsigned NPIX  = H * W;
  localparam int unsigned IDX_W = (NPIX > 1) ? $clog2(NPIX) : 1;
  localparam int unsigned SLT_W = (N_MAX > 1) ? $clog2(N_MAX) : 1;

  logic [NPIX-1:0]      act;
  logic [NPIX*C*DW-1:0] leaf_data;      // features of every pixel, pixel j at [j*C*DW +: C*DW]
  logic [NPIX-1:0]      grant;          // one-hot of the pixel picked in this pass
  logic                 busy;
  logic                 load;
  logic [SLT_W-1:0]     slot;
  logic                 found;
  logic [IDX_W-1:0]     idx;
  logic [C*DW-1:0]      pick;           // features of the picked pixel

  assign in_ready = !busy;
  assign load     = in_valid && !busy;

  // per-pixel logic: image register, taken flag, leaf activity, one-hot decode
  for (genvar j = 0; j < NPIX; j++) begin : g_pix
    logic signed [DW-1:0] px [C];       // stored features of pixel j
    logic                 tk;           // pixel j already taken in this image

    for (genvar c = 0; c < C; c++) begin : g_ch
      assign leaf_data[(j*C + c)*DW +: DW] = px[c];
    end
    assign act[j]   = (px[0] > threshold) && !tk;
    assign grant[j] = busy && found && (idx == IDX_W'(j));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        px <= '{default: '0};
        tk <= 1'b0;
      end else if (load) begin
        px <= in_img[j];
        tk <= 1'b0;
      end else if (grant[j]) begin
        tk <= 1'b1;
      end
    end
  end

  active_reduce_tree #(.N(NPIX), .IDX_W(IDX_W), .DB(C*DW)) u_tree (
    .act(act), .data(leaf_data), .found(found), .idx(idx), .dout(pick));

  // slot sequencing and the output arrays
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      slot      <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < N_MAX; i++) begin
        out_h[i] <= '0;
        out_w[i] <= '0;
        for (int c = 0; c < C; c++) out_feat[i][c] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (load) begin
        slot <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        for (int c = 0; c < C; c++) out_feat[slot][c] <= $signed(pick[c*DW +: DW]);
        if (found) begin
          out_h[slot] <= COORD_W'(idx / IDX_W'(W) + 1'b1);
          out_w[slot] <= COORD_W'(idx % IDX_W'(W) + 1'b1);
        end else begin
          out_h[slot] <= '0;
          out_w[slot] <= '0;
        end
        if (slot == SLT_W'(N_MAX - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end
        slot <= slot + 1'b1;
      end
    end
  end

endmodule
