// tb_sparse_flatten: self-checking test of the sparse flattening. Random frames with unique
// coordinates on a 5x4 grid, some padded, are scattered; the reference builds the dense
// channel-last row-major array directly from a coordinate grid. Every one of the H*W*C
// outputs is compared, so positions that must stay zero are checked too.
module tb_sparse_flatten;
  localparam int N = 6, H = 5, W = 4, C = 2, DW = 8, CW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, out_valid;
  logic signed [DW-1:0] in_feat [N][C];
  logic [CW-1:0]        in_h [N], in_w [N];
  logic signed [DW-1:0] out_flat [H*W*C];

  sparse_flatten #(.N(N), .H(H), .W(W), .C(C), .DW(DW), .COORD_W(CW)) dut (
    .clk, .rst_n, .in_valid, .in_feat, .in_h, .in_w, .out_valid, .out_flat);

  int checks = 0, failures = 0, n_pad = 0;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int grid [H+1][W+1];
      for (int y = 0; y <= H; y++) for (int x = 0; x <= W; x++) grid[y][x] = -1;
      @(negedge clk);
      for (int s = 0; s < N; s++) begin
        if ($urandom_range(99) < 20) begin
          in_h[s] = '0; in_w[s] = '0; n_pad++;
          for (int c = 0; c < C; c++) in_feat[s][c] = DW'($urandom_range(0, 255)); // must be ignored
        end else begin
          int y, x;
          do begin y = $urandom_range(1, H); x = $urandom_range(1, W); end while (grid[y][x] != -1);
          grid[y][x] = s;
          in_h[s] = CW'(y); in_w[s] = CW'(x);
          for (int c = 0; c < C; c++) in_feat[s][c] = DW'($urandom_range(0, 255));
        end
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) failures++;
      for (int y = 1; y <= H; y++)
        for (int x = 1; x <= W; x++)
          for (int c = 0; c < C; c++) begin
            logic signed [DW-1:0] e;
            e = (grid[y][x] < 0) ? '0 : in_feat[grid[y][x]][c];
            checks++;
            if (out_flat[((y-1)*W + (x-1))*C + c] !== e) begin
              failures++; $display("(%0d,%0d,%0d): %0d exp %0d", y, x, c, out_flat[((y-1)*W + (x-1))*C + c], e);
            end
          end
    end
    checks++;
    if (n_pad == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
