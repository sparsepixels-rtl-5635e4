// tb_sparse_avgpool: self-checking test of the sparse average pooling (P=2 and P=3).
//
// Random frames with unique coordinates on a 9x9 grid and some padded slots. The reference
// accumulates every kept pixel into a dense grid of pools, then walks the slots in order:
// the first slot of each pool gets the pool sum divided by P*P (truncated towards zero) and
// the pooled coordinates; later slots of the same pool, and padded slots, get zero and the
// invalid flag (0,0).
module tb_sparse_avgpool;
  localparam int N = 8, C = 2, DW = 8, CW = 4, G = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, ov2, ov3;
  logic signed [DW-1:0] in_feat [N][C], of2 [N][C], of3 [N][C];
  logic [CW-1:0]        in_h [N], in_w [N], oh2 [N], ow2 [N], oh3 [N], ow3 [N];

  sparse_avgpool #(.N(N), .C(C), .P(2), .DW(DW), .COORD_W(CW)) dut2 (
    .clk, .rst_n, .in_valid, .in_feat, .in_h, .in_w,
    .out_valid(ov2), .out_feat(of2), .out_h(oh2), .out_w(ow2));
  sparse_avgpool #(.N(N), .C(C), .P(3), .DW(DW), .COORD_W(CW)) dut3 (
    .clk, .rst_n, .in_valid, .in_feat, .in_h, .in_w,
    .out_valid(ov3), .out_feat(of3), .out_h(oh3), .out_w(ow3));

  int checks = 0, failures = 0, n_merge = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_p(input int p, input logic signed [DW-1:0] of [N][C],
                         input logic [CW-1:0] oh [N], input logic [CW-1:0] ow [N]);
    int sum [G+1][G+1][C];
    bit claimed [G+1][G+1];
    for (int y = 0; y <= G; y++) for (int x = 0; x <= G; x++) begin
      claimed[y][x] = 0;
      for (int c = 0; c < C; c++) sum[y][x][c] = 0;
    end
    for (int s = 0; s < N; s++)
      if (in_h[s] != 0)
        for (int c = 0; c < C; c++)
          sum[(in_h[s]-1)/p+1][(in_w[s]-1)/p+1][c] += int'(in_feat[s][c]);
    for (int s = 0; s < N; s++) begin
      int eh, ew;
      int ef [C];
      eh = 0; ew = 0;
      for (int c = 0; c < C; c++) ef[c] = 0;
      if (in_h[s] != 0) begin
        int py, px;
        py = (in_h[s]-1)/p+1; px = (in_w[s]-1)/p+1;
        if (!claimed[py][px]) begin
          claimed[py][px] = 1;
          eh = py; ew = px;
          for (int c = 0; c < C; c++) ef[c] = sum[py][px][c] / (p*p);
        end else n_merge++;
      end
      checks++;
      if (int'(oh[s]) != eh || int'(ow[s]) != ew) begin
        failures++; $display("P%0d slot %0d: hash (%0d,%0d) exp (%0d,%0d)", p, s, oh[s], ow[s], eh, ew);
      end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(of[s][c]) != ef[c]) begin
          failures++; $display("P%0d slot %0d ch %0d: %0d exp %0d", p, s, c, of[s][c], ef[c]);
        end
      end
    end
  endtask

  initial begin
    in_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int used [G+1][G+1];
      for (int y = 0; y <= G; y++) for (int x = 0; x <= G; x++) used[y][x] = 0;
      @(negedge clk);
      for (int s = 0; s < N; s++) begin
        if ($urandom_range(99) < 15) begin
          in_h[s] = '0; in_w[s] = '0;
          for (int c = 0; c < C; c++) in_feat[s][c] = '0;
        end else begin
          int y, x;
          do begin y = $urandom_range(1, G); x = $urandom_range(1, G); end while (used[y][x] != 0);
          used[y][x] = 1;
          in_h[s] = CW'(y); in_w[s] = CW'(x);
          for (int c = 0; c < C; c++) in_feat[s][c] = DW'($urandom_range(0, 127));
        end
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!ov2 || !ov3) failures++;
      check_p(2, of2, oh2, ow2);
      check_p(3, of3, oh3, ow3);
    end
    checks++;
    if (n_merge == 0) failures++;
    $display("merged slots %0d", n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
