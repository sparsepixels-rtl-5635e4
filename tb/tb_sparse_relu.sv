// tb_sparse_relu: self-checking test of the sparse ReLU. Random signed features must come
// out as max(x, 0), the hash array unchanged, one cycle after in_valid; outputs must hold
// while in_valid is low.
module tb_sparse_relu;
  localparam int N = 7, C = 3, DW = 8, CW = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, out_valid;
  logic signed [DW-1:0] in_feat [N][C], out_feat [N][C];
  logic [CW-1:0]        in_h [N], in_w [N], out_h [N], out_w [N];

  sparse_relu #(.N(N), .C(C), .DW(DW), .COORD_W(CW)) dut (
    .clk, .rst_n, .in_valid, .in_feat, .in_h, .in_w, .out_valid, .out_feat, .out_h, .out_w);

  int checks = 0, failures = 0, n_neg = 0;

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
    for (int t = 0; t < 200; t++) begin
      logic signed [DW-1:0] keep [N][C];
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        in_h[i] = CW'($urandom_range(0, 63));
        in_w[i] = CW'($urandom_range(0, 63));
        for (int c = 0; c < C; c++) in_feat[i][c] = DW'($urandom_range(0, 255));
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_h[i] != in_h[i] || out_w[i] != in_w[i]) failures++;
        for (int c = 0; c < C; c++) begin
          int x;
          x = int'(in_feat[i][c]);
          if (x < 0) begin x = 0; n_neg++; end
          checks++;
          if (int'(out_feat[i][c]) != x) begin
            failures++; $display("slot %0d ch %0d: %0d exp %0d", i, c, out_feat[i][c], x);
          end
        end
      end
      // hold: change inputs without in_valid
      keep = out_feat;
      for (int i = 0; i < N; i++) for (int c = 0; c < C; c++) in_feat[i][c] = DW'($urandom_range(0, 255));
      @(negedge clk);
      checks++;
      if (out_feat != keep || out_valid) begin failures++; $display("output did not hold"); end
    end
    checks++;
    if (n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
