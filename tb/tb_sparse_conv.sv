// tb_sparse_conv: self-checking test of the sparse convolution.
//
// Random sparse frames (unique coordinates on a small grid so that neighbours are common,
// some slots padded) are convolved by two instances, K=3 and K=5. The reference scatters
// the frame into a dense grid and evaluates the ordinary convolution sum at each kept
// pixel over its K x K window, counting only kept pixels; it then applies the same
// truncation and saturation. Padded outputs must be zero, the hash array unchanged and
// the result must appear one cycle after in_valid.
module tb_sparse_conv;
  localparam int N = 6, CIN = 2, COUT = 3, DW = 8, FRAC = 5, CW = 4, G = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, ov3, ov5;
  logic signed [DW-1:0] in_feat [N][CIN];
  logic [CW-1:0]        in_h [N], in_w [N];
  logic signed [DW-1:0] w3 [9][COUT][CIN];
  logic signed [DW-1:0] w5 [25][COUT][CIN];
  logic signed [DW-1:0] bias [COUT];
  logic signed [DW-1:0] of3 [N][COUT], of5 [N][COUT];
  logic [CW-1:0]        oh3 [N], ow3 [N], oh5 [N], ow5 [N];

  sparse_conv #(.N(N), .CIN(CIN), .COUT(COUT), .K(3), .DW(DW), .FRAC(FRAC), .COORD_W(CW)) dut3 (
    .clk, .rst_n, .in_valid, .in_feat, .in_h, .in_w, .weight(w3), .bias,
    .out_valid(ov3), .out_feat(of3), .out_h(oh3), .out_w(ow3));
  sparse_conv #(.N(N), .CIN(CIN), .COUT(COUT), .K(5), .DW(DW), .FRAC(FRAC), .COORD_W(CW)) dut5 (
    .clk, .rst_n, .in_valid, .in_feat, .in_h, .in_w, .weight(w5), .bias,
    .out_valid(ov5), .out_feat(of5), .out_h(oh5), .out_w(ow5));

  int checks = 0, failures = 0;
  int n_neigh = 0, n_sat = 0, n_pad = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [DW-1:0] ref_out(input int k, input int i, input int co);
    // dense grid of kept pixels (slot index + 1, 0 = empty)
    int grid [G+1][G+1];
    longint acc;
    int r;
    r = (k - 1) / 2;
    for (int y = 0; y <= G; y++) for (int x = 0; x <= G; x++) grid[y][x] = 0;
    for (int s = 0; s < N; s++) if (in_h[s] != 0) grid[in_h[s]][in_w[s]] = s + 1;
    acc = longint'(bias[co]) * (1 << FRAC);
    for (int kh = 0; kh < k; kh++)
      for (int kw = 0; kw < k; kw++) begin
        int y, x;
        y = int'(in_h[i]) + kh - r;
        x = int'(in_w[i]) + kw - r;
        if (y >= 1 && y <= G && x >= 1 && x <= G && grid[y][x] != 0)
          for (int ci = 0; ci < CIN; ci++) begin
            longint wv;
            wv = (k == 3) ? longint'(w3[kh*3+kw][co][ci]) : longint'(w5[kh*5+kw][co][ci]);
            acc += wv * longint'(in_feat[grid[y][x]-1][ci]);
            if (grid[y][x] - 1 != i && co == 0 && ci == 0) n_neigh++;
          end
      end
    acc = acc >>> FRAC;
    if (acc > 127) begin acc = 127; n_sat++; end
    if (acc < -128) begin acc = -128; n_sat++; end
    return DW'(acc);
  endfunction

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
          for (int c = 0; c < CIN; c++) in_feat[s][c] = '0;
        end else begin
          int y, x;
          do begin y = $urandom_range(1, G); x = $urandom_range(1, G); end while (used[y][x] != 0);
          used[y][x] = 1;
          in_h[s] = CW'(y); in_w[s] = CW'(x);
          for (int c = 0; c < CIN; c++) in_feat[s][c] = DW'($urandom_range(0, 255));
        end
      end
      for (int p = 0; p < 25; p++) for (int co = 0; co < COUT; co++) for (int c = 0; c < CIN; c++) begin
        w5[p][co][c] = DW'($urandom_range(0, 255));
        if (p < 9) w3[p][co][c] = DW'($urandom_range(0, 255));
      end
      for (int co = 0; co < COUT; co++) bias[co] = DW'($urandom_range(0, 255));
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!ov3 || !ov5) begin failures++; $display("out_valid missing one cycle after in_valid"); end
      for (int s = 0; s < N; s++) begin
        checks++;
        if (oh3[s] != in_h[s] || ow3[s] != in_w[s] || oh5[s] != in_h[s] || ow5[s] != in_w[s]) begin
          failures++; $display("hash changed at slot %0d", s);
        end
        for (int co = 0; co < COUT; co++) begin
          logic signed [DW-1:0] e3, e5;
          if (in_h[s] == 0) begin e3 = '0; e5 = '0; if (co == 0) n_pad++; end
          else begin e3 = ref_out(3, s, co); e5 = ref_out(5, s, co); end
          checks += 2;
          if (of3[s][co] !== e3) begin failures++; $display("K3 slot %0d co %0d: %0d exp %0d", s, co, of3[s][co], e3); end
          if (of5[s][co] !== e5) begin failures++; $display("K5 slot %0d co %0d: %0d exp %0d", s, co, of5[s][co], e5); end
        end
      end
    end
    $display("neighbour contributions %0d, saturations %0d, padded slots %0d", n_neigh, n_sat, n_pad);
    checks++;
    if (n_neigh == 0 || n_sat == 0 || n_pad == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
