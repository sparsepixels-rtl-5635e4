// tb_sparse_input_reduce: self-checking test of the sparse input reduction.
//
// A 7x9 two-channel image and a budget of 5 slots (a size that is not a power of two, so
// the tree has uneven splits). The reference is a plain row-major scan that keeps the
// first N_MAX pixels whose channel 0 is above the threshold. Cases: a blank image, images
// with fewer active pixels than slots (padding), with more (truncation), first and last
// pixel active, a negative threshold, and random images; images are offered back to back
// so the initiation interval (N_MAX+1) and latency (N_MAX+1) are checked as well.
module tb_sparse_input_reduce;
  localparam int H = 7, W = 9, C = 2, N = 5, DW = 8;
  localparam int CW = $clog2(((H > W) ? H : W) + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, in_ready, out_valid;
  logic signed [DW-1:0] in_img [H*W][C];
  logic signed [DW-1:0] threshold;
  logic signed [DW-1:0] out_feat [N][C];
  logic [CW-1:0]        out_h [N], out_w [N];

  sparse_input_reduce #(.H(H), .W(W), .C(C), .N_MAX(N), .DW(DW), .COORD_W(CW)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_img, .threshold,
    .out_valid, .out_feat, .out_h, .out_w);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results of the image in flight
  logic signed [DW-1:0] img [H*W][C];
  logic signed [DW-1:0] e_feat [N][C];
  int e_h [N], e_w [N];
  int n_pad_cases = 0, n_trunc_cases = 0;

  task automatic make_ref(input logic signed [DW-1:0] t);
    int k = 0;
    for (int i = 0; i < N; i++) begin
      e_h[i] = 0; e_w[i] = 0;
      for (int c = 0; c < C; c++) e_feat[i][c] = '0;
    end
    for (int r = 0; r < H; r++)
      for (int q = 0; q < W; q++)
        if (img[r*W+q][0] > t) begin
          if (k < N) begin
            e_h[k] = r + 1; e_w[k] = q + 1;
            for (int c = 0; c < C; c++) e_feat[k][c] = img[r*W+q][c];
          end
          k++;
        end
    if (k < N) n_pad_cases++;
    if (k > N) n_trunc_cases++;
  endtask

  task automatic fill(input int mode);
    for (int j = 0; j < H*W; j++)
      for (int c = 0; c < C; c++) begin
        case (mode)
          0: img[j][c] = '0;                                             // blank
          1: img[j][c] = (j == 0 || j == H*W-1 || j == 31) ? DW'(9) : '0; // 3 active incl. ends
          2: img[j][c] = ($urandom_range(99) < 40) ? DW'($urandom_range(1, 100)) : '0; // dense
          default: img[j][c] = ($urandom_range(99) < 8) ? DW'($signed($urandom_range(0, 255))) : '0;
        endcase
      end
  endtask

  int t_accept, t_prev_accept;

  task automatic run_one(input int mode, input logic signed [DW-1:0] t, input bit back_to_back);
    fill(mode);
    make_ref(t);
    @(negedge clk);
    in_img = img;
    threshold = t;
    in_valid = 1'b1;
    // wait for acceptance
    do @(posedge clk); while (!in_ready);
    t_prev_accept = t_accept;
    t_accept = cycle;
    @(negedge clk);
    in_valid = 1'b0;
    // wait for the result
    while (!out_valid) @(negedge clk);
    checks++;
    if (cycle - t_accept != N + 1) begin
      failures++;
      $display("latency %0d, expected %0d", cycle - t_accept, N + 1);
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(out_h[i]) != e_h[i] || int'(out_w[i]) != e_w[i]) begin
        failures++;
        $display("slot %0d: hash (%0d,%0d) expected (%0d,%0d)", i, out_h[i], out_w[i], e_h[i], e_w[i]);
      end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (out_feat[i][c] !== e_feat[i][c]) begin
          failures++;
          $display("slot %0d ch %0d: %0d expected %0d", i, c, out_feat[i][c], e_feat[i][c]);
        end
      end
    end
  endtask

  initial begin
    in_valid = 1'b0;
    threshold = '0;
    for (int j = 0; j < H*W; j++) for (int c = 0; c < C; c++) in_img[j][c] = '0;
    t_accept = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_one(0, 8'sd0, 0);
    run_one(1, 8'sd0, 0);
    run_one(1, 8'sd9, 0);       // nothing strictly above 9
    run_one(2, 8'sd50, 0);
    run_one(2, -8'sd1, 0);      // zero pixels count as active
    for (int k = 0; k < 30; k++) run_one(3, DW'($signed($urandom_range(0, 40))), 0);

    // initiation interval: keep in_valid high for consecutive images
    begin
      int acc_t [4];
      fill(2);
      @(negedge clk);
      in_img = img;
      threshold = 8'sd10;
      in_valid = 1'b1;
      for (int k = 0; k < 4; k++) begin
        do @(posedge clk); while (!in_ready);
        acc_t[k] = cycle;
      end
      @(negedge clk);
      in_valid = 1'b0;
      for (int k = 1; k < 4; k++) begin
        checks++;
        if (acc_t[k] - acc_t[k-1] != N + 1) begin
          failures++;
          $display("initiation interval %0d, expected %0d", acc_t[k] - acc_t[k-1], N + 1);
        end
      end
    end

    checks++;
    if (n_pad_cases == 0 || n_trunc_cases == 0) begin
      failures++;
      $display("padding cases %0d, truncation cases %0d", n_pad_cases, n_trunc_cases);
    end
    $display("padding cases %0d, truncation cases %0d", n_pad_cases, n_trunc_cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
