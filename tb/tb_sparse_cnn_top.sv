// tb_sparse_cnn_top: end-to-end self-checking test of the sparse CNN (reduced size: 16x16 image, 6-pixel budget, 2 channels per conv).
//
// Synthetic "track" images (short random line segments of above-threshold hits plus
// sub-threshold noise) and random weights are fed through the network back to back. A
// sequential reference model runs the same network layer by layer: row-major extraction
// of the first N_MAX active pixels, the pairwise offset-check convolution, ReLU, the
// first-slot-takes-the-pool average pooling, the scatter flattening and the two dense
// layers, with the same fixed-point rules. Each result is compared with the reference;
// every image must come out exactly N_MAX+10 cycles after it was taken and images must be
// taken every N_MAX+1 cycles. The test counts how often each mechanism occurred (padded
// slots, truncation by the pixel budget, pooling merges, convolution between neighbouring
// pixels, ReLU clipping, saturation) and fails if one never did.
module tb_sparse_cnn_top;
  import sparsepixels_pkg::*;
  localparam int H = 16, W = 16, CI = 1, N = 6;
  localparam int KA = 3, CA = 2, PA = 2, KB = 3, CB = 2, PB = 2, NH = 8, NO = 2;
  localparam int H2    = (((H + PA - 1) / PA) + PB - 1) / PB;
  localparam int W2    = (((W + PA - 1) / PA) + PB - 1) / PB;
  localparam int NFLAT = H2 * W2 * CB;
  localparam int CW    = $clog2(((H > W) ? H : W) + 1);
  localparam int NIMG  = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, in_ready, out_valid;
  logic signed [7:0]    in_img [H*W][CI];
  logic signed [7:0]    threshold;
  logic signed [7:0]    conv1_w [KA*KA][CA][CI];
  logic signed [7:0]    conv1_b [CA];
  logic signed [7:0]    conv2_w [KB*KB][CB][CA];
  logic signed [7:0]    conv2_b [CB];
  logic signed [7:0]    fc1_w [NH][NFLAT];
  logic signed [7:0]    fc1_b [NH];
  logic signed [7:0]    fc2_w [NO][NH];
  logic signed [7:0]    fc2_b [NO];
  logic signed [7:0]    out_logit [NO];

  sparse_cnn_top #(.H(H), .W(W), .CI(CI), .N_MAX(N), .KA(KA), .CA(CA), .PA(PA), .KB(KB), .CB(CB), .PB(PB), .NH(NH), .NO(NO)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_img, .threshold,
    .conv1_w, .conv1_b, .conv2_w, .conv2_b, .fc1_w, .fc1_b, .fc2_w, .fc2_b,
    .out_valid, .out_logit);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_pad = 0, n_trunc = 0, n_merge = 0, n_neigh = 0, n_relu = 0, n_sat = 0;

  initial begin : watchdog
    repeat (NIMG * (N + 2) + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  typedef int frame_t [N][8];   // features, up to 8 channels
  int rh [N], rw [N];
  frame_t rf;

  function automatic int requant(input longint acc);
    acc = acc >>> FRAC_W;
    if (acc > 127) begin n_sat++; return 127; end
    if (acc < -128) begin n_sat++; return -128; end
    return int'(acc);
  endfunction

  function automatic void ref_reduce(input logic signed [7:0] img [H*W][CI], input int t);
    int k = 0;
    for (int i = 0; i < N; i++) begin
      rh[i] = 0; rw[i] = 0;
      for (int c = 0; c < 8; c++) rf[i][c] = 0;
    end
    for (int j = 0; j < H*W; j++)
      if (int'(img[j][0]) > t) begin
        if (k < N) begin
          rh[k] = j / W + 1; rw[k] = j % W + 1;
          for (int c = 0; c < CI; c++) rf[k][c] = int'(img[j][c]);
        end
        k++;
      end
    if (k < N) n_pad++;
    if (k > N) n_trunc++;
  endfunction

  function automatic void ref_conv1();
    frame_t o;
    int r = (KA - 1) / 2;
    for (int po = 0; po < N; po++)
      for (int co = 0; co < CA; co++) begin
        longint a = 0;
        for (int pi = 0; pi < N; pi++) begin
          int dh = rh[po] - rh[pi], dw = rw[po] - rw[pi];
          if (dh >= -r && dh <= r && dw >= -r && dw <= r) begin
            int pos = (r - dh) * KA + (r - dw);
            if (pi != po && rh[po] != 0 && rh[pi] != 0 && co == 0) n_neigh++;
            for (int ci = 0; ci < CI; ci++) a += longint'(conv1_w[pos][co][ci]) * rf[pi][ci];
          end
        end
        a += longint'(conv1_b[co]) * (1 << FRAC_W);
        o[po][co] = (rh[po] == 0 && rw[po] == 0) ? 0 : requant(a);
      end
    rf = o;
  endfunction

  function automatic void ref_conv2();
    frame_t o;
    int r = (KB - 1) / 2;
    for (int po = 0; po < N; po++)
      for (int co = 0; co < CB; co++) begin
        longint a = 0;
        for (int pi = 0; pi < N; pi++) begin
          int dh = rh[po] - rh[pi], dw = rw[po] - rw[pi];
          if (dh >= -r && dh <= r && dw >= -r && dw <= r) begin
            int pos = (r - dh) * KB + (r - dw);
            if (pi != po && rh[po] != 0 && rh[pi] != 0 && co == 0) n_neigh++;
            for (int ci = 0; ci < CA; ci++) a += longint'(conv2_w[pos][co][ci]) * rf[pi][ci];
          end
        end
        a += longint'(conv2_b[co]) * (1 << FRAC_W);
        o[po][co] = (rh[po] == 0 && rw[po] == 0) ? 0 : requant(a);
      end
    rf = o;
  endfunction

  function automatic void ref_relu(input int ch);
    for (int i = 0; i < N; i++)
      for (int c = 0; c < ch; c++)
        if (rf[i][c] < 0) begin rf[i][c] = 0; n_relu++; end
  endfunction

  function automatic void ref_pool(input int p, input int ch);
    int oh [N], ow [N];
    frame_t o, m;
    m = rf;
    for (int i = 0; i < N; i++) begin
      oh[i] = (rh[i] == 0) ? 0 : (rh[i] - 1) / p + 1;
      ow[i] = (rw[i] == 0) ? 0 : (rw[i] - 1) / p + 1;
    end
    for (int i = 0; i < N; i++)
      for (int c = 0; c < ch; c++) begin
        int a = 0;
        for (int j = 0; j < N; j++)
          if (oh[j] == oh[i] && ow[j] == ow[i]) begin
            a += m[j][c];
            m[j][c] = 0;   // consumed
          end
        o[i][c] = a / (p * p);
      end
    for (int i = 0; i < N; i++) begin
      bit dup = 0;
      for (int j = 0; j < i; j++) if (oh[j] == oh[i] && ow[j] == ow[i]) dup = 1;
      if (dup && oh[i] != 0) n_merge++;
      rh[i] = dup ? 0 : oh[i];
      rw[i] = dup ? 0 : ow[i];
    end
    rf = o;
  endfunction

  function automatic void ref_net(input logic signed [7:0] img [H*W][CI], input int t,
                                  output int logits [NO]);
    int flat [NFLAT];
    int hid [NH];
    ref_reduce(img, t);
    ref_conv1();
    ref_relu(CA);
    ref_pool(PA, CA);
    ref_conv2();
    ref_relu(CB);
    ref_pool(PB, CB);
    for (int k = 0; k < NFLAT; k++) flat[k] = 0;
    for (int i = 0; i < N; i++)
      if (rh[i] != 0 && rw[i] != 0)
        for (int c = 0; c < CB; c++) flat[((rh[i]-1) * W2 + (rw[i]-1)) * CB + c] = rf[i][c];
    for (int o = 0; o < NH; o++) begin
      longint a = longint'(fc1_b[o]) * (1 << FRAC_W);
      for (int i = 0; i < NFLAT; i++) a += longint'(fc1_w[o][i]) * flat[i];
      hid[o] = requant(a);
      if (hid[o] < 0) begin hid[o] = 0; n_relu++; end
    end
    for (int o = 0; o < NO; o++) begin
      longint a = longint'(fc2_b[o]) * (1 << FRAC_W);
      for (int i = 0; i < NH; i++) a += longint'(fc2_w[o][i]) * hid[i];
      logits[o] = requant(a);
    end
  endfunction

  // ---------------- stimulus ----------------
  logic signed [7:0] img [H*W][CI];

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // n_tracks short straight segments of hits above threshold 20, plus noise at or below 20
  function automatic void make_image(input int n_tracks);
    for (int j = 0; j < H*W; j++)
      for (int c = 0; c < CI; c++)
        img[j][c] = ($urandom_range(99) < 3) ? 8'(rnd(1, 20)) : 8'sd0;
    for (int k = 0; k < n_tracks; k++) begin
      int y = rnd(0, H - 1), x = rnd(0, W - 1), dy = rnd(-1, 1), dx = rnd(-1, 1), len = rnd(2, 6);
      for (int s = 0; s < len; s++) begin
        if (y >= 0 && y < H && x >= 0 && x < W)
          for (int c = 0; c < CI; c++) img[y*W + x][c] = 8'(rnd(21, 100));
        y += dy; x += dx;
      end
    end
  endfunction

  int exp_q [$];
  int acc_q [$];
  int accepted = 0, received = 0;

  initial begin
    in_valid = 1'b0;
    threshold = 8'sd20;
    for (int j = 0; j < H*W; j++) for (int c = 0; c < CI; c++) in_img[j][c] = '0;
    for (int p = 0; p < KA*KA; p++) for (int a = 0; a < CA; a++) for (int c = 0; c < CI; c++) conv1_w[p][a][c] = 8'(rnd(-24, 24));
    for (int a = 0; a < CA; a++) conv1_b[a] = 8'(rnd(-8, 8));
    for (int p = 0; p < KB*KB; p++) for (int b = 0; b < CB; b++) for (int a = 0; a < CA; a++) conv2_w[p][b][a] = 8'(rnd(-24, 24));
    for (int b = 0; b < CB; b++) conv2_b[b] = 8'(rnd(-8, 8));
    for (int o = 0; o < NH; o++) begin
      fc1_b[o] = 8'(rnd(-8, 8));
      for (int i = 0; i < NFLAT; i++) fc1_w[o][i] = 8'(rnd(-40, 40));
    end
    for (int o = 0; o < NO; o++) begin
      fc2_b[o] = 8'(rnd(-8, 8));
      for (int i = 0; i < NH; i++) fc2_w[o][i] = 8'(rnd(-40, 40));
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < NIMG; n++) begin
      int lg [NO];
      // alternate sparse and busy images so both padding and truncation occur
      make_image((n % 3 == 0) ? 1 : (n % 3 == 1) ? N / 2 : 2 * N);
      ref_net(img, int'(threshold), lg);
      for (int o = 0; o < NO; o++) exp_q.push_back(lg[o]);
      in_img = img;
      in_valid = 1'b1;
      do @(posedge clk); while (!in_ready);
      acc_q.push_back(cycle);
      if (accepted > 0) begin
        checks++;
        if (cycle - acc_q[acc_q.size()-2] != N + 1) begin
          failures++;
          $display("initiation interval %0d, expected %0d", cycle - acc_q[acc_q.size()-2], N + 1);
        end
      end
      accepted++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    wait (received == NIMG);
    $display("padded images %0d, truncated images %0d, pool merges %0d, conv neighbour pairs %0d, relu clips %0d, saturations %0d",
             n_pad, n_trunc, n_merge, n_neigh, n_relu, n_sat);
    checks++;
    if (n_pad == 0 || n_trunc == 0 || n_merge == 0 || n_neigh == 0 || n_relu == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int t0;
      t0 = acc_q.pop_front();
      checks++;
      if (cycle - t0 != N + 10) begin
        failures++;
        $display("image %0d latency %0d, expected %0d", received, cycle - t0, N + 10);
      end
      for (int o = 0; o < NO; o++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_logit[o]) != e) begin
          failures++;
          $display("image %0d logit %0d: %0d expected %0d", received, o, out_logit[o], e);
        end
      end
      received <= received + 1;
    end
  end
endmodule
