// tb_dense_layer: self-checking test of the dense layer, with and without ReLU. Random
// inputs, weights and biases; the reference forms the exact sum in 64-bit integers, shifts
// it back to FRAC fractional bits (floor), saturates to 8 bits and applies ReLU.
module tb_dense_layer;
  localparam int NI = 10, NO = 4, DW = 8, FRAC = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, ov_r, ov_l;
  logic signed [DW-1:0] in_x [NI];
  logic signed [DW-1:0] weight [NO][NI];
  logic signed [DW-1:0] bias [NO];
  logic signed [DW-1:0] y_r [NO], y_l [NO];

  dense_layer #(.N_IN(NI), .N_O(NO), .RELU(1'b1), .DW(DW), .FRAC(FRAC)) dut_relu (
    .clk, .rst_n, .in_valid, .in_x, .weight, .bias, .out_valid(ov_r), .out_y(y_r));
  dense_layer #(.N_IN(NI), .N_O(NO), .RELU(1'b0), .DW(DW), .FRAC(FRAC)) dut_lin (
    .clk, .rst_n, .in_valid, .in_x, .weight, .bias, .out_valid(ov_l), .out_y(y_l));

  int checks = 0, failures = 0, n_sat = 0, n_neg = 0;

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
      int range;
      range = (t % 2 == 0) ? 40 : 127;
      @(negedge clk);
      for (int i = 0; i < NI; i++) in_x[i] = DW'($signed($urandom_range(0, 2*range)) - range);
      for (int o = 0; o < NO; o++) begin
        bias[o] = DW'($signed($urandom_range(0, 2*range)) - range);
        for (int i = 0; i < NI; i++) weight[o][i] = DW'($signed($urandom_range(0, 2*range)) - range);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!ov_r || !ov_l) failures++;
      for (int o = 0; o < NO; o++) begin
        longint acc;
        int e;
        acc = longint'(bias[o]) * 32;
        for (int i = 0; i < NI; i++) acc += longint'(weight[o][i]) * longint'(in_x[i]);
        acc = acc >>> FRAC;
        if (acc > 127) begin acc = 127; n_sat++; end
        else if (acc < -128) begin acc = -128; n_sat++; end
        e = int'(acc);
        checks += 2;
        if (int'(y_l[o]) != e) begin failures++; $display("lin o%0d: %0d exp %0d", o, y_l[o], e); end
        if (e < 0) begin e = 0; n_neg++; end
        if (int'(y_r[o]) != e) begin failures++; $display("relu o%0d: %0d exp %0d", o, y_r[o], e); end
      end
    end
    checks++;
    if (n_sat == 0 || n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
