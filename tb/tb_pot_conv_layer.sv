// tb_pot_conv_layer: a small convolution layer computed on the PoT MAC.
//
// One output channel of a 3x3 convolution (stride 1, zero padding 1) over an
// 8x8 feature map with 16 input channels, the shape of the first stage of a
// CIFAR ResNet20; each output pixel is a dot product of 3*3*16 = 144 terms
// streamed through the MAC one term per clock. Activations are 0..127 (after
// a ReLU); weight exponents are drawn with small magnitudes more likely, as
// in a trained layer.
//
// Two units run side by side on the same activations:
//   dut    default unit, 4-bit weights (levels 1 .. 1/128), no zero code;
//   dut_pz PRUNE_ZERO = 1, running the layer pruned with the smallest level
//          removed (exponent code 7 = weight 0).
// Each output is compared with the same convolution worked out in this file
// (per-term truncation to 1/16, as the unit does); the largest difference
// from the exact real-valued convolution is printed as a measure of the
// truncation error and must stay below 144/16.
module tb_pot_conv_layer;
  localparam int H = 8, W = 8, C = 16, K = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, first = 0;
  logic signed [7:0]  act = '0;
  logic        [3:0]  wt = '0, wt_pz = '0;
  logic signed [15:0] acc, acc_pz;
  logic               acc_valid, acc_valid_pz;

  pot_mac dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first),
               .act(act), .weight(wt), .acc(acc), .acc_valid(acc_valid));
  pot_mac #(.PRUNE_ZERO(1'b1)) dut_pz (
               .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first),
               .act(act), .weight(wt_pz), .acc(acc_pz), .acc_valid(acc_valid_pz));

  always #5 clk = ~clk;

  int fmap [H][W][C];
  bit wsign [K][K][C];
  int wexp  [K][K][C];
  int checks = 0, failures = 0, n_pruned = 0;
  real max_err = 0.0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // truncated term in 1/16 units, as specified for the unit
  function automatic int tterm(int a, bit s, int e, bit zero);
    int mag;
    if (zero) return 0;
    mag = int'($floor(real'(a) * 16.0 / (2.0 ** e)));
    return s ? -mag : mag;
  endfunction

  initial begin
    // layer data
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int c = 0; c < C; c++) fmap[y][x][c] = $urandom_range(0, 127);
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        for (int c = 0; c < C; c++) begin
          int r;
          wsign[i][j][c] = 1'($urandom_range(0, 1));
          r = $urandom_range(0, 99);
          // most weights near zero: exponents 3..7 dominate
          wexp[i][j][c] = (r < 3) ? 0 : (r < 10) ? 1 : (r < 25) ? 2 : (r < 45) ? 3 :
                          (r < 62) ? 4 : (r < 77) ? 5 : (r < 90) ? 6 : 7;
          if (wexp[i][j][c] == 7) n_pruned++;
        end

    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (int oy = 0; oy < H; oy++) begin
      for (int ox = 0; ox < W; ox++) begin
        int  ref_t, ref_p, n;
        real exact;
        ref_t = 0; ref_p = 0; exact = 0.0; n = 0;
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++)
            for (int c = 0; c < C; c++) begin
              int iy, ix, a;
              iy = oy + i - 1;
              ix = ox + j - 1;
              a  = (iy < 0 || iy >= H || ix < 0 || ix >= W) ? 0 : fmap[iy][ix][c];
              ref_t += tterm(a, wsign[i][j][c], wexp[i][j][c], 1'b0);
              ref_p += tterm(a, wsign[i][j][c], wexp[i][j][c], wexp[i][j][c] == 7);
              exact += real'(a) * (wsign[i][j][c] ? -1.0 : 1.0) / (2.0 ** wexp[i][j][c]);
              @(negedge clk);
              in_valid = 1;
              first    = (n == 0);
              act      = 8'(a);
              wt       = {wsign[i][j][c], 3'(wexp[i][j][c])};
              wt_pz    = wt;
              n++;
            end
        @(negedge clk) in_valid = 0;
        @(negedge clk);
        checks++;
        if (!acc_valid || int'(acc) != ref_t) begin
          failures++;
          $display("FAIL pixel (%0d,%0d) acc=%0d expected %0d", oy, ox, acc, ref_t);
        end
        checks++;
        if (!acc_valid_pz || int'(acc_pz) != ref_p) begin
          failures++;
          $display("FAIL pruned pixel (%0d,%0d) acc=%0d expected %0d", oy, ox, acc_pz, ref_p);
        end
        if ((exact - real'(acc) / 16.0) > max_err) max_err = exact - real'(acc) / 16.0;
        if ((real'(acc) / 16.0 - exact) > max_err) max_err = real'(acc) / 16.0 - exact;
      end
    end

    $display("outputs=%0d pruned weights=%0d of %0d max |acc/16 - exact| = %f",
             H * W, n_pruned, K * K * C, max_err);
    checks++;
    if (max_err >= real'(K * K * C) / 16.0) begin failures++; $display("FAIL truncation error too large"); end
    checks++;
    if (n_pruned == 0) begin failures++; $display("FAIL no pruned weight in the layer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
