// predictor_fusion_layer_tb: runs the entropy predictor's fusion MLP on one
// full-size 128 x 128 array with its anomaly detection row.
//
// The fusion MLP takes the 128-element concatenation of the 64 image features
// and the 64 prompt features, applies Linear 128->128, ReLU and Linear
// 128->1. Here a batch of 32 random INT8 feature vectors goes through the
// first layer with the AD bound set to 127 x an output scale of 256; then ReLU
// and re-quantisation (shift by 8, saturate to INT8) are done in the
// testbench, and the second layer runs on the same array, with its single
// weight column in column 0. Both layers are checked against a reference
// computed here. The weights are random: this exercises the array at
// the predictor's layer sizes, not a trained predictor.
module predictor_fusion_layer_tb;
  localparam int N = 128, DW = 8, AW = 24, NV = 32, SCALE = 256;
  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [6:0] w_row = '0;
  logic signed [N-1:0][DW-1:0] w_data = '0, x_in = '0;
  logic x_valid = 0;
  logic [AW-2:0] ad_bound = '1;
  logic y_valid;
  logic signed [N-1:0][AW-1:0] y_out;
  logic [N-1:0] y_anom;

  systolic_array dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, n_cleared = 0;
  int W1 [N][N];
  int W2 [N];
  int X  [NV][N];
  int H  [NV][N];     // first-layer results after AD
  int Y2 [NV];
  always @(posedge clk) cycle++;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(int layer);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      w_we = 1; w_row = 7'(r);
      for (int c = 0; c < N; c++) w_data[c] = DW'((layer == 1) ? W1[r][c] : ((c == 0) ? W2[r] : 0));
    end
    @(negedge clk); w_we = 0;
  endtask

  // stream NV vectors (from X for layer 1, from requantised H for layer 2)
  task automatic run_layer(int layer, int bound);
    int got, acc, exp_y, t0, t_first;
    bit exp_a;
    ad_bound = (AW-1)'(bound);
    got = 0; t_first = -1;
    fork
      begin
        for (int v = 0; v < NV; v++) begin
          @(negedge clk);
          x_valid = 1;
          for (int r = 0; r < N; r++) x_in[r] = DW'((layer == 1) ? X[v][r] : H[v][r]);
          if (v == 0) t0 = cycle + 1;
        end
        @(negedge clk); x_valid = 0;
      end
      begin
        while (got < NV) begin
          @(negedge clk);
          if (y_valid) begin
            if (t_first < 0) t_first = cycle;
            for (int c = 0; c < ((layer == 1) ? N : 1); c++) begin
              acc = 0;
              for (int r = 0; r < N; r++)
                acc += ((layer == 1) ? X[got][r] * W1[r][c] : H[got][r] * W2[r]);
              exp_a = (acc > bound) || (acc < -bound);
              exp_y = exp_a ? 0 : acc;
              checks++;
              if (int'(signed'(y_out[c])) != exp_y || y_anom[c] != exp_a) begin
                failures++;
                $display("FAIL layer %0d vec %0d col %0d: %0d exp %0d", layer, got, c, signed'(y_out[c]), exp_y);
              end
              if (exp_a) n_cleared++;
              if (layer == 1) H[got][c] = exp_y;
              else            Y2[got] = exp_y;
            end
            got++;
          end
        end
      end
    join
    checks++;
    if (t_first - t0 != 2 * N - 1) begin failures++; $display("FAIL latency %0d", t_first - t0); end
  endtask

  initial begin
    for (int r = 0; r < N; r++) begin
      W2[r] = int'($urandom_range(0, 63)) - 32;
      for (int c = 0; c < N; c++) W1[r][c] = int'($urandom_range(0, 63)) - 32;
    end
    for (int v = 0; v < NV; v++) for (int r = 0; r < N; r++) X[v][r] = int'($urandom_range(0, 255)) - 128;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights(1);
    run_layer(1, 127 * SCALE);
    // ReLU and re-quantisation to INT8 for the next layer
    for (int v = 0; v < NV; v++)
      for (int r = 0; r < N; r++) begin
        int q;
        q = (H[v][r] < 0) ? 0 : (H[v][r] >>> 8);
        H[v][r] = (q > 127) ? 127 : q;
      end
    load_weights(2);
    run_layer(2, 4194303);
    $display("fusion layer: %0d of %0d first-layer results cleared; predicted-entropy accumulator of frame 0 = %0d",
             n_cleared, NV * N, Y2[0]);
    checks++;
    if (n_cleared == 0) begin failures++; $display("FAIL no anomaly cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
