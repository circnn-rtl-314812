// tb_peripheral_computing_block: (1) accumulates three random complex
// products per bin over all 16 bins, four bins per cycle, and compares the
// accumulators (read through acc_out) with the exact sum of products, scaled
// by 2^-8, within rounding; a large sum must saturate. A third round uses
// half spectra: only bins 0 .. 7 are accumulated, lane 0 of group 0 holding
// the real pair {bin 0, bin 8}, and the read port must return all 16 bins,
// the upper ones as conjugates of the lower ones. (2) streams values
// through bias, ReLU and max pooling over three vectors and compares each
// released maximum with a model; counts ReLU clamps and pooled releases.
module tb_peripheral_computing_block;
  import circnn_pkg::*;
  localparam int P = 4, K = 16, M_MAX = 64;
  logic clk = 0, rst_n = 0;
  logic mac_valid, mac_first, post_valid, relu_en, pool_first, pool_last, half;
  logic [3:0] log2k;
  logic [1:0] mac_grp, acc_grp;
  cplx_t mac_x [P], mac_w [P], acc_out [P];
  data_t post_val, post_bias, out_data;
  logic [5:0] pool_addr;
  logic out_valid, relu_hit;
  int checks = 0, failures = 0, n_relu = 0, n_out = 0;

  peripheral_computing_block #(.P(P), .K(K), .M_MAX(M_MAX)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %0f expected %0f", what, got, exp);
    end
  endtask

  real er [K], ei [K];
  data_t pm [M_MAX];

  initial begin
    mac_valid = 0; mac_first = 0; mac_grp = 0; acc_grp = 0; half = 0; log2k = 4;
    post_valid = 0; post_val = 0; post_bias = 0; relu_en = 0;
    pool_first = 0; pool_last = 0; pool_addr = 0;
    for (int l = 0; l < P; l++) begin mac_x[l] = '0; mac_w[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- multiply-accumulate, twice (second time checks the restart),
    // then once with half spectra ----
    for (int rep = 0; rep < 3; rep++) begin
      half = (rep == 2);
      for (int b = 0; b < K; b++) begin er[b] = 0.0; ei[b] = 0.0; end
      for (int j = 0; j < 3; j++)
        for (int g = 0; g < (half ? K / (2 * P) : K / P); g++) begin
          @(negedge clk);
          mac_valid = 1; mac_first = (j == 0); mac_grp = 2'(g);
          for (int l = 0; l < P; l++) begin
            int b;
            b = g * P + l;
            mac_x[l].re = 16'($urandom_range(4000) - 2000);
            mac_x[l].im = 16'($urandom_range(4000) - 2000);
            mac_w[l].re = 16'($urandom_range(1000) - 500);
            mac_w[l].im = 16'($urandom_range(1000) - 500);
            if (half && b == 0) begin
              er[0] += real'(mac_x[l].re) * real'(mac_w[l].re) / 256.0;
              er[K/2] += real'(mac_x[l].im) * real'(mac_w[l].im) / 256.0;
            end else begin
              er[b] += (real'(mac_x[l].re) * real'(mac_w[l].re) - real'(mac_x[l].im) * real'(mac_w[l].im)) / 256.0;
              ei[b] += (real'(mac_x[l].re) * real'(mac_w[l].im) + real'(mac_x[l].im) * real'(mac_w[l].re)) / 256.0;
            end
          end
        end
      if (half)   // upper bins: conjugates of the lower ones
        for (int b = K / 2 + 1; b < K; b++) begin er[b] = er[K-b]; ei[b] = -ei[K-b]; end
      @(negedge clk);
      mac_valid = 0;
      for (int g = 0; g < K / P; g++) begin
        acc_grp = 2'(g);
        #1;
        for (int l = 0; l < P; l++) begin
          real xr, xi;
          xr = er[g*P+l] > 32767.0 ? 32767.0 : (er[g*P+l] < -32768.0 ? -32768.0 : er[g*P+l]);
          xi = ei[g*P+l] > 32767.0 ? 32767.0 : (ei[g*P+l] < -32768.0 ? -32768.0 : ei[g*P+l]);
          check("acc.re", real'(acc_out[l].re), xr, 2.0);
          check("acc.im", real'(acc_out[l].im), xi, 2.0);
        end
      end
    end
    // saturation: one product of 2000*2000*2/256 = 31250, three of them
    half = 0;
    for (int j = 0; j < 3; j++) begin
      @(negedge clk);
      mac_valid = 1; mac_first = (j == 0); mac_grp = 0;
      for (int l = 0; l < P; l++) begin
        mac_x[l] = '{re: 16'sd2000, im: 16'sd2000};
        mac_w[l] = '{re: 16'sd2000, im: -16'sd2000};
      end
    end
    @(negedge clk);
    mac_valid = 0; acc_grp = 0; #1;
    check("sat.re", real'(acc_out[0].re), 32767.0, 0.0);
    check("sat.im", real'(acc_out[0].im), 0.0, 0.0);
    // ---- bias, ReLU, pooling over 3 vectors of 8 outputs ----
    for (int pass = 0; pass < 2; pass++)
      for (int v = 0; v < 3; v++)
        for (int a = 0; a < 8; a++) begin
          int y;
          @(negedge clk);
          post_valid = 1;
          relu_en    = (pass == 0);
          post_val   = 16'($urandom_range(2000) - 1000);
          post_bias  = 16'($urandom_range(400) - 200);
          pool_first = (v == 0);
          pool_last  = (v == 2);
          pool_addr  = 6'(a + 8 * pass);
          y = int'(post_val) + int'(post_bias);
          if (relu_en && y < 0) begin y = 0; n_relu++; end
          if (v == 0 || y > int'(pm[pool_addr])) pm[pool_addr] = 16'(y);
          @(posedge clk); #1;
          checks++;
          if (out_valid != (v == 2)) begin failures++; $display("FAIL out_valid"); end
          if (out_valid) begin
            n_out++;
            check("pool", real'(out_data), real'(pm[pool_addr]), 0.0);
          end
        end
    @(negedge clk);
    post_valid = 0;
    checks++;
    if (n_relu == 0 || n_out != 16) begin failures++; $display("FAIL relu %0d out %0d", n_relu, n_out); end
    $display("relu clamps %0d, pooled outputs %0d", n_relu, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
