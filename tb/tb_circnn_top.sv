// tb_circnn_top: end-to-end test of the engine at its default parameters
// (P = 32 lanes, D = 2 levels, block size up to 128, 4 MB weight RAM).
// The testbench acts as the host: it draws random block-circulant weights
// w_ij (first column of each circulant block), computes FFT(w_ij) in real
// arithmetic, writes the rounded spectra and biases, streams inputs and
// collects outputs. The expected results are computed directly from the
// block-circulant matrix, y = pool(ReLU(W x + b)), in real arithmetic, and
// every output must agree within a fixed-point tolerance.
// Three layers are run:
//   A  FC, k = 128, 2 x 3 blocks, ReLU           (7 stages: bypassed level)
//   B  CONV as matrix product, k = 32, 4 x 2 blocks, 20 vectors, ReLU,
//      max pooling over 2 vectors; the output is held back at first so that
//      the output buffer fills and the engine stalls
//   C  FC, k = 64, 1 x 1 block, no ReLU, 2 vectors (even stage count)
// Layers A and C keep half spectra (k >= 2P: bins 0 .. k/2, weights written
// packed); layer B, with k = P, keeps full spectra, so both modes are used.
// Inputs arrive with random gaps (input stalls). The testbench counts input
// stalls, output stalls, FFT drain bubbles, ReLU clamps and pooled outputs,
// and fails if any of them never happened.
module tb_circnn_top;
  import circnn_pkg::*;
  localparam int P = 32;
  localparam real TOL = 64.0;   // units of 2^-8 (outputs are typically 170 units)

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start, busy, done;
  logic w_we, b_we;
  logic [14:0] w_waddr;
  cplx_t w_wdata [P];
  logic [13:0] b_waddr;
  data_t b_wdata;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t in_data, out_data;
  logic in_stall, out_stall, fft_bubble, relu_hit;

  circnn_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_in_stall = 0, n_out_stall = 0, n_bubble = 0, n_relu = 0, n_pooled = 0;
  real max_err = 0.0, sq_err = 0.0;
  int  n_err = 0;
  always @(posedge clk) begin
    if (in_stall)   n_in_stall++;
    if (out_stall)  n_out_stall++;
    if (fft_bubble) n_bubble++;
    if (relu_hit)   n_relu++;
  end

  // stimulus / expected values of the current layer
  real    xin [$];       // all input samples, in order
  real    expv [$];      // expected outputs, in order
  data_t  got [$];
  int     hold_out;      // 1: keep out_ready low until the engine stalls

  task automatic run_layer(int lk, int pb, int qb, int nv, bit relu, int pool,
                           int wbase, int bbase, bit hold);
    int k, nw;
    real w [][];          // w[(i*qb+j)][t]
    real bias [];
    real a [];
    real yv [][];
    k = 1 << lk;
    nw = (k >= 2 * P) ? k / (2 * P) : k / P;   // weight words per block
    w = new[pb*qb];
    bias = new[pb*k];
    // ---- weights: random first columns, spectra written to the RAM ----
    foreach (w[b]) begin
      w[b] = new[k];
      foreach (w[b][t]) w[b][t] = (real'($urandom_range(2000)) - 1000.0) / 10000.0;
    end
    for (int b = 0; b < pb*qb; b++)
      for (int g = 0; g < nw; g++) begin
        @(negedge clk);
        w_we = 1; w_waddr = 15'(wbase + b * nw + g);
        for (int l = 0; l < P; l++) begin
          real sr, si;
          int f;
          f = g * P + l; sr = 0.0; si = 0.0;
          for (int t = 0; t < k; t++) begin
            sr += w[b][t] * $cos(2.0 * 3.141592653589793 * f * t / k);
            si -= w[b][t] * $sin(2.0 * 3.141592653589793 * f * t / k);
          end
          // half spectra: the real bin k/2 rides in the imaginary part of bin 0
          if (nw < k / P && f == 0) begin
            si = 0.0;
            for (int t = 0; t < k; t++) si += (t % 2 == 0) ? w[b][t] : -w[b][t];
          end
          w_wdata[l].re = 16'($rtoi($floor(sr * 256.0 + 0.5)));
          w_wdata[l].im = 16'($rtoi($floor(si * 256.0 + 0.5)));
        end
      end
    for (int e = 0; e < pb*k; e++) begin
      @(negedge clk);
      w_we = 0; b_we = 1; b_waddr = 14'(bbase + e);
      bias[e] = real'($rtoi((real'($urandom_range(200)) - 100.0))) / 256.0;
      b_wdata = 16'($rtoi(bias[e] * 256.0));
    end
    @(negedge clk);
    b_we = 0;
    // ---- inputs and expected outputs ----
    xin.delete(); expv.delete(); got.delete();
    yv = new[nv];
    for (int v = 0; v < nv; v++) begin
      real x [];
      x = new[qb*k];
      foreach (x[c]) begin
        x[c] = real'(int'($urandom_range(512)) - 256) / 256.0;
        xin.push_back(x[c]);
      end
      yv[v] = new[pb*k];
      for (int i = 0; i < pb; i++)
        for (int r = 0; r < k; r++) begin
          real s;
          s = bias[i*k + r];
          for (int j = 0; j < qb; j++)
            for (int c = 0; c < k; c++)
              s += w[i*qb + j][((r - c) % k + k) % k] * x[j*k + c];
          if (relu && s < 0.0) s = 0.0;
          yv[v][i*k + r] = s;
        end
    end
    for (int v0 = 0; v0 < nv; v0 += (pool > 1 ? pool : 1))
      for (int e = 0; e < pb*k; e++) begin
        real m;
        m = yv[v0][e];
        for (int v = v0 + 1; v < v0 + pool; v++) if (yv[v][e] > m) m = yv[v][e];
        expv.push_back(m);
        if (pool > 1) n_pooled++;
      end
    // ---- run ----
    cfg = '{log2k: 4'(lk), p_blk: 8'(pb), q_blk: 8'(qb), n_vec: 16'(nv),
            relu_en: relu, pool_n: 4'(pool), w_base: 20'(wbase), b_base: 16'(bbase)};
    hold_out = hold;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      // input driver with random gaps
      begin
        int n;
        n = 0;
        while (n < xin.size()) begin
          @(negedge clk);
          if ($urandom_range(2) != 0) begin
            in_valid = 1;
            in_data  = 16'($rtoi(xin[n] * 256.0));
          end else in_valid = 0;
          @(posedge clk);
          if (in_valid && in_ready) n++;   // handshake sampled at the edge
        end
        @(negedge clk);
        in_valid = 0;
      end
      // output collector
      begin
        while (got.size() < expv.size()) begin
          @(negedge clk);
          if (hold_out && n_out_stall > 0) hold_out = 0;
          out_ready = !hold_out && ($urandom_range(3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) got.push_back(out_data);
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    while (busy) @(posedge clk);
    foreach (expv[n]) begin
      real err;
      err = real'(got[n]) - expv[n] * 256.0;
      if (err < 0.0) err = -err;
      if (err > max_err) max_err = err;
      sq_err += err * err;
      n_err++;
      checks++;
      if (err > TOL) begin
        failures++;
        if (failures < 10) $display("FAIL output %0d got %0d expected %0f", n, got[n], expv[n] * 256.0);
      end
    end
  endtask

  initial begin
    start = 0; cfg = '0; w_we = 0; b_we = 0; w_waddr = 0; b_waddr = 0; b_wdata = 0;
    in_valid = 0; in_data = 0; out_ready = 0;
    for (int l = 0; l < P; l++) w_wdata[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(7, 2, 3, 1, 1, 1, 0, 0, 0);
    $display("layer A done, max error %0f", max_err);
    run_layer(5, 4, 2, 20, 1, 2, 2000, 4000, 1);
    $display("layer B done, max error %0f", max_err);
    run_layer(6, 1, 1, 2, 0, 1, 9000, 8000, 0);
    $display("layer C done, max error %0f", max_err);
    $display("rms error %0f (units of 2^-8)", $sqrt(sq_err / n_err));
    $display("input stalls %0d, output stalls %0d, FFT bubbles %0d, ReLU clamps %0d, pooled outputs %0d",
             n_in_stall, n_out_stall, n_bubble, n_relu, n_pooled);
    checks += 5;
    if (n_in_stall == 0)  begin failures++; $display("FAIL no input stall"); end
    if (n_out_stall == 0) begin failures++; $display("FAIL no output stall"); end
    if (n_bubble == 0)    begin failures++; $display("FAIL no FFT bubble"); end
    if (n_relu == 0)      begin failures++; $display("FAIL no ReLU clamp"); end
    if (n_pooled == 0)    begin failures++; $display("FAIL no pooling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
