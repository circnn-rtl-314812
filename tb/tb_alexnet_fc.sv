// tb_alexnet_fc: runs fully-connected layers of AlexNet's size on the engine
// at its default parameters, with block size 128:
//   FC6  9216 -> 4096  (72 x 32 circulant blocks, ReLU)
//   FC8  4096 -> 1000, padded to 1024 outputs (32 x 8 blocks, no ReLU)
// Both layers' weight spectra are loaded first and stay in the weight RAM
// together as half spectra (4608 + 512 of its 32768 words), then each
// layer is run on one random input vector. The weights are random; the expected outputs are
// computed here from the block-circulant matrices in real arithmetic, and
// the testbench reports the rms and largest error and the cycle count.
module tb_alexnet_fc;
  import circnn_pkg::*;
  localparam int P = 32, LK = 7, KB = 128;
  localparam real TOL = 64.0;   // units of 2^-8

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
  real ct [KB], st [KB];

  // weights of both layers, w[layer][block][t]
  real w6 [][], w8 [][];
  real b6 [], b8 [];

  task automatic load(ref real w [][], ref real bias [], input int pb, input int qb,
                      input int wbase, input int bbase, input real wscale);
    int nw;
    nw = KB / (2 * P);   // weight words per block: half spectra
    w = new[pb*qb];
    bias = new[pb*KB];
    foreach (w[b]) begin
      w[b] = new[KB];
      foreach (w[b][t]) w[b][t] = (real'($urandom_range(2000)) - 1000.0) / 1000.0 * wscale;
    end
    for (int b = 0; b < pb*qb; b++)
      for (int g = 0; g < nw; g++) begin
        @(negedge clk);
        w_we = 1; w_waddr = 15'(wbase + b * nw + g);
        for (int l = 0; l < P; l++) begin
          real sr, si;
          int f;
          f = g * P + l; sr = 0.0; si = 0.0;
          for (int t = 0; t < KB; t++) begin
            sr += w[b][t] * ct[(f * t) % KB];
            si -= w[b][t] * st[(f * t) % KB];
          end
          // half spectra: the real bin KB/2 rides in the imaginary part of bin 0
          if (nw < KB / P && f == 0) begin
            si = 0.0;
            for (int t = 0; t < KB; t++) si += (t % 2 == 0) ? w[b][t] : -w[b][t];
          end
          w_wdata[l].re = 16'($rtoi($floor(sr * 256.0 + 0.5)));
          w_wdata[l].im = 16'($rtoi($floor(si * 256.0 + 0.5)));
        end
      end
    for (int e = 0; e < pb*KB; e++) begin
      @(negedge clk);
      w_we = 0; b_we = 1; b_waddr = 14'(bbase + e);
      bias[e] = real'(int'($urandom_range(100)) - 50) / 256.0;
      b_wdata = 16'($rtoi(bias[e] * 256.0));
    end
    @(negedge clk);
    b_we = 0;
  endtask

  task automatic run(string name, ref real w [][], ref real bias [], input int pb, input int qb,
                     input int wbase, input int bbase, input bit relu);
    real x [];
    real expv [];
    real max_err, sq;
    int n_out, cyc;
    x = new[qb*KB];
    foreach (x[c]) x[c] = real'(int'($urandom_range(512)) - 256) / 256.0;
    expv = new[pb*KB];
    for (int i = 0; i < pb; i++)
      for (int r = 0; r < KB; r++) begin
        real s;
        s = bias[i*KB + r];
        for (int j = 0; j < qb; j++)
          for (int c = 0; c < KB; c++)
            s += w[i*qb + j][(r - c + KB) % KB] * x[j*KB + c];
        if (relu && s < 0.0) s = 0.0;
        expv[i*KB + r] = s;
      end
    cfg = '{log2k: 4'(LK), p_blk: 8'(pb), q_blk: 8'(qb), n_vec: 16'd1,
            relu_en: relu, pool_n: 4'd1, w_base: 20'(wbase), b_base: 16'(bbase)};
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    n_out = 0; max_err = 0.0; sq = 0.0;
    fork
      begin
        int n;
        n = 0;
        in_valid = 1;
        in_data = 16'($rtoi(x[0] * 256.0));
        while (n < qb*KB) begin
          @(posedge clk);
          if (in_valid && in_ready) n++;
          #1;
          if (n < qb*KB) in_data = 16'($rtoi(x[n] * 256.0));
          else in_valid = 0;
        end
      end
      begin
        out_ready = 1;
        while (n_out < pb*KB) begin
          @(posedge clk);
          cyc++;
          if (out_valid) begin
            real err;
            err = real'(out_data) - expv[n_out] * 256.0;
            if (err < 0.0) err = -err;
            if (err > max_err) max_err = err;
            sq += err * err;
            checks++;
            if (err > TOL) begin
              failures++;
              if (failures < 10) $display("FAIL %s output %0d got %0d expected %0f",
                                          name, n_out, out_data, expv[n_out] * 256.0);
            end
            n_out++;
          end
        end
      end
    join
    while (busy) @(posedge clk);
    $display("%s: %0d outputs in %0d cycles, rms error %0f, max error %0f (units of 2^-8)",
             name, n_out, cyc, $sqrt(sq / n_out), max_err);
  endtask

  initial begin
    for (int t = 0; t < KB; t++) begin
      ct[t] = $cos(2.0 * 3.141592653589793 * t / KB);
      st[t] = $sin(2.0 * 3.141592653589793 * t / KB);
    end
    start = 0; cfg = '0; w_we = 0; b_we = 0; w_waddr = 0; b_waddr = 0; b_wdata = 0;
    in_valid = 0; in_data = 0; out_ready = 0;
    for (int l = 0; l < P; l++) w_wdata[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(w6, b6, 32, 72, 0, 0, 0.02);
    load(w8, b8, 8, 32, 4608, 4096, 0.03);
    run("FC6 9216x4096", w6, b6, 32, 72, 0, 0, 1);
    run("FC8 4096x1024", w8, b8, 8, 32, 4608, 4096, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
