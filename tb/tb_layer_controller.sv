// tb_layer_controller: drives the control subsystem alone, with the FFT
// sequencer, RAMs and buffers replaced by simple models, and checks the
// order of its operations for a layer of 2 x 3 blocks of size 16 (P = 4),
// two input vectors and pooling over 2 vectors:
//   - the number of input samples taken, forward FFTs and inverse FFTs;
//   - half spectra (k = 16 >= 2P): S = k/(2P) = 2 words per spectrum, with
//     spec_half set and the packed read (rd_half) used for every store;
//   - every spectrum-RAM write address (j*K/P + g, g < S);
//   - every multiply-accumulate: weight address w_base + (i*q+j)*S + g
//     issued the cycle before, mac_first only for j = 0, the group number;
//   - every post value (the FFT result of element e), its bias address and
//     pooling address and pooling flags;
//   - that it waits while the output buffer is full and while the input
//     buffer is empty, and raises done once.
module tb_layer_controller;
  import circnn_pkg::*;
  localparam int P = 4, K = 16, WDEPTH = 256, SDEPTH = 32, BDEPTH = 64, M_MAX = 64, OUT_DEPTH = 8;
  localparam int LK = 4, PB = 2, QB = 3, NV = 2, WB = 40, BB = 7;
  localparam int S = K / (2 * P);   // spectrum words (half spectra)
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start, busy, done, in_stall, out_stall, in_valid, in_pop;
  data_t in_data, post_val;
  logic [3:0] out_count, fft_log2k;
  logic fft_start, fft_inverse, fft_done;
  logic [P-1:0] ld_en;
  logic [1:0] ld_grp, rd_grp, mac_grp, acc_grp;
  cplx_t ld_data [P], rd_data [P], acc_out [P];
  logic sp_we, rd_half, spec_half;
  logic [4:0] sp_addr;
  logic [7:0] w_addr;
  logic [5:0] b_addr;
  logic mac_valid, mac_first, post_valid, relu_en, pool_first, pool_last;
  logic [5:0] pool_addr;

  layer_controller #(.P(P), .K(K), .WDEPTH(WDEPTH), .SDEPTH(SDEPTH), .BDEPTH(BDEPTH),
                     .M_MAX(M_MAX), .OUT_DEPTH(OUT_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pop = 0, n_fwd = 0, n_inv = 0, n_sp = 0, n_mac = 0, n_post = 0, n_done = 0;
  int n_in_stall = 0, n_out_stall = 0, fft_timer = 0;
  logic [7:0] w_addr_d;
  logic [5:0] b_addr_d;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  // FFT sequencer model: done 6 cycles after start; result of element e is e
  always_comb
    for (int l = 0; l < P; l++) begin
      rd_data[l] = '{re: 16'(int'(rd_grp) * P + l), im: '0};
      acc_out[l] = '0;
    end
  always @(posedge clk) begin
    fft_done <= (fft_timer == 1);
    if (fft_start) fft_timer <= 6;
    else if (fft_timer > 0) fft_timer <= fft_timer - 1;
  end

  always @(posedge clk) if (rst_n) begin
    w_addr_d <= w_addr;
    b_addr_d <= b_addr;
    if (in_pop) n_pop++;
    if (in_stall) n_in_stall++;
    if (out_stall) n_out_stall++;
    if (fft_start) begin if (fft_inverse) n_inv++; else n_fwd++; end
    if (done) n_done++;
    if (sp_we) begin
      int j, g;
      j = (n_sp / S) % QB; g = n_sp % S;
      check("sp_addr", int'(sp_addr), j * (K / P) + g);
      check("rd_grp", int'(rd_grp), g);
      check("rd_half", int'(rd_half), 1);
      check("spec_half", int'(spec_half), 1);
      n_sp++;
    end
    if (mac_valid) begin
      int i, j, g, m;
      m = n_mac % (PB * QB * S);
      i = m / (QB * S); j = (m / S) % QB; g = m % S;
      check("w_addr", int'(w_addr_d), WB + (i * QB + j) * S + g);
      check("mac_first", int'(mac_first), int'(j == 0));
      check("mac_grp", int'(mac_grp), g);
      n_mac++;
    end
    if (post_valid) begin
      int v, i, e;
      v = n_post / (PB * K); i = (n_post / K) % PB; e = n_post % K;
      check("post_val", int'(post_val), e);
      check("b_addr", int'(b_addr_d), BB + i * K + e);
      check("pool_addr", int'(pool_addr), i * K + e);
      check("pool_first", int'(pool_first), int'(v % 2 == 0));
      check("pool_last", int'(pool_last), int'(v % 2 == 1));
      n_post++;
    end
  end

  initial begin
    cfg = '{log2k: 4'(LK), p_blk: 8'(PB), q_blk: 8'(QB), n_vec: 16'(NV), relu_en: 1'b1,
            pool_n: 4'd2, w_base: 20'(WB), b_base: 16'(BB)};
    start = 0; in_valid = 0; in_data = 0; out_count = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      in_valid  = ($urandom_range(3) != 0);
      in_data   = 16'($urandom);
      out_count = ($urandom_range(3) == 0) ? 4'd7 : 4'd2;
    end
    repeat (3) @(negedge clk);
    check("input samples", n_pop, NV * QB * K);
    check("forward FFTs", n_fwd, NV * QB);
    check("inverse FFTs", n_inv, NV * PB);
    check("spectrum writes", n_sp, NV * QB * S);
    check("MACs", n_mac, NV * PB * QB * S);
    check("post values", n_post, NV * PB * K);
    check("done pulses", n_done, 1);
    checks++;
    if (n_in_stall == 0 || n_out_stall == 0) begin
      failures++;
      $display("FAIL stalls in %0d out %0d", n_in_stall, n_out_stall);
    end
    $display("input stalls %0d, output stalls %0d", n_in_stall, n_out_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("state %0d pops %0d fwd %0d inv %0d mac %0d post %0d", dut.state, n_pop, n_fwd, n_inv, n_mac, n_post);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
