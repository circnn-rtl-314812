// tb_fft_sequencer: runs forward and inverse transforms of sizes 64, 32 and 8
// on an 8-lane, 2-level basic computing block (so 3, 3 with one bypassed
// level, and 2 with one bypassed level passes) and compares the results with
// a DFT computed here: forward results are DFT/k, inverse results the
// unscaled inverse DFT. It also checks the cycle count from start to done
// against npass*(k/P + L + 2), L = D the block latency, counts the drain
// (bubble) cycles and checks the half-spectrum read (bin k/2 packed into
// bin 0). A second sequencer with intra-level pipelining (INTRA = 1,
// L = 2*D) runs the same transforms alongside and is checked the same way.
module tb_fft_sequencer;
  import circnn_pkg::*;
  localparam int P = 8, D = 2, K = 64;
  logic clk = 0, rst_n = 0;
  logic [3:0] log2k;
  logic start, inverse, busy, done, bubble, busy_i, done_i, bubble_i, rd_half;
  logic [P-1:0] ld_en;
  logic [2:0] ld_grp, rd_grp;
  cplx_t ld_data [P], rd_data [P], rd_data_i [P];
  int checks = 0, failures = 0, bubbles = 0;

  fft_sequencer #(.P(P), .D(D), .K(K)) dut (.*);
  fft_sequencer #(.P(P), .D(D), .K(K), .INTRA(1)) dut_i (
    .clk, .rst_n, .log2k, .start, .inverse, .busy(busy_i), .done(done_i),
    .bubble(bubble_i), .ld_en, .ld_grp, .ld_data, .rd_grp, .rd_half, .rd_data(rd_data_i));
  always #5 clk = ~clk;
  always @(posedge clk) if (bubble) bubbles++;

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %0f expected %0f", what, got, exp);
    end
  endtask

  task automatic run(int lk, bit inv);
    int k, ngrp, npass, cyc, cyc0, cyc1;
    real xr [K], xi [K];
    k = 1 << lk; ngrp = k / P; npass = (lk + D - 1) / D;
    for (int n = 0; n < k; n++) begin
      xr[n] = real'($urandom_range(inv ? 200 : 8000)) - (inv ? 100.0 : 4000.0);
      xi[n] = inv ? real'($urandom_range(200)) - 100.0 : 0.0;
    end
    log2k = 4'(lk);
    for (int g = 0; g < ngrp; g++) begin
      @(negedge clk);
      ld_en = '1; ld_grp = 3'(g);
      for (int l = 0; l < P; l++) begin
        ld_data[l].re = 16'(int'(xr[g*P+l]));
        ld_data[l].im = 16'(int'(xi[g*P+l]));
      end
    end
    @(negedge clk);
    ld_en = '0; start = 1; inverse = inv;
    @(negedge clk);
    start = 0;
    cyc = 1; cyc0 = 0; cyc1 = 0;
    while (cyc0 == 0 || cyc1 == 0) begin
      if (done && cyc0 == 0) cyc0 = cyc;
      if (done_i && cyc1 == 0) cyc1 = cyc;
      @(negedge clk);
      cyc++;
    end
    checks += 2;
    if (cyc0 != npass * (ngrp + D + 2)) begin
      failures++;
      $display("FAIL k=%0d cycles %0d expected %0d", k, cyc0, npass * (ngrp + D + 2));
    end
    if (cyc1 != npass * (ngrp + 2 * D + 2)) begin
      failures++;
      $display("FAIL intra k=%0d cycles %0d expected %0d", k, cyc1, npass * (ngrp + 2 * D + 2));
    end
    @(negedge clk);
    for (int f = 0; f < k; f++) begin
      real er, ei;
      er = 0.0; ei = 0.0;
      for (int n = 0; n < k; n++) begin
        real a;
        a = (inv ? 2.0 : -2.0) * 3.141592653589793 * f * n / k;
        er += xr[n] * $cos(a) - xi[n] * $sin(a);
        ei += xr[n] * $sin(a) + xi[n] * $cos(a);
      end
      if (!inv) begin er /= k; ei /= k; end
      rd_grp = 3'(f / P);
      #1;
      check("re", real'(rd_data[f % P].re), er, inv ? 2.0 * lk + 2.0 : 3.0);
      check("im", real'(rd_data[f % P].im), ei, inv ? 2.0 * lk + 2.0 : 3.0);
      check("intra re", real'(rd_data_i[f % P].re), er, inv ? 2.0 * lk + 2.0 : 3.0);
      check("intra im", real'(rd_data_i[f % P].im), ei, inv ? 2.0 * lk + 2.0 : 3.0);
    end
    // half-spectrum read: bin k/2 packed into the imaginary part of bin 0
    if (!inv) begin
      cplx_t b0, bn;
      rd_grp = 3'((k / 2) / P);
      #1 bn = rd_data[(k / 2) % P];
      rd_grp = 0;
      #1 b0 = rd_data[0];
      rd_half = 1;
      #1;
      check("packed re", real'(rd_data[0].re), real'(b0.re), 0.0);
      check("packed im", real'(rd_data[0].im), real'(bn.re), 0.0);
      check("packed lane 1", real'(rd_data[1].im), real'(rd_data_i[1].im), 3.0);
      rd_half = 0;
    end
  endtask

  initial begin
    log2k = 6; start = 0; inverse = 0; ld_en = '0; ld_grp = '0; rd_grp = '0; rd_half = 0;
    for (int l = 0; l < P; l++) ld_data[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      run(6, 0); run(6, 1);
      run(5, 0); run(5, 1);
      run(3, 0); run(3, 1);
    end
    checks++;
    if (bubbles == 0) begin failures++; $display("FAIL no drain cycles seen"); end
    $display("drain cycles %0d", bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
