// tb_butterfly: checks the radix-2 butterfly against real-number arithmetic,
// in both pipelining options. Random inputs and twiddles, both directions;
// every output must be within one unit of the exact value (a +/- W*b, halved
// in the forward direction), and large inputs must saturate rather than wrap.
// The combinational unit (INTRA = 0) is checked right after its inputs
// change. The intra-level pipelined unit (INTRA = 1) gets a new set of inputs
// every clock and must show each result exactly one clock later.
module tb_butterfly;
  import circnn_pkg::*;
  logic  clk = 0;
  cplx_t a, b, x0, y0, x1, y1;
  tw_t   w;
  logic  inverse;
  int    checks = 0, failures = 0;

  butterfly #(.INTRA(0)) dut0 (.clk, .a, .b, .w, .inverse, .x(x0), .y(y0));
  butterfly #(.INTRA(1)) dut1 (.clk, .a, .b, .w, .inverse, .x(x1), .y(y1));

  always #5 clk = ~clk;

  function automatic real clip(real v);
    return v > 32767.0 ? 32767.0 : (v < -32768.0 ? -32768.0 : v);
  endfunction

  task automatic check(string what, real got, real exp);
    checks++;
    if (got - exp > 1.01 || exp - got > 1.01) begin
      failures++;
      $display("FAIL %s got %0f expected %0f", what, got, exp);
    end
  endtask

  initial begin
    real wr, wi, tr, ti, s;
    real e [4], prev [4];
    for (int n = 0; n <= 400; n++) begin
      int lim;
      @(negedge clk);
      if (n < 400) begin
        lim     = (n < 300) ? 8000 : 32767;
        a.re    = 16'($urandom_range(2*lim) - lim);
        a.im    = 16'($urandom_range(2*lim) - lim);
        b.re    = 16'($urandom_range(2*lim) - lim);
        b.im    = 16'($urandom_range(2*lim) - lim);
        w.re    = 16'($urandom_range(32768) - 16384);
        w.im    = 16'($urandom_range(32768) - 16384);
        inverse = n[0];
        #1;
        wr = real'(w.re) / 16384.0;
        wi = (inverse ? -1.0 : 1.0) * real'(w.im) / 16384.0;
        tr = real'(b.re) * wr - real'(b.im) * wi;
        ti = real'(b.re) * wi + real'(b.im) * wr;
        s  = inverse ? 1.0 : 0.5;
        e[0] = clip((real'(a.re) + tr) * s);
        e[1] = clip((real'(a.im) + ti) * s);
        e[2] = clip((real'(a.re) - tr) * s);
        e[3] = clip((real'(a.im) - ti) * s);
        check("x.re", real'(x0.re), e[0]);
        check("x.im", real'(x0.im), e[1]);
        check("y.re", real'(y0.re), e[2]);
        check("y.im", real'(y0.im), e[3]);
      end else #1;
      if (n > 0) begin
        check("pipelined x.re", real'(x1.re), prev[0]);
        check("pipelined x.im", real'(x1.im), prev[1]);
        check("pipelined y.re", real'(y1.re), prev[2]);
        check("pipelined y.im", real'(y1.im), prev[3]);
      end
      prev = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
