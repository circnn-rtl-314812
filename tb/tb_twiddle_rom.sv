// tb_twiddle_rom: checks every coefficient of a K = 128 table on two ports
// against cos/-sin computed here, and a few values known by hand
// (W^0 = 1, W^(K/8) = (1-j)/sqrt2, W^(K/4) = -j).
module tb_twiddle_rom;
  import circnn_pkg::*;
  localparam int K = 128;
  logic [5:0] addr [2];
  tw_t        data [2];
  int checks = 0, failures = 0;

  twiddle_rom #(.K(K), .NPORT(2)) dut (.addr, .data);

  task automatic check(string what, int got, int exp, int tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < K/2; i++) begin
      real c, s;
      addr[0] = 6'(i);
      addr[1] = 6'(K/2 - 1 - i);
      #1;
      c = $cos(2.0 * 3.141592653589793 * i / K) * 16384.0;
      s = -$sin(2.0 * 3.141592653589793 * i / K) * 16384.0;
      check("re", int'(data[0].re), int'(c), 1);
      check("im", int'(data[0].im), int'(s), 1);
      c = $cos(2.0 * 3.141592653589793 * (K/2 - 1 - i) / K) * 16384.0;
      check("re port1", int'(data[1].re), int'(c), 1);
    end
    addr[0] = 0;    addr[1] = 6'(K/8); #1;
    check("W0.re", int'(data[0].re), 16384, 0);
    check("W0.im", int'(data[0].im), 0, 0);
    check("W16.re", int'(data[1].re), 11585, 0);
    check("W16.im", int'(data[1].im), -11585, 0);
    addr[0] = 6'(K/4); #1;
    check("W32.re", int'(data[0].re), 0, 0);
    check("W32.im", int'(data[0].im), -16384, 0);
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
