// tb_basic_computing_block: an 8-lane, 3-level block does a whole 8-point
// transform in one pass. Groups are streamed one per cycle: full forward
// FFTs (compared with a DFT/8 computed here), full inverse FFTs (compared
// with the unscaled inverse DFT), all levels bypassed (output must equal
// input) and only level 1 enabled (pairwise half-sum/half-difference).
// A second block with intra-level pipelining (INTRA = 1) gets the same
// groups. Each group must come out exactly D = 3 cycles after it went in,
// or 2*D = 6 cycles with intra-level pipelining.
module tb_basic_computing_block;
  import circnn_pkg::*;
  localparam int P = 8, D = 3, K = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, out_valid_i;
  cplx_t in_data [P], out_data [P], out_data_i [P];
  logic [2:0] in_idx [P], out_idx [P], out_idx_i [P];
  bcb_cmd_t in_cmd;
  int checks = 0, failures = 0, cycle = 0;

  typedef struct { real re [P]; real im [P]; int t; int mode; } exp_t;
  exp_t expq [$], expq_i [$];

  basic_computing_block #(.P(P), .D(D), .K(K)) dut (.*);
  basic_computing_block #(.P(P), .D(D), .K(K), .INTRA(1)) dut_i (
    .clk, .rst_n, .in_valid, .in_data, .in_idx, .in_cmd,
    .out_valid(out_valid_i), .out_data(out_data_i), .out_idx(out_idx_i));
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int br3(int v);
    return ((v & 1) << 2) | (v & 2) | ((v >> 2) & 1);
  endfunction

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %0f expected %0f", what, got, exp);
    end
  endtask

  // send one group; mode 0 fwd, 1 inv, 2 bypass, 3 level-1 only
  task automatic send(int mode);
    real xr [P], xi [P];
    exp_t e;
    for (int n = 0; n < P; n++) begin
      xr[n] = real'($urandom_range(4000)) - 2000.0;
      xi[n] = (mode == 1) ? real'($urandom_range(1000)) - 500.0 : 0.0;
    end
    for (int l = 0; l < P; l++) begin
      int n;
      n = (mode <= 1) ? br3(l) : l;
      in_data[l].re = 16'(int'(xr[n]));
      in_data[l].im = 16'(int'(xi[n]));
      in_idx[l]     = 3'(l);
    end
    for (int f = 0; f < P; f++) begin
      e.re[f] = 0.0; e.im[f] = 0.0;
      case (mode)
        0, 1: for (int n = 0; n < P; n++) begin
                real a;
                a = (mode == 0 ? -2.0 : 2.0) * 3.141592653589793 * f * n / P;
                e.re[f] += xr[n] * $cos(a) - xi[n] * $sin(a);
                e.im[f] += xr[n] * $sin(a) + xi[n] * $cos(a);
              end
        2: begin e.re[f] = xr[f]; e.im[f] = xi[f]; end
        default: begin
          e.re[f] = (f % 2 == 0) ? (xr[f] + xr[f+1]) / 2.0 : (xr[f-1] - xr[f]) / 2.0;
        end
      endcase
      if (mode == 0) begin e.re[f] /= 8.0; e.im[f] /= 8.0; end
    end
    in_cmd.s0      = 4'd0;
    in_cmd.lvl_en  = (mode == 2) ? 8'd0 : (mode == 3 ? 8'd1 : 8'd7);
    in_cmd.inverse = (mode == 1);
    in_valid = 1'b1;
    e.t = cycle;
    e.mode = mode;
    expq.push_back(e);
    expq_i.push_back(e);
    @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  task automatic take(ref exp_t q [$], input int lat, input cplx_t od [P],
                      input logic [2:0] oi [P]);
    exp_t e;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      e = q.pop_front();
      checks++;
      if (cycle - e.t != lat) begin
        failures++;
        $display("FAIL latency %0d expected %0d", cycle - e.t, lat);
      end
      for (int l = 0; l < P; l++) begin
        real tol;
        tol = (e.mode == 0) ? 2.0 : (e.mode == 1 ? 6.0 : 1.0);
        check("re", real'(od[l].re), e.re[l], tol);
        check("im", real'(od[l].im), e.im[l], tol);
        checks++;
        if (oi[l] != 3'(l)) failures++;
      end
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid) take(expq, D, out_data, out_idx);
  always @(posedge clk) if (rst_n && out_valid_i) take(expq_i, 2 * D, out_data_i, out_idx_i);

  initial begin
    in_valid = 0;
    in_cmd = '0;
    for (int l = 0; l < P; l++) begin in_data[l] = '0; in_idx[l] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 40; n++) send(n % 4);
    repeat (2 * D + 3) @(posedge clk);
    checks++;
    if (expq.size() != 0 || expq_i.size() != 0) begin
      failures++;
      $display("FAIL %0d + %0d groups never came out", expq.size(), expq_i.size());
    end
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
