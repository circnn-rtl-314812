// tb_io_fifo: random pushes and pops on an 8-deep buffer, checked against a
// queue model: data order, the count, in_ready = 0 exactly when full and
// out_valid = 0 exactly when empty. Counts how often full and empty occur.
module tb_io_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [3:0] count;
  logic [15:0] q [$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  io_fifo #(.W(16), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                         .out_valid, .out_ready, .out_data, .count);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int bias;
      bias = (n / 500) % 2;   // alternate filling and draining phases
      @(negedge clk);
      in_valid  = $urandom_range(3) < (bias ? 3 : 1);
      out_ready = $urandom_range(3) < (bias ? 1 : 3);
      in_data   = 16'($urandom);
      check("count", int'(count), q.size());
      check("in_ready", int'(in_ready), int'(q.size() < DEPTH));
      check("out_valid", int'(out_valid), int'(q.size() > 0));
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      if (out_valid && out_ready) check("data", int'(out_data), int'(q[0]));
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin
      failures++;
      $display("FAIL full %0d empty %0d", n_full, n_empty);
    end
    $display("full %0d empty %0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
