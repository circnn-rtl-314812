// tb_wide_ram: writes random words to random addresses of a small RAM, keeps
// a model, and checks that every read returns the model's word exactly one
// cycle after the address is applied (the old word when it is also written).
module tb_wide_ram;
  localparam int W = 40, DEPTH = 64;
  logic clk = 0, we;
  logic [5:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  logic [DEPTH-1:0] written = '0;
  int checks = 0, failures = 0;

  wide_ram #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    we = 0; addr = 0; wdata = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [5:0] a;
      logic       w;
      a = 6'($urandom_range(DEPTH-1));
      w = ($urandom_range(2) == 0) || !written[a];
      @(negedge clk);
      we = w; addr = a; wdata = {$urandom, $urandom};
      @(posedge clk); #1;
      // a read during a write returns the old word (read-first)
      if (written[a] || !w) begin
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          $display("FAIL addr %0d got %h expected %h", a, rdata, model[a]);
        end
      end
      if (w) begin
        model[a]   = wdata;
        written[a] = 1'b1;
      end
    end
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
