// io_fifo: I/O buffer between the external data stream and the engine.
//
// A synchronous first-in first-out buffer of DEPTH words of W bits with
// valid/ready handshakes on both sides: a word enters when in_valid and
// in_ready are both 1 at a clock edge, and leaves when out_valid and out_ready
// are both 1. in_ready is 0 when full, out_valid is 0 when empty, and count
// gives the number of words held. Data appear at the output one cycle after
// they are written. The paper names input and output buffers; their
// organisation as FIFOs and the depth are this design's choices.
module io_fifo #(
  parameter int W     = 16,
  parameter int DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end

  always_ff @(posedge clk)
    if (push) mem[wptr] <= in_data;

  // the count never exceeds the depth
  always_ff @(posedge clk)
    if (rst_n) a_no_overflow: assert (count <= (AW+1)'(DEPTH));

endmodule
