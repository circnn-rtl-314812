// wide_ram: single-port synchronous RAM of the memory subsystem.
//
// One word is W bits; for the weight store a word holds P complex values, so
// that one read supplies all P lanes of the peripheral computing block in a
// cycle (the paper ties memory bandwidth to the parallelization degree p).
// The same module, with other widths and depths, holds the spectra FFT(x_j)
// of the current input vector and the bias values.
// Timing: a write happens at the clock edge when we = 1; a read returns the
// word at addr one cycle later (rdata is registered), as an SRAM macro does;
// a read of the word being written returns its old value (read-first).
// The RAM is written as an array so that synthesis can map it to an SRAM.
// The memories being SRAM follows the paper; the single-port organisation and
// one-cycle read latency are this design's choices.
module wide_ram #(
  parameter int W     = 1024,
  parameter int DEPTH = 32768
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
