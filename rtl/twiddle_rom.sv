// twiddle_rom: coefficient ROM of the memory subsystem.
//
// Holds W_K^i = cos(2*pi*i/K) - j*sin(2*pi*i/K) for i = 0 .. K/2-1, as 16-bit
// numbers with 14 fractional bits, rounded to nearest. The table is computed
// at elaboration time from the formula, so it synthesises to a constant ROM.
// NPORT independent combinational read ports are provided so that every
// butterfly of a level can fetch its coefficient in the same cycle.
// A size-k FFT with k < K uses W_k^m = W_K^(m*K/k), so one table serves all
// block sizes up to K. Storing the coefficients in a ROM follows the paper;
// the word format and the multi-port organisation are this design's choices.
module twiddle_rom
  import circnn_pkg::*;
#(
  parameter int K     = 128,
  parameter int NPORT = 1
) (
  input  logic [$clog2(K/2)-1:0] addr [NPORT],
  output tw_t                    data [NPORT]
);
  typedef logic signed [TW_W-1:0] tab_t [K/2];

  // part = 0: real part cos(a); part = 1: imaginary part -sin(a)
  function automatic tab_t make_table(input bit part);
    tab_t t;
    real  ang, v;
    for (int i = 0; i < K/2; i++) begin
      ang  = 2.0 * 3.14159265358979323846 * real'(i) / real'(K);
      v    = part ? -$sin(ang) : $cos(ang);
      t[i] = TW_W'($rtoi($floor(v * real'(1 << TW_FRAC) + 0.5)));
    end
    return t;
  endfunction

  localparam tab_t TAB_RE = make_table(1'b0);
  localparam tab_t TAB_IM = make_table(1'b1);

  always_comb
    for (int n = 0; n < NPORT; n++) begin
      data[n].re = TAB_RE[addr[n]];
      data[n].im = TAB_IM[addr[n]];
    end

endmodule
