// basic_computing_block: the FFT/IFFT computing kernel, P lanes wide and D
// butterfly levels deep, with inter-level pipelining.
//
// Every cycle it may accept a group of P complex points together with each
// point's index inside the transform (in_idx) and a command (bcb_cmd_t).
// Level j (j = 0 .. D-1) pairs lane l with lane l + 2**j, where bit j of l is 0,
// exactly like one stage of a radix-2 butterfly network (Fig. 10 of the
// paper: adjacent lanes in level 1, distance 2 in level 2, distance 4 in
// level 3). The level performs FFT stage s = cmd.s0 + j, so the fetch logic
// must place on lanes l and l + 2**j two points whose indices differ in bit s.
// The twiddle of each butterfly follows from the index of its upper point a:
// W_(2h)^(a mod h) with h = 2**s, read from a per-level coefficient ROM.
// A level with cmd.lvl_en[j] = 0 passes its data through (used when the last
// pass of a transform has fewer than D stages left).
// One register bank follows each level (L1/L2 ... Ld/WB in the paper's
// Fig. 12(a)): inter-level pipelining. With INTRA = 1 each butterfly also has
// its Mult1/Mult2 register (Fig. 12(b), intra-level pipelining), and the
// bypass data, indices and command of the level are delayed to match.
// Latency is D*(1+INTRA) cycles; throughput is one group per cycle.
// The lane/level structure and both pipelining options follow the paper,
// whose 200 MHz prototype uses inter-level pipelining only (INTRA = 0); the
// index-driven twiddle addressing and the bypass are this design's choices.
// The paper's skipping of conjugate-symmetric partial results for real
// inputs (its red circles) is not done inside the levels: every butterfly
// output is computed. The symmetry is used on the final spectra instead,
// which are kept and multiplied only up to bin k/2 (see layer_controller).
module basic_computing_block
  import circnn_pkg::*;
#(
  parameter int P = 32,     // parallelization degree p (lanes)
  parameter int D = 2,      // depth d (butterfly levels)
  parameter int K = 128,    // largest transform size
  parameter int INTRA = 0   // 1: add intra-level pipelining in every butterfly
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  cplx_t                in_data [P],
  input  logic [$clog2(K)-1:0] in_idx  [P],
  input  bcb_cmd_t             in_cmd,
  output logic                 out_valid,
  output cplx_t                out_data [P],
  output logic [$clog2(K)-1:0] out_idx  [P]
);
  localparam int LK = $clog2(K);
  typedef logic [LK-1:0] idx_t;

  // stage d holds the values after level d (stage 0 = inputs)
  logic     v_q   [D+1];
  cplx_t    dat_q [D+1][P];
  idx_t     idx_q [D+1][P];
  bcb_cmd_t cmd_q [D+1];

  always_comb begin
    v_q[0]   = in_valid;
    dat_q[0] = in_data;
    idx_q[0] = in_idx;
    cmd_q[0] = in_cmd;
  end

  for (genvar j = 0; j < D; j++) begin : g_level
    logic [$clog2(K/2)-1:0] tw_addr [P/2];
    tw_t                    tw      [P/2];
    cplx_t                  res     [P];
    logic [3:0]             stage;
    // level inputs delayed by the butterfly's internal register (if any)
    logic                   mv;
    cplx_t                  md      [P];
    idx_t                   mi      [P];
    bcb_cmd_t               mc;

    assign stage = cmd_q[j].s0 + 4'(j);

    twiddle_rom #(.K(K), .NPORT(P/2)) u_rom (.addr(tw_addr), .data(tw));

    if (INTRA != 0) begin : g_mid
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) mv <= 1'b0;
        else        mv <= v_q[j];
      always_ff @(posedge clk) begin
        md <= dat_q[j];
        mi <= idx_q[j];
        mc <= cmd_q[j];
      end
    end else begin : g_nomid
      always_comb begin
        mv = v_q[j];
        md = dat_q[j];
        mi = idx_q[j];
        mc = cmd_q[j];
      end
    end

    for (genvar b = 0; b < P/2; b++) begin : g_bf
      // lane numbers of this butterfly: insert a 0 at bit j of b
      localparam int LO = ((b >> j) << (j + 1)) | (b & ((1 << j) - 1));
      localparam int HI = LO | (1 << j);
      idx_t  m;
      cplx_t bx, by;

      always_comb begin
        m          = idx_q[j][LO] & idx_t'((1 << stage) - 1);
        tw_addr[b] = $bits(tw_addr[b])'(m << (LK - 1 - int'(stage)));
      end

      butterfly #(.INTRA(INTRA)) u_bf (
        .clk,
        .a(dat_q[j][LO]), .b(dat_q[j][HI]), .w(tw[b]),
        .inverse(cmd_q[j].inverse), .x(bx), .y(by)
      );

      always_comb begin
        res[LO] = mc.lvl_en[j] ? bx : md[LO];
        res[HI] = mc.lvl_en[j] ? by : md[HI];
      end
    end

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) v_q[j+1] <= 1'b0;
      else        v_q[j+1] <= mv;

    always_ff @(posedge clk) begin
      dat_q[j+1] <= res;
      idx_q[j+1] <= mi;
      cmd_q[j+1] <= mc;
    end
  end

  assign out_valid = v_q[D];
  assign out_data  = dat_q[D];
  assign out_idx   = idx_q[D];

endmodule
