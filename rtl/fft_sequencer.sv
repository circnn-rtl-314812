// fft_sequencer: runs one size-k FFT or IFFT on the basic computing block.
//
// The transform lives in a working buffer of K complex words. Loading writes
// point n of the input to buffer word bitrev(n), so the buffer holds the
// bit-reversed order a decimation-in-time FFT needs; the result is read back
// in natural order. A transform of log2(k) radix-2 stages is cut into
// ceil(log2(k)/D) passes of D stages. In each pass the sequencer fetches k/P
// groups of P points, one group per cycle, into the basic computing block and
// writes the returning groups back in place. Lane l of group g carries the
// point whose index has lane bits l[D-1:0] at bit positions s0 .. s0+D-1 and
// the bits {g, l[log2P-1:D]} elsewhere, so the fixed lane pairing of the block
// meets the pairs of stages s0 .. s0+D-1. When fewer than D stages remain, the
// last pass starts at s0 = log2(k)-D and bypasses the levels already done.
// Between passes the sequencer waits for the pipeline to drain (L+2 bubble
// cycles, L = D*(1+INTRA) the latency of the block), since the next pass
// reads what the last one wrote. INTRA selects intra-level pipelining in the
// block's butterflies (0, the default, is inter-level pipelining only).
// Timing: done is high npass*(k/P + L + 2) cycles after the edge that takes start.
// Half-spectrum read: the spectrum of a real input is conjugate-symmetric,
// X[k-f] = conj(X[f]), so bins 0 .. k/2 say everything. X[0] and X[k/2] are
// then real, and with rd_half the read port packs X[k/2] into the imaginary
// part of X[0], so the k/2 words of groups 0 .. k/(2P)-1 hold the whole
// spectrum.
// Requirements: P <= k <= K and D <= log2(k).
// Decomposing a large FFT into iterations on the block follows the paper;
// the buffer, the index mapping and the drain between passes are this design's.
module fft_sequencer
  import circnn_pkg::*;
#(
  parameter int P = 32,
  parameter int D = 2,
  parameter int K = 128,
  parameter int INTRA = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             log2k,
  // control
  input  logic                   start,
  input  logic                   inverse,
  output logic                   busy,
  output logic                   done,
  output logic                   bubble,     // a drain cycle between passes
  // load port (only while idle): natural index of lane l is grp*P + l
  input  logic [P-1:0]           ld_en,
  input  logic [$clog2(K/P > 1 ? K/P : 2)-1:0] ld_grp,
  input  cplx_t                  ld_data [P],
  // read port (natural order, combinational); with rd_half, lane 0 of
  // group 0 returns the packed pair {X[0].re, X[k/2].re}
  input  logic [$clog2(K/P > 1 ? K/P : 2)-1:0] rd_grp,
  input  logic                   rd_half,
  output cplx_t                  rd_data [P]
);
  localparam int LK = $clog2(K);
  localparam int LP = $clog2(P);
  localparam int GW = $clog2(K/P > 1 ? K/P : 2);
  typedef logic [LK-1:0] idx_t;
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_t;

  cplx_t    buf_q [K];
  state_t   state;
  logic [3:0] pass, npass, s0;
  logic [7:0] lvl_en;
  logic [GW-1:0] grp, ngrp_m1;
  logic       inv_q;
  logic [7:0] inflight;

  // fetch register (Fetch/L1)
  logic     f_valid;
  cplx_t    f_data [P];
  idx_t     f_idx  [P];
  bcb_cmd_t f_cmd;

  logic     o_valid;
  cplx_t    o_data [P];
  idx_t     o_idx  [P];

  logic     issue;
  idx_t     cur_idx [P];

  assign npass   = 4'((int'(log2k) + D - 1) / D);
  assign ngrp_m1 = GW'((1 << (int'(log2k) - LP)) - 1);

  // pass parameters
  always_comb begin
    logic [3:0] s_start;
    s_start = 4'(int'(pass) * D);
    lvl_en  = '0;
    if (int'(s_start) + D > int'(log2k)) s0 = 4'(int'(log2k) - D);
    else                                 s0 = s_start;
    for (int j = 0; j < D; j++)
      lvl_en[j] = (int'(s0) + j >= int'(s_start));
  end

  // lane to point-index mapping for the current group
  always_comb
    for (int l = 0; l < P; l++) begin
      logic [LK-1:0] f, lo, hi;
      f   = LK'((int'(grp) << (LP - D)) | (l >> D));
      lo  = f & LK'((1 << s0) - 1);
      hi  = f >> s0;
      cur_idx[l] = (hi << (int'(s0) + D)) | (LK'(l & ((1 << D) - 1)) << s0) | lo;
    end

  assign issue = (state == S_ISSUE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state    <= S_IDLE;
      pass     <= '0;
      grp      <= '0;
      inv_q    <= 1'b0;
      f_valid  <= 1'b0;
      inflight <= '0;
    end else begin
      f_valid  <= issue;
      inflight <= inflight + 8'(issue) - 8'(o_valid);
      case (state)
        S_IDLE:
          if (start) begin
            state <= S_ISSUE;
            pass  <= '0;
            grp   <= '0;
            inv_q <= inverse;
          end
        S_ISSUE: begin
          grp <= grp + 1'b1;
          if (grp == ngrp_m1) state <= S_DRAIN;
        end
        S_DRAIN:
          if (inflight == 8'd0) begin
            if (pass == npass - 1'b1) state <= S_IDLE;
            else begin
              pass  <= pass + 1'b1;
              grp   <= '0;
              state <= S_ISSUE;
            end
          end
        default: state <= S_IDLE;
      endcase
    end

  always_ff @(posedge clk) begin
    for (int l = 0; l < P; l++) begin
      f_data[l] <= buf_q[cur_idx[l]];
      f_idx[l]  <= cur_idx[l];
    end
    f_cmd <= '{s0: s0, lvl_en: lvl_en, inverse: inv_q};
  end

  assign busy   = (state != S_IDLE);
  assign done   = (state == S_DRAIN) && (inflight == 8'd0) && (pass == npass - 1'b1);
  assign bubble = (state == S_DRAIN);

  basic_computing_block #(.P(P), .D(D), .K(K), .INTRA(INTRA)) u_bcb (
    .clk, .rst_n,
    .in_valid(f_valid), .in_data(f_data), .in_idx(f_idx), .in_cmd(f_cmd),
    .out_valid(o_valid), .out_data(o_data), .out_idx(o_idx)
  );

  // working buffer: write back from the block, or load while idle
  always_ff @(posedge clk)
    if (o_valid) begin
      for (int l = 0; l < P; l++) buf_q[o_idx[l]] <= o_data[l];
    end else if (state == S_IDLE) begin
      for (int l = 0; l < P; l++)
        if (ld_en[l]) buf_q[LK'(bitrev(8'((int'(ld_grp) * P) + l), log2k))] <= ld_data[l];
    end

  always_comb begin
    for (int l = 0; l < P; l++) rd_data[l] = buf_q[LK'((int'(rd_grp) * P) + l)];
    if (rd_half && rd_grp == '0) rd_data[0].im = buf_q[LK'(1 << (int'(log2k) - 1))].re;
  end

  // a new transform must not start while one is running
  always_ff @(posedge clk)
    if (rst_n && busy) a_no_restart: assert (!start);

endmodule
