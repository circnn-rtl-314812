// layer_controller: control subsystem that sequences one block-circulant
// layer, y = ReLU(W x + theta) with optional max pooling.
//
// W is made of p_blk x q_blk circulant blocks of size k; the stored weights
// are the spectra FFT(w_ij), P complex values per weight-RAM word, block (i,j)
// at words w_base + (i*q_blk + j)*S ... + S - 1, S words per spectrum.
// Half spectra: inputs and weights are real, so their spectra are
// conjugate-symmetric and the bins above k/2 are conjugates of bins below.
// When k >= 2P (spec_half = 1) only bins 0 .. k/2 are kept and multiplied,
// S = k/(2P) words, with the real bin k/2 packed into the imaginary part of
// the real bin 0; the peripheral block rebuilds the upper bins for the IFFT.
// This halves spectrum and weight storage and the multiply-accumulate time.
// When k = P the full spectrum is kept, S = k/P.
// For each of n_vec input vectors the controller
//   1. X_LOAD/X_FFT/X_STORE: for j = 0..q_blk-1 takes k samples from the input
//      buffer, runs a forward FFT and keeps FFT(x_j) in the spectrum RAM;
//   2. MAC: for i = 0..p_blk-1 streams FFT(x_j) and FFT(w_ij) for all j
//      through the peripheral block, accumulating sum_j FFT(w_ij) o FFT(x_j);
//   3. ACC_LOAD/IFFT: loads the accumulated spectrum into the FFT working
//      buffer and runs the inverse FFT, which gives a_i;
//   4. POST: sends the k real results, with bias b_base + i*k + e, through
//      bias/ReLU/pooling into the output buffer.
// A CONV layer is run as the matrix product Y = X F of the paper: each row of
// X (one output pixel's receptive field, arranged by the host) is one input
// vector, so n_vec is the number of output pixels. Pooling takes the maximum
// over pool_n consecutive vectors, which the host orders accordingly.
// Stalls: X_LOAD waits while the input buffer is empty (in_stall) and POST
// waits while the output buffer lacks room for the values in flight (out_stall).
// Timing per vector, without stalls: q_blk*(k + T_fft + S + 3) +
// p_blk*(q_blk*S + 1 + k/P + T_fft + k + 3) cycles, roughly, where T_fft
// is the sequencer's transform time.
// The order of operations follows the paper's Algorithm 1 and Fig. 8, except
// that the sum over j is taken before the IFFT (one IFFT per output block).
module layer_controller
  import circnn_pkg::*;
#(
  parameter int P        = 32,
  parameter int K        = 128,
  parameter int WDEPTH   = 32768,
  parameter int SDEPTH   = 512,
  parameter int BDEPTH   = 16384,
  parameter int M_MAX    = 8192,
  parameter int OUT_DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  layer_cfg_t               cfg,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic                     in_stall,
  output logic                     out_stall,
  // input buffer
  input  logic                     in_valid,
  input  data_t                    in_data,
  output logic                     in_pop,
  // output buffer fill level
  input  logic [$clog2(OUT_DEPTH):0] out_count,
  // FFT sequencer
  output logic [3:0]               fft_log2k,
  output logic                     fft_start,
  output logic                     fft_inverse,
  input  logic                     fft_done,
  output logic [P-1:0]             ld_en,
  output logic [$clog2(K/P > 1 ? K/P : 2)-1:0] ld_grp,
  output cplx_t                    ld_data [P],
  output logic [$clog2(K/P > 1 ? K/P : 2)-1:0] rd_grp,
  output logic                     rd_half,
  input  cplx_t                    rd_data [P],
  // spectrum RAM
  output logic                     sp_we,
  output logic [$clog2(SDEPTH)-1:0] sp_addr,
  // weight RAM
  output logic [$clog2(WDEPTH)-1:0] w_addr,
  // bias RAM
  output logic [$clog2(BDEPTH)-1:0] b_addr,
  // peripheral computing block
  output logic                     mac_valid,
  output logic                     mac_first,
  output logic [$clog2(K/P > 1 ? K/P : 2)-1:0] mac_grp,
  output logic [$clog2(K/P > 1 ? K/P : 2)-1:0] acc_grp,
  input  cplx_t                    acc_out [P],
  output logic                     spec_half,    // half spectra in use (k >= 2P)
  output logic                     post_valid,
  output data_t                    post_val,
  output logic                     relu_en,
  output logic                     pool_first,
  output logic                     pool_last,
  output logic [$clog2(M_MAX)-1:0] pool_addr
);
  localparam int LP = $clog2(P);
  localparam int GW = $clog2(K/P > 1 ? K/P : 2);
  localparam int GPB = K / P;            // spectrum-RAM words per block slot

  typedef enum logic [3:0] {
    S_IDLE, S_XLOAD, S_XFFT, S_XWAIT, S_XSTORE, S_MAC, S_MACLAST,
    S_ACCLOAD, S_IFFT, S_IWAIT, S_POST, S_FLUSH
  } state_t;

  state_t     state;
  layer_cfg_t c;
  logic [15:0] v;
  logic [7:0]  i, j;
  logic [8:0]  e;                        // element / group counter
  logic [3:0]  pool_ph;
  logic [GW-1:0] g_d;
  logic        first_d, mac_d;
  logic        post_d;
  data_t       val_d;
  logic [$clog2(M_MAX)-1:0] paddr_d;
  logic [1:0]  flush;
  logic        pf_d, pl_d;

  logic [8:0]  kk, ngrp, nsp;
  logic        out_room, pop;

  assign kk       = 9'(1 << c.log2k);
  assign ngrp     = 9'(1 << (int'(c.log2k) - LP));
  assign spec_half = (int'(c.log2k) > LP);
  assign nsp      = spec_half ? (ngrp >> 1) : ngrp;
  assign out_room = (int'(out_count) <= OUT_DEPTH - 3);
  assign pop      = (state == S_XLOAD) && in_valid;

  assign busy      = (state != S_IDLE);
  assign in_pop    = pop;
  assign in_stall  = (state == S_XLOAD) && !in_valid;
  assign out_stall = (state == S_POST) && !out_room;
  assign fft_log2k = c.log2k;
  assign relu_en   = c.relu_en;

  // ---- combinational datapath control ----
  always_comb begin
    fft_start   = 1'b0;
    fft_inverse = 1'b0;
    ld_en       = '0;
    ld_grp      = GW'(e >> LP);
    rd_grp      = GW'(e >> LP);
    rd_half     = 1'b0;
    acc_grp     = GW'(e);
    sp_we       = 1'b0;
    sp_addr     = $bits(sp_addr)'(int'(j) * GPB + int'(e));
    w_addr      = $bits(w_addr)'(int'(c.w_base) +
                  ((int'(i) * int'(c.q_blk) + int'(j)) << (int'(c.log2k) - LP - int'(spec_half))) +
                  int'(e));
    b_addr      = $bits(b_addr)'(int'(c.b_base) + (int'(i) << c.log2k) + int'(e));
    for (int l = 0; l < P; l++) ld_data[l] = '{re: in_data, im: '0};
    case (state)
      S_XLOAD:  if (pop) ld_en = P'(1) << (int'(e) % P);
      S_XFFT:   fft_start = 1'b1;
      S_XSTORE: begin
        rd_grp  = GW'(e);
        rd_half = spec_half;
        sp_we   = 1'b1;
      end
      S_ACCLOAD: begin
        ld_en  = '1;
        ld_grp = GW'(e);
        ld_data = acc_out;
      end
      S_IFFT: begin
        fft_start   = 1'b1;
        fft_inverse = 1'b1;
      end
      default: ;
    endcase
  end

  // MAC and POST outputs are the issue signals delayed by the RAM latency
  assign mac_valid  = mac_d;
  assign mac_first  = first_d;
  assign mac_grp    = g_d;
  assign post_valid = post_d;
  assign post_val   = val_d;
  assign pool_addr  = paddr_d;
  assign pool_first = pf_d;
  assign pool_last  = pl_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state   <= S_IDLE;
      c       <= '0;
      v       <= '0;
      i       <= '0;
      j       <= '0;
      e       <= '0;
      pool_ph <= '0;
      mac_d   <= 1'b0;
      first_d <= 1'b0;
      g_d     <= '0;
      post_d  <= 1'b0;
      val_d   <= '0;
      paddr_d <= '0;
      pf_d    <= 1'b0;
      pl_d    <= 1'b0;
      flush   <= '0;
      done    <= 1'b0;
    end else begin
      done   <= 1'b0;
      mac_d  <= 1'b0;
      post_d <= 1'b0;
      case (state)
        S_IDLE:
          if (start) begin
            c       <= cfg;
            v       <= '0;
            i       <= '0;
            j       <= '0;
            e       <= '0;
            pool_ph <= '0;
            state   <= S_XLOAD;
          end
        S_XLOAD:
          if (pop) begin
            e <= e + 1'b1;
            if (e == kk - 1'b1) state <= S_XFFT;
          end
        S_XFFT: state <= S_XWAIT;
        S_XWAIT:
          if (fft_done) begin
            e     <= '0;
            state <= S_XSTORE;
          end
        S_XSTORE: begin
          e <= e + 1'b1;
          if (e == nsp - 1'b1) begin
            e <= '0;
            if (j == c.q_blk - 1'b1) begin
              j     <= '0;
              i     <= '0;
              state <= S_MAC;
            end else begin
              j     <= j + 1'b1;
              state <= S_XLOAD;
            end
          end
        end
        S_MAC: begin
          // address issued this cycle, data used next cycle
          mac_d   <= 1'b1;
          first_d <= (j == '0);
          g_d     <= GW'(e);
          e       <= e + 1'b1;
          if (e == nsp - 1'b1) begin
            e <= '0;
            if (j == c.q_blk - 1'b1) begin
              j     <= '0;
              state <= S_MACLAST;
            end else j <= j + 1'b1;
          end
        end
        S_MACLAST: state <= S_ACCLOAD;
        S_ACCLOAD: begin
          e <= e + 1'b1;
          if (e == ngrp - 1'b1) begin
            e     <= '0;
            state <= S_IFFT;
          end
        end
        S_IFFT: state <= S_IWAIT;
        S_IWAIT:
          if (fft_done) begin
            e     <= '0;
            state <= S_POST;
          end
        S_POST:
          if (out_room) begin
            post_d  <= 1'b1;
            val_d   <= rd_data[int'(e) % P].re;
            paddr_d <= $bits(paddr_d)'((int'(i) << c.log2k) + int'(e));
            pf_d    <= (c.pool_n <= 4'd1) || (pool_ph == 4'd0);
            pl_d    <= (c.pool_n <= 4'd1) || (pool_ph == c.pool_n - 1'b1);
            e       <= e + 1'b1;
            if (e == kk - 1'b1) begin
              e <= '0;
              if (i == c.p_blk - 1'b1) begin
                i <= '0;
                pool_ph <= (c.pool_n <= 4'd1 || pool_ph == c.pool_n - 1'b1) ? '0 : pool_ph + 1'b1;
                if (v == c.n_vec - 1'b1) begin
                  flush <= 2'd3;
                  state <= S_FLUSH;
                end else begin
                  v     <= v + 1'b1;
                  state <= S_XLOAD;
                end
              end else begin
                i     <= i + 1'b1;
                state <= S_MAC;
              end
            end
          end
        S_FLUSH: begin
          flush <= flush - 1'b1;
          if (flush == 2'd1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end

endmodule
