// peripheral_computing_block: the linear-complexity operations around the
// FFT kernel.
//
// MAC port: for a group of P frequency bins it multiplies the input spectrum
// FFT(x_j) by the stored weight spectrum FFT(w_ij), element by element, and
// adds the product to the accumulator of each bin (mac_first = 1 starts a new
// sum). The products are accumulated at full precision (2*FRAC_W fractional
// bits) in K accumulators of ACC_W = 48 bits, and rounded back to the data
// format only once: acc_grp/acc_out read a group of accumulators, rounded
// and saturated to 16 bits, for the inverse FFT. Rounding every product
// instead would add q rounding errors per bin, which dominates for wide
// layers because the scaled input spectrum FFT(x)/k has few significant bits.
// Half spectra (half = 1): the MAC sees only bins 0 .. k/2-1, with lane 0 of
// group 0 holding the packed real pair {bin 0, bin k/2}; that lane multiplies
// the real and imaginary parts separately. On the read side the k bins are
// rebuilt: bin 0 and bin k/2 from the packed pair, bin f < k/2 as stored and
// bin f > k/2 as conj(acc[k-f]).
// Post port: one value per cycle from the inverse FFT gets its bias added,
// is passed through ReLU (when relu_en) and then through max pooling: the
// value is compared with the running maximum kept for its output position
// pool_addr in a pooling buffer of M_MAX words. pool_first restarts the
// maximum and pool_last releases it at out_data one cycle later.
// The split of work (component-wise multiplication, ReLU and pooling by
// comparators) follows the paper. Accumulating in the frequency domain, so
// that one IFFT serves all q input blocks, is this design's choice: it gives
// the same sum as the paper's Algorithm 1, which runs an IFFT per block.
module peripheral_computing_block
  import circnn_pkg::*;
#(
  parameter int P     = 32,
  parameter int K     = 128,
  parameter int M_MAX = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // component-wise multiply-accumulate
  input  logic                     mac_valid,
  input  logic                     mac_first,
  input  logic [$clog2(K/P > 1 ? K/P : 2)-1:0] mac_grp,
  input  cplx_t                    mac_x [P],
  input  cplx_t                    mac_w [P],
  input  logic                     half,       // half spectra, packed bin 0
  input  logic [3:0]               log2k,      // transform size (for half)
  input  logic [$clog2(K/P > 1 ? K/P : 2)-1:0] acc_grp,
  output cplx_t                    acc_out [P],
  // bias, ReLU, pooling
  input  logic                     post_valid,
  input  data_t                    post_val,
  input  data_t                    post_bias,
  input  logic                     relu_en,
  input  logic                     pool_first,
  input  logic                     pool_last,
  input  logic [$clog2(M_MAX)-1:0] pool_addr,
  output logic                     out_valid,
  output data_t                    out_data,
  output logic                     relu_hit     // ReLU clamped a negative value
);
  localparam int GW = $clog2(K/P > 1 ? K/P : 2);
  localparam logic signed [47:0] HALF = 48'sd1 <<< (FRAC_W - 1);

  cacc_t acc_q [K];

  function automatic logic signed [47:0] acc48(input acc_t v);
    return (48'(v) + HALF) >>> FRAC_W;
  endfunction
  data_t pool_q [M_MAX];

  // ---- multiply-accumulate ----
  for (genvar l = 0; l < P; l++) begin : g_lane
    logic signed [47:0] pr, pi;
    cacc_t              prev, nxt;
    always_comb begin
      if (l == 0 && half && mac_grp == '0) begin
        // packed real bins: {x0*w0, x(k/2)*w(k/2)}
        pr = 48'(mac_x[l].re) * 48'(mac_w[l].re);
        pi = 48'(mac_x[l].im) * 48'(mac_w[l].im);
      end else begin
        pr = 48'(mac_x[l].re) * 48'(mac_w[l].re) - 48'(mac_x[l].im) * 48'(mac_w[l].im);
        pi = 48'(mac_x[l].re) * 48'(mac_w[l].im) + 48'(mac_x[l].im) * 48'(mac_w[l].re);
      end
      prev   = mac_first ? '0 : acc_q[GW'(mac_grp) * P + l];
      nxt.re = prev.re + ACC_W'(pr);
      nxt.im = prev.im + ACC_W'(pi);
    end
    always_ff @(posedge clk)
      if (mac_valid) acc_q[int'(mac_grp) * P + l] <= nxt;

    // read side: round to the data format; rebuild the upper bins if half
    logic signed [47:0] rr, ri;
    int                 f, kk;
    always_comb begin
      f  = int'(acc_grp) * P + l;
      kk = 1 << log2k;
      if (!half || (f > 0 && f < kk / 2)) begin
        rr = acc48(acc_q[f].re);
        ri = acc48(acc_q[f].im);
      end else if (f == 0) begin
        rr = acc48(acc_q[0].re);
        ri = '0;
      end else if (f == kk / 2) begin
        rr = acc48(acc_q[0].im);
        ri = '0;
      end else begin
        rr = acc48(acc_q[(kk - f) % K].re);
        ri = -acc48(acc_q[(kk - f) % K].im);
      end
      acc_out[l].re = sat16(rr);
      acc_out[l].im = sat16(ri);
    end
  end

  // ---- bias, ReLU, max pooling ----
  data_t y_bias, y_act, y_pool;
  always_comb begin
    y_bias = sat16(48'(post_val) + 48'(post_bias));
    y_act  = (relu_en && y_bias < 0) ? '0 : y_bias;
    y_pool = (pool_first || y_act > pool_q[pool_addr]) ? y_act : pool_q[pool_addr];
  end

  always_ff @(posedge clk)
    if (post_valid) pool_q[pool_addr] <= y_pool;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      relu_hit  <= 1'b0;
    end else begin
      out_valid <= post_valid && pool_last;
      out_data  <= y_pool;
      relu_hit  <= post_valid && relu_en && y_bias < 0;
    end

endmodule
