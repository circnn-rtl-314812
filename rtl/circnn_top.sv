// circnn_top: block-circulant DNN inference engine (one layer per run).
//
// Blocks: the control subsystem (layer_controller plus the FFT sequencer's
// pass control), the basic computing block (inside fft_sequencer), the
// peripheral computing block, the memory subsystem (coefficient ROMs inside
// the basic computing block; weight, spectrum and bias RAMs) and the input
// and output buffers.
// Use: while idle, the host writes weight spectra FFT(w_ij) (P complex values
// per word; for k >= 2P only bins 0 .. k/2-1, k/(2P) words per block, with
// the real bin k/2 in the imaginary part of the real bin 0, otherwise all k
// bins in k/P words) through w_we/w_waddr/w_wdata and biases through b_we/b_waddr/
// b_wdata, sets cfg and pulses start. The engine then reads n_vec*q_blk*k
// input samples from the in_* stream and writes n_vec/pool_n*p_blk*k results
// to the out_* stream (valid/ready handshakes), and pulses done when the last
// result has entered the output buffer. Status pulses in_stall, out_stall
// and fft_bubble mark cycles lost to an empty input buffer, a full output
// buffer and the drain between FFT passes.
// The weight RAM holds WRAM_BYTES bytes (4 MB, the AlexNet figure the paper
// gives for on-chip weight storage); numbers are 16-bit fixed point with 8
// fractional bits. P = 32, D = 2, K = 128 follow the paper's design example.
// INTRA = 0 keeps inter-level pipelining only, as in the paper's 200 MHz
// prototype; INTRA = 1 adds the intra-level register inside every butterfly
// for a faster clock, at D more cycles per FFT pass.
module circnn_top
  import circnn_pkg::*;
#(
  parameter int P          = 32,
  parameter int D          = 2,
  parameter int K          = 128,
  parameter int INTRA      = 0,        // 1: intra-level pipelining in the butterflies
  parameter int WRAM_BYTES = 4 * 1024 * 1024,
  parameter int Q_BLK_MAX  = 128,
  parameter int BDEPTH     = 16384,
  parameter int M_MAX      = 8192,
  parameter int IN_DEPTH   = 1024,
  parameter int OUT_DEPTH  = 1024,
  localparam int WDEPTH    = WRAM_BYTES / (P * 4),
  localparam int SDEPTH    = Q_BLK_MAX * K / P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // layer control
  input  layer_cfg_t                cfg,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // weight and bias loading (while idle)
  input  logic                      w_we,
  input  logic [$clog2(WDEPTH)-1:0] w_waddr,
  input  cplx_t                     w_wdata [P],
  input  logic                      b_we,
  input  logic [$clog2(BDEPTH)-1:0] b_waddr,
  input  data_t                     b_wdata,
  // input stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  data_t                     in_data,
  // output stream
  output logic                      out_valid,
  input  logic                      out_ready,
  output data_t                     out_data,
  // status
  output logic                      in_stall,
  output logic                      out_stall,
  output logic                      fft_bubble,
  output logic                      relu_hit
);
  localparam int GW = $clog2(K/P > 1 ? K/P : 2);
  localparam int CW = $bits(cplx_t);

  // input buffer
  logic  ib_valid, ib_pop;
  data_t ib_data;
  io_fifo #(.W(DATA_W), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(ib_valid), .out_ready(ib_pop), .out_data(ib_data),
    .count()
  );

  // output buffer
  logic  pc_valid;
  data_t pc_data;
  logic [$clog2(OUT_DEPTH):0] ob_count;
  logic  ob_ready_unused;
  io_fifo #(.W(DATA_W), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid(pc_valid), .in_ready(ob_ready_unused), .in_data(pc_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .count(ob_count)
  );

  // control subsystem <-> datapath
  logic [3:0]  fft_log2k;
  logic        rd_half, spec_half;
  logic        fft_start, fft_inverse, fft_done, fft_busy;
  logic [P-1:0] ld_en;
  logic [GW-1:0] ld_grp, rd_grp, mac_grp, acc_grp;
  cplx_t       ld_data [P], rd_data [P], acc_out [P], sp_x [P], w_x [P];
  logic        sp_we;
  logic [$clog2(SDEPTH)-1:0] sp_addr;
  logic [$clog2(WDEPTH)-1:0] c_w_addr, w_addr;
  logic [$clog2(BDEPTH)-1:0] c_b_addr, b_addr;
  logic        mac_valid, mac_first, post_valid, relu_en, pool_first, pool_last;
  data_t       post_val, b_rdata;
  logic [$clog2(M_MAX)-1:0] pool_addr;
  logic [P*CW-1:0] sp_wflat, sp_rflat, w_wflat, w_rflat;

  layer_controller #(
    .P(P), .K(K), .WDEPTH(WDEPTH), .SDEPTH(SDEPTH), .BDEPTH(BDEPTH),
    .M_MAX(M_MAX), .OUT_DEPTH(OUT_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .cfg, .start, .busy, .done, .in_stall, .out_stall,
    .in_valid(ib_valid), .in_data(ib_data), .in_pop(ib_pop),
    .out_count(ob_count),
    .fft_log2k, .fft_start, .fft_inverse, .fft_done,
    .ld_en, .ld_grp, .ld_data, .rd_grp, .rd_half, .rd_data,
    .sp_we, .sp_addr, .w_addr(c_w_addr), .b_addr(c_b_addr),
    .mac_valid, .mac_first, .mac_grp, .acc_grp, .acc_out, .spec_half,
    .post_valid, .post_val, .relu_en, .pool_first, .pool_last, .pool_addr
  );

  fft_sequencer #(.P(P), .D(D), .K(K), .INTRA(INTRA)) u_fft (
    .clk, .rst_n, .log2k(fft_log2k),
    .start(fft_start), .inverse(fft_inverse), .busy(fft_busy), .done(fft_done),
    .bubble(fft_bubble),
    .ld_en, .ld_grp, .ld_data, .rd_grp, .rd_half, .rd_data
  );

  // pack / unpack the P-wide RAM words
  always_comb
    for (int l = 0; l < P; l++) begin
      sp_wflat[l*CW +: CW] = rd_data[l];
      w_wflat[l*CW +: CW]  = w_wdata[l];
      sp_x[l]              = sp_rflat[l*CW +: CW];
      w_x[l]               = w_rflat[l*CW +: CW];
    end

  // spectrum RAM: FFT(x_j) of the current input vector
  wide_ram #(.W(P*CW), .DEPTH(SDEPTH)) u_spec_ram (
    .clk, .we(sp_we), .addr(sp_addr), .wdata(sp_wflat), .rdata(sp_rflat)
  );

  // weight RAM: FFT(w_ij); host port while idle
  assign w_addr = busy ? c_w_addr : w_waddr;
  wide_ram #(.W(P*CW), .DEPTH(WDEPTH)) u_weight_ram (
    .clk, .we(w_we && !busy), .addr(w_addr), .wdata(w_wflat), .rdata(w_rflat)
  );

  // bias RAM
  assign b_addr = busy ? c_b_addr : b_waddr;
  wide_ram #(.W(DATA_W), .DEPTH(BDEPTH)) u_bias_ram (
    .clk, .we(b_we && !busy), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata)
  );

  peripheral_computing_block #(.P(P), .K(K), .M_MAX(M_MAX)) u_periph (
    .clk, .rst_n,
    .mac_valid, .mac_first, .mac_grp, .mac_x(sp_x), .mac_w(w_x),
    .half(spec_half), .log2k(fft_log2k), .acc_grp, .acc_out,
    .post_valid, .post_val, .post_bias(b_rdata), .relu_en,
    .pool_first, .pool_last, .pool_addr,
    .out_valid(pc_valid), .out_data(pc_data), .relu_hit
  );

endmodule
