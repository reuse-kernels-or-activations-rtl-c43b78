// spec_cnn_top: spectral sparse convolution engine. It computes one
// convolutional layer in the frequency domain: every K x K input tile is
// transformed by a 2D FFT, multiplied element-wise (Hadamard product) with
// the pruned spectral kernels, summed over input channels, and transformed
// back by a 2D inverse FFT. Kernels are sparse (K*K/alpha non-zeros each)
// and stored in a pre-computed access schedule.
//
// Datapath (P' = PP tiles and N' = NP kernels in parallel, one input channel
// at a time):
//   input_streamer -> P' fft2d -> P' input_buffer (R replicas each)
//   kernel_streamer -> kernel_buffer (INDEX + VALUE tables, N' banks)
//   kernel_buffer + input_buffers -> pe_array (N' x P' complex MACs)
//   pe_array <-> psum_buffer (N' x P' banks)
//   psum_buffer -> psum_drain -> P' inverse fft2d -> output_writer
// stream_ctrl sequences everything for the layer configuration given at
// start (M, N, P, Ns, Ps), keeping Ns kernels and Ps tiles' partial sums on
// chip.
//
// Off-chip memory is outside this module: the input, kernel and output
// streams below are its ports. The request handshakes are valid/ready; a
// request is answered by a burst of beats (P'*K spatial rows for inputs, the
// group's schedule rows ending with k_last for kernels). pe_active counts the
// PEs that do useful work in the current cycle.
module spec_cnn_top
  import spec_pkg::*;
#(
  parameter int K          = 8,
  parameter int NP         = 64,
  parameter int PP         = 9,
  parameter int R          = 10,
  parameter int NS_MAX     = 512,
  parameter int PSUM_DEPTH = 2048,
  parameter int NGROUPS    = NS_MAX / NP,
  parameter int IDX_W      = $clog2(K * K),
  parameter int SEL_W      = (R > 1) ? $clog2(R) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // layer configuration and control
  input  logic                      start,
  input  logic [CNT_W-1:0]          cfg_m,
  input  logic [CNT_W-1:0]          cfg_n,
  input  logic [CNT_W-1:0]          cfg_p,
  input  logic [CNT_W-1:0]          cfg_ns,
  input  logic [CNT_W-1:0]          cfg_ps,
  output logic                      busy,
  output logic                      done,
  output ctrl_state_e               state,
  output logic [$clog2(NP*PP+1)-1:0] pe_active,
  // input tiles from memory
  output logic                      in_req_valid,
  input  logic                      in_req_ready,
  output logic [CNT_W-1:0]          in_req_ch,
  output logic [CNT_W-1:0]          in_req_tile,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  fx_t [K-1:0]               in_row,
  // kernel schedule from memory
  output logic                      k_req_valid,
  input  logic                      k_req_ready,
  output logic [CNT_W-1:0]          k_req_ch,
  output logic [CNT_W-1:0]          k_req_kernel,
  input  logic                      k_valid,
  output logic                      k_ready,
  input  logic                      k_last,
  input  logic [R-1:0][IDX_W-1:0]   k_idx,
  input  logic [NP-1:0]             k_kvalid,
  input  logic [NP-1:0][SEL_W-1:0]  k_sel,
  input  cplx_t [NP-1:0]            k_w,
  // output tiles to memory
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [CNT_W-1:0]          out_kernel,
  output logic [CNT_W-1:0]          out_tile,
  output logic [$clog2(K)-1:0]      out_y,
  output fx_t [K-1:0]               out_row
);
  localparam int AW     = $clog2(PSUM_DEPTH);
  localparam int GRP_W  = (NGROUPS > 1) ? $clog2(NGROUPS) : 1;
  localparam int KDEPTH = K * K;
  localparam int KA_W   = $clog2(KDEPTH);
  localparam int LEN_W  = $clog2(KDEPTH + 1);
  localparam int NW     = (NP > 1) ? $clog2(NP) : 1;

  // ---------------- controller ----------------
  logic in_cmd, in_done, k_cmd, k_done, conv_cmd, conv_first, drain_cmd, drain_done, write_done;
  logic [CNT_W-1:0] in_cmd_ch, in_cmd_tile, k_cmd_ch, k_cmd_kernel;
  logic [CNT_W-1:0] blk_n_base, blk_p_base, blk_ns, blk_tg;
  logic [GRP_W-1:0] k_cmd_group, conv_group;
  logic [AW-1:0]    conv_base;
  logic             conv_busy, kb_busy, pa_busy;

  assign conv_busy = kb_busy | pa_busy;

  // A start that arrives while the partial-sum banks are still being zeroed
  // after reset is held until they are ready; cfg_* must then stay stable.
  logic psum_ready, start_pend, ctrl_start;
  assign ctrl_start = (start | start_pend) & psum_ready & (state == ST_IDLE);
  always_ff @(posedge clk) begin
    if (!rst_n)          start_pend <= 1'b0;
    else if (ctrl_start) start_pend <= 1'b0;
    else if (start)      start_pend <= 1'b1;
  end

  stream_ctrl #(.K(K), .NP(NP), .PP(PP), .NGROUPS(NGROUPS), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start(ctrl_start), .cfg_m, .cfg_n, .cfg_p, .cfg_ns, .cfg_ps,
    .busy, .done, .state,
    .in_cmd, .in_cmd_ch, .in_cmd_tile, .in_done,
    .k_cmd, .k_cmd_ch, .k_cmd_kernel, .k_cmd_group, .k_done,
    .conv_cmd, .conv_group, .conv_base, .conv_first, .conv_busy,
    .drain_cmd, .blk_n_base, .blk_p_base, .blk_ns, .blk_tg, .drain_done, .write_done);

  // ---------------- input path ----------------
  logic [PP-1:0]                fft_in_valid, fft_in_ready, fft_out_valid, fft_out_ready;
  cplx_t [K-1:0]                fft_in_row;
  cplx_t [PP-1:0][K-1:0]        fft_out_row;
  logic [PP-1:0]                ib_wr_en;
  logic [PP-1:0][$clog2(K)-1:0] ib_wr_row;
  cplx_t [PP-1:0][K-1:0]        ib_wr_data;
  logic [R-1:0][IDX_W-1:0]      ib_rd_addr;
  cplx_t [PP-1:0][R-1:0]        ib_rd_data;

  input_streamer #(.K(K), .PP(PP)) u_in (
    .clk, .rst_n, .cmd(in_cmd), .cmd_ch(in_cmd_ch), .cmd_tile(in_cmd_tile), .done(in_done),
    .req_valid(in_req_valid), .req_ready(in_req_ready), .req_ch(in_req_ch), .req_tile(in_req_tile),
    .rd_valid(in_valid), .rd_ready(in_ready), .rd_row(in_row),
    .fft_in_valid, .fft_in_ready, .fft_in_row, .fft_out_valid, .fft_out_ready, .fft_out_row,
    .buf_wr_en(ib_wr_en), .buf_wr_row(ib_wr_row), .buf_wr_data(ib_wr_data));

  for (genvar p = 0; p < PP; p++) begin : g_tile
    fft2d #(.K(K), .INVERSE(1'b0)) u_fft (
      .clk, .rst_n,
      .in_valid(fft_in_valid[p]), .in_ready(fft_in_ready[p]), .in_row(fft_in_row),
      .out_valid(fft_out_valid[p]), .out_ready(fft_out_ready[p]), .out_row(fft_out_row[p]));
    input_buffer #(.K(K), .R(R)) u_ibuf (
      .clk, .wr_en(ib_wr_en[p]), .wr_row(ib_wr_row[p]), .wr_data(ib_wr_data[p]),
      .rd_addr(ib_rd_addr), .rd_data(ib_rd_data[p]));
  end

  // ---------------- kernel path ----------------
  logic                     kb_wr_en, kb_len_we;
  logic [GRP_W-1:0]         kb_wr_group, kb_len_group;
  logic [KA_W-1:0]          kb_wr_addr;
  logic [R-1:0][IDX_W-1:0]  kb_wr_idx;
  logic [NP-1:0]            kb_wr_valid;
  logic [NP-1:0][SEL_W-1:0] kb_wr_sel;
  cplx_t [NP-1:0]           kb_wr_w;
  logic [LEN_W-1:0]         kb_len_value;
  logic                     row_valid;
  logic [R-1:0][IDX_W-1:0]  row_idx;
  logic [NP-1:0]            row_kvalid;
  logic [NP-1:0][SEL_W-1:0] row_sel;
  cplx_t [NP-1:0]           row_w;

  kernel_streamer #(.K(K), .NP(NP), .R(R), .NGROUPS(NGROUPS), .DEPTH(KDEPTH)) u_kin (
    .clk, .rst_n, .cmd(k_cmd), .cmd_ch(k_cmd_ch), .cmd_kernel(k_cmd_kernel),
    .cmd_group(k_cmd_group), .done(k_done),
    .req_valid(k_req_valid), .req_ready(k_req_ready), .req_ch(k_req_ch), .req_kernel(k_req_kernel),
    .k_valid, .k_ready, .k_last, .k_idx, .k_kvalid, .k_sel, .k_w,
    .kb_wr_en, .kb_wr_group, .kb_wr_addr, .kb_wr_idx, .kb_wr_valid, .kb_wr_sel, .kb_wr_w,
    .kb_len_we, .kb_len_group, .kb_len_value);

  kernel_buffer #(.K(K), .NP(NP), .R(R), .NGROUPS(NGROUPS), .DEPTH(KDEPTH)) u_kbuf (
    .clk, .rst_n,
    .wr_en(kb_wr_en), .wr_group(kb_wr_group), .wr_addr(kb_wr_addr), .wr_idx(kb_wr_idx),
    .wr_valid(kb_wr_valid), .wr_sel(kb_wr_sel), .wr_w(kb_wr_w),
    .len_we(kb_len_we), .len_group(kb_len_group), .len_value(kb_len_value),
    .run(conv_cmd), .run_group(conv_group), .busy(kb_busy),
    .out_row_valid(row_valid), .out_idx(row_idx), .out_valid(row_kvalid),
    .out_sel(row_sel), .out_w(row_w));

  // ---------------- PE array and partial sums ----------------
  logic [NP-1:0][PP-1:0][AW-1:0] ps_rd_addr, ps_wr_addr;
  cplx_t [NP-1:0][PP-1:0]        ps_rd_data, ps_wr_data;
  logic [NP-1:0][PP-1:0]         ps_wr_en;
  logic                          drain_mode, drain_clr;
  logic [NW-1:0]                 drain_n;
  logic [AW-1:0]                 drain_addr;
  cplx_t [PP-1:0]                drain_data;

  // base and first-channel flag are held for the whole pass
  logic [AW-1:0] base_q;
  logic          first_q;
  always_ff @(posedge clk) if (conv_cmd) begin
    base_q  <= conv_base;
    first_q <= conv_first;
  end

  pe_array #(.K(K), .NP(NP), .PP(PP), .R(R), .AW(AW)) u_pes (
    .clk, .rst_n,
    .row_valid, .row_idx, .row_kvalid, .row_sel, .row_w,
    .psum_base(base_q), .first_channel(first_q),
    .ib_rd_addr, .ib_rd_data,
    .ps_rd_addr, .ps_rd_data, .ps_wr_en, .ps_wr_addr, .ps_wr_data,
    .busy(pa_busy), .active_pes(pe_active));

  psum_buffer #(.NP(NP), .PP(PP), .DEPTH(PSUM_DEPTH)) u_psum (
    .clk, .rst_n, .init_done(psum_ready), .ps_rd_addr, .ps_rd_data, .ps_wr_en, .ps_wr_addr, .ps_wr_data,
    .drain_mode, .drain_clr, .drain_n, .drain_addr, .drain_data);

  // ---------------- output path ----------------
  logic                   ifft_in_valid;
  logic [PP-1:0]          ifft_in_ready, ifft_out_valid, ifft_out_ready;
  cplx_t [PP-1:0][K-1:0]  ifft_in_row, ifft_out_row;

  psum_drain #(.K(K), .NP(NP), .PP(PP), .AW(AW)) u_drain (
    .clk, .rst_n, .cmd(drain_cmd), .blk_ns, .blk_tg, .done(drain_done),
    .drain_mode, .drain_clr, .drain_n, .drain_addr, .drain_data,
    .ifft_in_valid, .ifft_in_ready, .ifft_in_row);

  for (genvar p = 0; p < PP; p++) begin : g_ifft
    fft2d #(.K(K), .INVERSE(1'b1)) u_ifft (
      .clk, .rst_n,
      .in_valid(ifft_in_valid), .in_ready(ifft_in_ready[p]), .in_row(ifft_in_row[p]),
      .out_valid(ifft_out_valid[p]), .out_ready(ifft_out_ready[p]), .out_row(ifft_out_row[p]));
  end

  output_writer #(.K(K), .NP(NP), .PP(PP)) u_out (
    .clk, .rst_n, .cmd(drain_cmd), .n_base(blk_n_base), .p_base(blk_p_base),
    .blk_ns, .blk_tg, .done(write_done),
    .ifft_out_valid, .ifft_out_ready, .ifft_out_row,
    .out_valid, .out_ready, .out_kernel, .out_tile, .out_y, .out_row);

endmodule
