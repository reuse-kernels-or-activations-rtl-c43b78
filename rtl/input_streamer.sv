// input_streamer: the "inputs streaming" half of the streaming controller.
// On a command it fetches P' consecutive spatial input tiles of one input
// channel from off-chip memory, hands tile p to forward FFT unit p, and
// writes the spectral rows each FFT unit returns into input buffer p.
//
// How it works: one request (channel, first tile) is sent on the request
// handshake; memory answers with P'*K row beats, tile by tile, each beat one
// row of K zero-padded 16-bit spatial values. Beat b goes to FFT unit b/K.
// The FFT outputs (K rows per tile) are always accepted and written, row by
// row, into the matching input buffer. done pulses once all P'*K spectral
// rows are in the input buffers.
//
// Interface: cmd/cmd_ch/cmd_tile/done from the controller; req_valid/
// req_ready/req_ch/req_tile and rd_valid/rd_ready/rd_row to memory;
// fft_in_*, fft_out_* to the P' FFT units; buf_wr_* to the P' input buffers.
// Fetching tiles and FFT-ing them before buffering follows the architecture;
// the request format and row-per-beat transfer are this design's choices.
module input_streamer
  import spec_pkg::*;
#(
  parameter int K  = 8,
  parameter int PP = 9
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd,
  input  logic [CNT_W-1:0]              cmd_ch,
  input  logic [CNT_W-1:0]              cmd_tile,
  output logic                          done,
  // memory
  output logic                          req_valid,
  input  logic                          req_ready,
  output logic [CNT_W-1:0]              req_ch,
  output logic [CNT_W-1:0]              req_tile,
  input  logic                          rd_valid,
  output logic                          rd_ready,
  input  fx_t [K-1:0]                   rd_row,
  // forward FFT units
  output logic [PP-1:0]                 fft_in_valid,
  input  logic [PP-1:0]                 fft_in_ready,
  output cplx_t [K-1:0]                 fft_in_row,
  input  logic [PP-1:0]                 fft_out_valid,
  output logic [PP-1:0]                 fft_out_ready,
  input  cplx_t [PP-1:0][K-1:0]         fft_out_row,
  // input buffers
  output logic [PP-1:0]                 buf_wr_en,
  output logic [PP-1:0][$clog2(K)-1:0]  buf_wr_row,
  output cplx_t [PP-1:0][K-1:0]         buf_wr_data
);
  localparam int LOGK = $clog2(K);
  localparam int BW   = $clog2(PP * K + 1);

  logic          active;
  logic [BW-1:0] beats;      // beats received
  logic [BW-1:0] rows_out;   // spectral rows written
  logic [$clog2(PP)-1:0] tile_sel;
  logic [LOGK-1:0] wr_cnt [PP];

  assign tile_sel = ($clog2(PP))'(beats / BW'(K));

  // request
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      req_ch    <= '0;
      req_tile  <= '0;
    end else if (cmd) begin
      req_valid <= 1'b1;
      req_ch    <= cmd_ch;
      req_tile  <= cmd_tile;
    end else if (req_ready) begin
      req_valid <= 1'b0;
    end
  end

  // spatial rows to the FFT units
  always_comb begin
    for (int k = 0; k < K; k++) begin
      fft_in_row[k].re = rd_row[k];
      fft_in_row[k].im = '0;
    end
    fft_in_valid = '0;
    if (active && beats < BW'(PP * K)) fft_in_valid[tile_sel] = rd_valid;
    rd_ready = active && (beats < BW'(PP * K)) && fft_in_ready[tile_sel];
  end

  // spectral rows to the input buffers
  assign fft_out_ready = '1;
  always_comb begin
    for (int p = 0; p < PP; p++) begin
      buf_wr_en[p]   = fft_out_valid[p];
      buf_wr_row[p]  = wr_cnt[p];
      buf_wr_data[p] = fft_out_row[p];
    end
  end

  logic [BW-1:0] n_wr;
  always_comb begin
    n_wr = '0;
    for (int p = 0; p < PP; p++) n_wr = n_wr + BW'(fft_out_valid[p]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active   <= 1'b0;
      beats    <= '0;
      rows_out <= '0;
      done     <= 1'b0;
      for (int p = 0; p < PP; p++) wr_cnt[p] <= '0;
    end else begin
      done <= 1'b0;
      if (cmd) begin
        active   <= 1'b1;
        beats    <= '0;
        rows_out <= '0;
        for (int p = 0; p < PP; p++) wr_cnt[p] <= '0;
      end else if (active) begin
        if (rd_valid && rd_ready) beats <= beats + 1'b1;
        for (int p = 0; p < PP; p++) if (fft_out_valid[p]) wr_cnt[p] <= wr_cnt[p] + 1'b1;
        rows_out <= rows_out + n_wr;
        if (rows_out + n_wr == BW'(PP * K)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cmd |-> !active)
    else $error("input_streamer: command while busy");

endmodule
