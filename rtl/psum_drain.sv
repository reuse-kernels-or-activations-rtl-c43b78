// psum_drain: moves the finished spectral output tiles of a block from the
// partial-sum buffer into the P' inverse FFT units, once every input channel
// has been accumulated.
//
// How it works: the tiles are visited in the order kernel group g, kernel
// column n, tile group t (the same order the output writer uses). For each
// tile the K*K values are read row by row from the P' banks of kernel column
// n at address (g*(Ps/P') + t)*K*K + row*K + col, one value per bank per
// cycle; after K reads (plus one cycle of read latency) the P' assembled rows
// are handed to the P' inverse FFT units in the same cycle. A row is started
// only when all P' units can take it, so the unit never stalls half-way
// through a row. done pulses after the last row of the block.
//
// Interface: cmd/blk_ns/blk_tg/done from the controller; drain_mode/drain_n/
// drain_addr/drain_data to the partial-sum buffer; ifft_in_valid (common),
// ifft_in_ready[P'], ifft_in_row[P'] to the inverse FFT units. Feeding the
// IFFT from the partial-sum banks follows the architecture; the order and
// the row assembly are this design's choices.
module psum_drain
  import spec_pkg::*;
#(
  parameter int K  = 8,
  parameter int NP = 64,
  parameter int PP = 9,
  parameter int AW = 11,
  parameter int NW = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd,
  input  logic [CNT_W-1:0]       blk_ns,
  input  logic [CNT_W-1:0]       blk_tg,
  output logic                   done,
  output logic                   drain_mode,
  output logic                   drain_clr,
  output logic [NW-1:0]          drain_n,
  output logic [AW-1:0]          drain_addr,
  input  cplx_t [PP-1:0]         drain_data,
  output logic                   ifft_in_valid,
  input  logic [PP-1:0]          ifft_in_ready,
  output cplx_t [PP-1:0][K-1:0]  ifft_in_row
);
  localparam int LOGK = $clog2(K);
  localparam int KK   = K * K;

  typedef enum logic [1:0] {D_IDLE, D_RD, D_WAIT, D_PUSH} dst_e;
  dst_e st;

  logic [CNT_W-1:0] ngrp, ntg, g_q, t_q;
  logic [NW-1:0]    n_q;
  logic [LOGK-1:0]  row_q, col_q, col_d;
  logic             pend;

  assign drain_mode    = (st != D_IDLE);
  assign drain_clr     = (st == D_RD) && (col_q != '0 || (&ifft_in_ready));
  assign drain_n       = n_q;
  assign drain_addr    = AW'((32'(g_q) * 32'(ntg) + 32'(t_q)) * KK + 32'(row_q) * K + 32'(col_q));
  assign ifft_in_valid = (st == D_PUSH) && (&ifft_in_ready);

  // assemble rows from the read data
  always_ff @(posedge clk) begin
    if (pend)
      for (int p = 0; p < PP; p++) ifft_in_row[p][col_d] <= drain_data[p];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st    <= D_IDLE;
      pend  <= 1'b0;
      done  <= 1'b0;
      ngrp  <= '0; ntg <= '0; g_q <= '0; t_q <= '0;
      n_q   <= '0; row_q <= '0; col_q <= '0; col_d <= '0;
    end else begin
      done  <= 1'b0;
      pend  <= 1'b0;
      col_d <= col_q;
      unique case (st)
        D_IDLE: if (cmd) begin
          ngrp <= blk_ns / CNT_W'(NP);
          ntg  <= blk_tg;
          g_q <= '0; t_q <= '0; n_q <= '0; row_q <= '0; col_q <= '0;
          st  <= D_RD;
        end
        D_RD: if (col_q != '0 || (&ifft_in_ready)) begin
          pend  <= 1'b1;
          col_q <= col_q + 1'b1;
          if (col_q == LOGK'(K - 1)) st <= D_WAIT;
        end
        D_WAIT: st <= D_PUSH;
        D_PUSH: if (&ifft_in_ready) begin
          st <= D_RD;
          row_q <= row_q + 1'b1;
          if (row_q == LOGK'(K - 1)) begin
            if (t_q + 1'b1 == ntg) begin
              t_q <= '0;
              if (n_q == NW'(NP - 1)) begin
                n_q <= '0;
                if (g_q + 1'b1 == ngrp) begin
                  st   <= D_IDLE;
                  done <= 1'b1;
                end else g_q <= g_q + 1'b1;
              end else n_q <= n_q + 1'b1;
            end else t_q <= t_q + 1'b1;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

endmodule
