// output_writer: the "write outputs" block. It collects the spatial output
// tiles produced by the P' inverse FFT units and streams them to off-chip
// memory, one tile row per beat, tagged with its kernel (output channel),
// tile number and row.
//
// How it works: it walks the finished block in the same order as the
// partial-sum drain (kernel group g, kernel column n, tile group t) and, for
// each such step, takes the K rows of unit 0, then unit 1, ... up to unit
// P'-1. Only the real part of each inverse FFT value is sent: the spectral
// product of real tiles and real kernels transforms back to a real tile.
// Overlap-and-add of neighbouring output tiles is left to the host. done
// pulses when the last row of the block has been accepted.
//
// Interface: cmd with the block description (n_base, p_base, blk_ns, blk_tg)
// and done; ifft_out_valid/ready/row from the P' inverse FFT units;
// out_valid/out_ready/out_kernel/out_tile/out_y/out_row to memory.
// Writing tiles out after the IFFT follows the architecture; the beat format
// and the order are this design's choices.
module output_writer
  import spec_pkg::*;
#(
  parameter int K  = 8,
  parameter int NP = 64,
  parameter int PP = 9
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd,
  input  logic [CNT_W-1:0]       n_base,
  input  logic [CNT_W-1:0]       p_base,
  input  logic [CNT_W-1:0]       blk_ns,
  input  logic [CNT_W-1:0]       blk_tg,
  output logic                   done,
  input  logic [PP-1:0]          ifft_out_valid,
  output logic [PP-1:0]          ifft_out_ready,
  input  cplx_t [PP-1:0][K-1:0]  ifft_out_row,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [CNT_W-1:0]       out_kernel,
  output logic [CNT_W-1:0]       out_tile,
  output logic [$clog2(K)-1:0]   out_y,
  output fx_t [K-1:0]            out_row
);
  localparam int LOGK = $clog2(K);
  localparam int PW   = (PP > 1) ? $clog2(PP) : 1;

  logic             active;
  logic [CNT_W-1:0] nb, pb, ngrp, ntg, g_q, n_q, t_q;
  logic [PW-1:0]    p_q;
  logic [LOGK-1:0]  y_q;
  logic             fire;

  assign out_valid  = active && ifft_out_valid[p_q];
  assign fire       = out_valid && out_ready;
  assign out_kernel = nb + g_q * CNT_W'(NP) + n_q;
  assign out_tile   = pb + t_q * CNT_W'(PP) + CNT_W'(p_q);
  assign out_y      = y_q;

  always_comb begin
    ifft_out_ready = '0;
    if (active) ifft_out_ready[p_q] = out_ready;
    for (int k = 0; k < K; k++) out_row[k] = ifft_out_row[p_q][k].re;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      done   <= 1'b0;
      nb <= '0; pb <= '0; ngrp <= '0; ntg <= '0;
      g_q <= '0; n_q <= '0; t_q <= '0; p_q <= '0; y_q <= '0;
    end else begin
      done <= 1'b0;
      if (cmd && !active) begin
        active <= 1'b1;
        nb   <= n_base;
        pb   <= p_base;
        ngrp <= blk_ns / CNT_W'(NP);
        ntg  <= blk_tg;
        g_q <= '0; n_q <= '0; t_q <= '0; p_q <= '0; y_q <= '0;
      end else if (fire) begin
        y_q <= y_q + 1'b1;
        if (y_q == LOGK'(K - 1)) begin
          if (p_q == PW'(PP - 1)) begin
            p_q <= '0;
            if (t_q + 1'b1 == ntg) begin
              t_q <= '0;
              if (n_q == CNT_W'(NP - 1)) begin
                n_q <= '0;
                if (g_q + 1'b1 == ngrp) begin
                  active <= 1'b0;
                  done   <= 1'b1;
                end else g_q <= g_q + 1'b1;
              end else n_q <= n_q + 1'b1;
            end else t_q <= t_q + 1'b1;
          end else p_q <= p_q + 1'b1;
        end
      end
    end
  end

endmodule
