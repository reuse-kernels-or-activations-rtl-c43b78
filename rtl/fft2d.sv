// fft2d: K x K two-dimensional FFT unit. With INVERSE=0 it turns one spatial
// input tile into its spectrum before the tile enters the input buffer; with
// INVERSE=1 it turns one finished spectral output tile back into the spatial
// domain before it is written out. The engine holds P' units of each kind,
// one per parallel tile.
//
// How it works (row-column method, single tile buffer):
//   LOAD : accepts K row beats; each row is transformed on arrival by a
//          K-point fft_1d and kept at full precision.
//   COL  : K cycles, one column transformed per cycle and written back,
//          scaled and saturated to 16 bits (forward: no scaling; inverse:
//          divided by K*K with rounding).
//   OUT  : K row beats leave through a valid/ready handshake.
// A tile therefore occupies the unit for about 3K cycles; the next tile is
// accepted once the last row of the previous one has left.
//
// Interface: in_valid/in_ready/in_row (K complex values, one row per beat),
// out_valid/out_ready/out_row (K complex values). Synchronous active-low reset.
// The transform itself follows the architecture; the row-column schedule,
// the single buffer and the scaling are this design's choices.
module fft2d
  import spec_pkg::*;
#(
  parameter int K       = 8,
  parameter bit INVERSE = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  cplx_t [K-1:0]     in_row,
  output logic              out_valid,
  input  logic              out_ready,
  output cplx_t [K-1:0]     out_row
);
  localparam int LOGK = $clog2(K);
  localparam int RW   = DATA_W + LOGK + 1;   // after the row pass
  localparam int CW   = RW + LOGK + 1;       // after the column pass
  localparam int SHIFT = INVERSE ? 2 * LOGK : 0;

  typedef enum logic [1:0] {S_LOAD, S_COL, S_OUT} st_e;
  st_e st;
  logic [LOGK-1:0] cnt;

  logic signed [RW-1:0] mem_re [K][K];
  logic signed [RW-1:0] mem_im [K][K];

  // Row transform of the incoming beat.
  logic signed [DATA_W-1:0] r_in_re [K], r_in_im [K];
  logic signed [RW-1:0]     r_out_re [K], r_out_im [K];
  // Column transform of column cnt.
  logic signed [RW-1:0]     c_in_re [K], c_in_im [K];
  logic signed [CW-1:0]     c_out_re [K], c_out_im [K];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      r_in_re[i] = in_row[i].re;
      r_in_im[i] = in_row[i].im;
      c_in_re[i] = mem_re[i][cnt];
      c_in_im[i] = mem_im[i][cnt];
    end
  end

  fft_1d #(.N(K), .IN_W(DATA_W), .INVERSE(INVERSE)) u_row (
    .in_re(r_in_re), .in_im(r_in_im), .out_re(r_out_re), .out_im(r_out_im));
  fft_1d #(.N(K), .IN_W(RW), .INVERSE(INVERSE)) u_col (
    .in_re(c_in_re), .in_im(c_in_im), .out_re(c_out_re), .out_im(c_out_im));

  function automatic fx_t scale(input logic signed [CW-1:0] v);
    logic signed [47:0] w;
    w = 48'(v);
    if (SHIFT > 0) w = (w + 48'(1 << (SHIFT > 0 ? SHIFT - 1 : 0))) >>> SHIFT;
    return sat_fx(w);
  endfunction

  assign in_ready  = (st == S_LOAD);
  assign out_valid = (st == S_OUT);

  always_comb begin
    for (int i = 0; i < K; i++) begin
      out_row[i].re = fx_t'(mem_re[cnt][i]);
      out_row[i].im = fx_t'(mem_im[cnt][i]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st  <= S_LOAD;
      cnt <= '0;
    end else begin
      unique case (st)
        S_LOAD: if (in_valid) begin
          for (int i = 0; i < K; i++) begin
            mem_re[cnt][i] <= r_out_re[i];
            mem_im[cnt][i] <= r_out_im[i];
          end
          cnt <= cnt + 1'b1;
          if (cnt == LOGK'(K - 1)) st <= S_COL;
        end
        S_COL: begin
          for (int i = 0; i < K; i++) begin
            mem_re[i][cnt] <= RW'(scale(c_out_re[i]));
            mem_im[i][cnt] <= RW'(scale(c_out_im[i]));
          end
          cnt <= cnt + 1'b1;
          if (cnt == LOGK'(K - 1)) st <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == LOGK'(K - 1)) st <= S_LOAD;
        end
        default: st <= S_LOAD;
      endcase
    end
  end

endmodule
