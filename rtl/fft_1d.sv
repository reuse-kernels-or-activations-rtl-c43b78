// fft_1d: combinational N-point radix-2 decimation-in-time FFT, the building
// block of the 2D transforms of the engine.
//
// How it works: inputs are taken in bit-reversed order and pass through
// log2(N) butterfly stages. Every value is carried at OUT_W = IN_W+log2(N)+1
// bits, which holds the worst-case growth of the transform, so no stage
// overflows. Twiddle factors are cos/sin(2*pi*k/N) in Q2.14, computed at
// elaboration by a Taylor series; the product with a twiddle is rounded to
// nearest. INVERSE=1 uses the conjugate twiddles and does not scale (the
// caller divides by N*N after the 2D transform).
//
// Interface: in_re/in_im are N signed IN_W-bit values in natural order,
// out_re/out_im are N signed OUT_W-bit values in natural order. No clock:
// the module is pure logic and the caller registers around it.
//
// The radix-2 structure and the rounding are this design's choice; the
// architecture only asks for an FFT of the tile size K.
module fft_1d #(
  parameter int N       = 8,
  parameter int IN_W    = 16,
  parameter bit INVERSE = 1'b0,
  parameter int LOGN    = $clog2(N),
  parameter int OUT_W   = IN_W + LOGN + 1
) (
  input  logic signed [IN_W-1:0]  in_re  [N],
  input  logic signed [IN_W-1:0]  in_im  [N],
  output logic signed [OUT_W-1:0] out_re [N],
  output logic signed [OUT_W-1:0] out_im [N]
);
  import spec_pkg::*;

  localparam int W  = OUT_W;
  localparam int TW = TW_FRAC;

  // Twiddle constant generation: round(2^TW * cos or sin(2*pi*k/N)).
  function automatic real taylor_cos(input real a);
    real t, s;
    t = 1.0;
    s = 1.0;
    for (int i = 1; i < 24; i++) begin
      t = -t * a * a / real'((2 * i - 1) * (2 * i));
      s = s + t;
    end
    return s;
  endfunction

  function automatic int tw_cos(input int k);
    real a;
    a = 2.0 * 3.14159265358979323846 * real'(k) / real'(N);
    return int'(taylor_cos(a) * real'(1 << TW));
  endfunction

  function automatic int tw_sin(input int k);
    real a;
    // sin(a) = cos(a - pi/2)
    a = 2.0 * 3.14159265358979323846 * real'(k) / real'(N) - 1.57079632679489661923;
    return int'(taylor_cos(a) * real'(1 << TW));
  endfunction

  function automatic int bitrev(input int v);
    int r;
    r = 0;
    for (int b = 0; b < LOGN; b++) if (v[b]) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  logic signed [W-1:0] st0_re [N], st0_im [N];

  for (genvar i = 0; i < N; i++) begin : g_in
    assign st0_re[i] = W'(in_re[bitrev(i)]);
    assign st0_im[i] = W'(in_im[bitrev(i)]);
  end

  // One set of signals per stage, so that no array spans two stages.
  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    localparam int HALF = 1 << s;
    localparam int SPAN = 2 * HALF;
    logic signed [W-1:0] a_re [N], a_im [N];  // stage input
    logic signed [W-1:0] o_re [N], o_im [N];  // stage output
    if (s == 0) begin : g_first
      assign a_re = st0_re;
      assign a_im = st0_im;
    end else begin : g_next
      assign a_re = g_stage[s-1].o_re;
      assign a_im = g_stage[s-1].o_im;
    end
    for (genvar g = 0; g < N / SPAN; g++) begin : g_grp
      for (genvar j = 0; j < HALF; j++) begin : g_bfly
        localparam int I0  = g * SPAN + j;
        localparam int I1  = I0 + HALF;
        localparam int KTW = j * (N / SPAN);
        // forward: W = cos - j sin ; inverse: W = cos + j sin
        localparam logic signed [TW+1:0] C = (TW+2)'(tw_cos(KTW));
        localparam logic signed [TW+1:0] S = INVERSE ? (TW+2)'(tw_sin(KTW)) : (TW+2)'(-tw_sin(KTW));
        logic signed [W+TW+2:0] pr, pi;
        logic signed [W-1:0] t_re, t_im;
        always_comb begin
          pr = (W+TW+3)'(a_re[I1]) * (W+TW+3)'(C) - (W+TW+3)'(a_im[I1]) * (W+TW+3)'(S)
             + (W+TW+3)'(1 << (TW - 1));
          pi = (W+TW+3)'(a_re[I1]) * (W+TW+3)'(S) + (W+TW+3)'(a_im[I1]) * (W+TW+3)'(C)
             + (W+TW+3)'(1 << (TW - 1));
          t_re = W'(pr >>> TW);
          t_im = W'(pi >>> TW);
        end
        assign o_re[I0] = a_re[I0] + t_re;
        assign o_im[I0] = a_im[I0] + t_im;
        assign o_re[I1] = a_re[I0] - t_re;
        assign o_im[I1] = a_im[I0] - t_im;
      end
    end
  end

  assign out_re = g_stage[LOGN-1].o_re;
  assign out_im = g_stage[LOGN-1].o_im;

endmodule
