// tb_fft2d: self-checking test of the 2D FFT unit. A forward unit transforms
// random 8x8 tiles; every output row is compared with a floating-point DFT
// (unnormalised). Its output feeds an inverse unit whose output must give the
// original tile back (the inverse divides by K*K). Random back-pressure on
// both outputs; tolerance is a few LSBs for the fixed-point rounding.
module tb_fft2d;
  import spec_pkg::*;
  localparam int K = 8, NT = 6;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  cplx_t [K-1:0] f_in_row, f_out_row;
  logic i_in_ready, i_out_valid, i_out_ready;
  cplx_t [K-1:0] i_out_row;

  fft2d #(.K(K), .INVERSE(1'b0)) u_fwd (.clk, .rst_n, .in_valid(f_in_valid), .in_ready(f_in_ready),
    .in_row(f_in_row), .out_valid(f_out_valid), .out_ready(f_out_ready), .out_row(f_out_row));
  fft2d #(.K(K), .INVERSE(1'b1)) u_inv (.clk, .rst_n, .in_valid(f_out_valid && i_in_ready),
    .in_ready(i_in_ready), .in_row(f_out_row), .out_valid(i_out_valid), .out_ready(i_out_ready),
    .out_row(i_out_row));
  assign f_out_ready = i_in_ready;

  int checks = 0, failures = 0;
  int x [NT][K*K];
  int frow = 0, irow = 0;

  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // forward output against the DFT
  always @(posedge clk) if (rst_n && f_out_valid && f_out_ready) begin
    int t, u;
    t = frow / K; u = frow % K;
    for (int v = 0; v < K; v++) begin
      real er, ei;
      er = 0.0; ei = 0.0;
      for (int a = 0; a < K; a++)
        for (int b = 0; b < K; b++) begin
          real ang;
          ang = -2.0 * PI * real'(u * a + v * b) / real'(K);
          er += real'(x[t][a*K+b]) * $cos(ang);
          ei += real'(x[t][a*K+b]) * $sin(ang);
        end
      chk(rabs(real'(f_out_row[v].re) - er) <= 3.0 && rabs(real'(f_out_row[v].im) - ei) <= 3.0,
          $sformatf("fwd tile %0d (%0d,%0d) got %0d,%0d exp %f,%f", t, u, v,
                    f_out_row[v].re, f_out_row[v].im, er, ei));
    end
    frow++;
  end

  // inverse output against the original tile
  always @(posedge clk) if (rst_n && i_out_valid && i_out_ready) begin
    int t, a;
    t = irow / K; a = irow % K;
    for (int b = 0; b < K; b++)
      chk(rabs(real'(int'(i_out_row[b].re) - x[t][a*K+b])) <= 2 && rabs(real'(i_out_row[b].im)) <= 2,
          $sformatf("inv tile %0d (%0d,%0d) got %0d exp %0d", t, a, b, i_out_row[b].re, x[t][a*K+b]));
    irow++;
  end

  always @(negedge clk) i_out_ready = ($urandom % 3 != 0);

  initial begin
    f_in_valid = 1'b0; f_in_row = '0;
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < K*K; i++) x[t][i] = int'($urandom % 129) - 64;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NT; t++)
      for (int a = 0; a < K; a++) begin
        bit hs;
        while ($urandom % 3 == 0) @(negedge clk);
        f_in_valid = 1'b1;
        for (int b = 0; b < K; b++) begin f_in_row[b].re = fx_t'(x[t][a*K+b]); f_in_row[b].im = '0; end
        do begin #1; hs = f_in_ready; @(negedge clk); end while (!hs);
        f_in_valid = 1'b0;
      end
    wait (irow == NT * K);
    chk(frow == NT * K, "forward row count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog: fft2d test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
