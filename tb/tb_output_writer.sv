// tb_output_writer: self-checking test of the output writer. P' model
// inverse FFT units each hold a stream of rows that encode (unit, row
// number); they offer rows with random gaps. For a block of 2 kernel groups
// and 2 tile groups starting at kernel 4 and tile 6, the test checks that
// rows leave in the order kernel group, kernel, tile group, unit, row, with
// the right kernel, tile and row tags and the real parts of the unit's row,
// that nothing is lost under random output back-pressure, and that done
// pulses once at the end.
module tb_output_writer;
  import spec_pkg::*;
  localparam int K = 8, NP = 2, PP = 3, NG = 2, NTG = 2, NB = 4, PB = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd, done, out_valid, out_ready;
  logic [CNT_W-1:0] n_base, p_base, blk_ns, blk_tg, out_kernel, out_tile;
  logic [PP-1:0] ifft_out_valid, ifft_out_ready;
  cplx_t [PP-1:0][K-1:0] ifft_out_row;
  logic [$clog2(K)-1:0] out_y;
  fx_t [K-1:0] out_row;

  output_writer #(.K(K), .NP(NP), .PP(PP)) u_dut (.*);

  int checks = 0, failures = 0, seq = 0, n_done = 0;
  int cnt [PP];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always @(negedge clk) begin
    out_ready = ($urandom % 3 != 0);
    for (int p = 0; p < PP; p++) begin
      ifft_out_valid[p] = (cnt[p] < NG * NP * NTG * K) && ($urandom % 4 != 0);
      for (int k = 0; k < K; k++) begin
        ifft_out_row[p][k].re = fx_t'(p * 1000 + cnt[p] * 8 + k);
        ifft_out_row[p][k].im = fx_t'(7);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    for (int p = 0; p < PP; p++) if (ifft_out_valid[p] && ifft_out_ready[p]) cnt[p]++;
    if (out_valid && out_ready) begin
      int g, n, t, p, y, c;
      y = seq % K; p = (seq / K) % PP; t = (seq / (K * PP)) % NTG;
      n = (seq / (K * PP * NTG)) % NP; g = seq / (K * PP * NTG * NP);
      c = ((g * NP + n) * NTG + t) * K + y;
      chk(out_kernel == CNT_W'(NB + g * NP + n) && out_tile == CNT_W'(PB + t * PP + p)
          && int'(out_y) == y, $sformatf("tags of output row %0d", seq));
      for (int k = 0; k < K; k++)
        chk(out_row[k] == fx_t'(p * 1000 + c * 8 + k), $sformatf("data of output row %0d", seq));
      seq++;
    end
  end

  initial begin
    cmd = 0; n_base = CNT_W'(NB); p_base = CNT_W'(PB); blk_ns = CNT_W'(NG * NP); blk_tg = CNT_W'(NTG);
    for (int p = 0; p < PP; p++) cnt[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cmd = 1'b1;
    @(negedge clk);
    cmd = 1'b0;
    while (n_done == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(n_done == 1, "one done");
    chk(seq == NG * NP * NTG * PP * K, $sformatf("%0d rows written", seq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog: output_writer test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
