// tb_input_streamer: self-checking test of the input streamer with P' = 3
// model FFT units. For two commands it checks the request (channel, first
// tile), that beat b goes to FFT unit b/K as a real row (imaginary part 0),
// that FFT output rows of every unit are written to that unit's input
// buffer at rows 0..K-1 in order, and that done pulses once, after the last
// of the P'*K rows. The model FFT units accept rows with random stalls and
// return rows with random delays.
module tb_input_streamer;
  import spec_pkg::*;
  localparam int K = 8, PP = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd, done, req_valid, req_ready, rd_valid, rd_ready;
  logic [CNT_W-1:0] cmd_ch, cmd_tile, req_ch, req_tile;
  fx_t [K-1:0] rd_row;
  logic [PP-1:0] fft_in_valid, fft_in_ready, fft_out_valid, fft_out_ready, buf_wr_en;
  cplx_t [K-1:0] fft_in_row;
  cplx_t [PP-1:0][K-1:0] fft_out_row;
  logic [PP-1:0][$clog2(K)-1:0] buf_wr_row;
  cplx_t [PP-1:0][K-1:0] buf_wr_data;

  input_streamer #(.K(K), .PP(PP)) u_dut (.*);

  int checks = 0, failures = 0;
  int beat, n_done, in_cnt [PP], out_cnt [PP], wr_cnt [PP];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // model FFT units: random input stalls, outputs a row tagged (unit, row)
  always @(negedge clk) begin
    for (int p = 0; p < PP; p++) begin
      fft_in_ready[p] = ($urandom % 4 != 0);
      fft_out_valid[p] = (out_cnt[p] < in_cnt[p]) && ($urandom % 3 != 0);
      for (int k = 0; k < K; k++) begin
        fft_out_row[p][k].re = fx_t'(p * 100 + out_cnt[p] * 10 + k);
        fft_out_row[p][k].im = fx_t'(-k);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (rd_valid && rd_ready) begin
      int p;
      p = beat / K;
      chk(fft_in_valid == PP'(1 << p), $sformatf("beat %0d routed to unit %0d", beat, p));
      for (int k = 0; k < K; k++)
        chk(fft_in_row[k].re == rd_row[k] && fft_in_row[k].im == '0, "row passed as real row");
      in_cnt[p]++;
      beat++;
    end
    for (int p = 0; p < PP; p++)
      if (fft_out_valid[p] && fft_out_ready[p]) begin
        chk(buf_wr_en[p] && int'(buf_wr_row[p]) == wr_cnt[p] % K && buf_wr_data[p] == fft_out_row[p],
            $sformatf("unit %0d row %0d to buffer", p, wr_cnt[p]));
        out_cnt[p]++; wr_cnt[p]++;
      end
  end

  initial begin
    cmd = 0; cmd_ch = 0; cmd_tile = 0; req_ready = 0; rd_valid = 0; rd_row = '0;
    beat = 0; n_done = 0;
    for (int p = 0; p < PP; p++) begin in_cnt[p] = 0; out_cnt[p] = 0; wr_cnt[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 2; c++) begin
      beat = 0;
      for (int p = 0; p < PP; p++) begin in_cnt[p] = 0; out_cnt[p] = 0; wr_cnt[p] = 0; end
      @(negedge clk);
      cmd = 1'b1; cmd_ch = CNT_W'(c + 1); cmd_tile = CNT_W'(c * PP);
      @(negedge clk);
      cmd = 1'b0;
      chk(req_valid && req_ch == CNT_W'(c + 1) && req_tile == CNT_W'(c * PP), "request fields");
      req_ready = 1'b1;
      @(negedge clk);
      req_ready = 1'b0;
      for (int b = 0; b < PP * K; b++) begin
        bit hs;
        while ($urandom % 4 == 0) @(negedge clk);
        rd_valid = 1'b1;
        for (int k = 0; k < K; k++) rd_row[k] = fx_t'($urandom);
        do begin #1; hs = rd_ready; @(negedge clk); end while (!hs);
        rd_valid = 1'b0;
      end
      while (n_done == c) @(negedge clk);
      for (int p = 0; p < PP; p++) chk(wr_cnt[p] == K, $sformatf("unit %0d rows written", p));
      repeat (3) @(negedge clk);
      chk(n_done == c + 1, "one done per command");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: input_streamer test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
