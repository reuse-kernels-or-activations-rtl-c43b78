// tb_psum_drain: self-checking test of the partial-sum drain. A model
// partial-sum buffer returns, one cycle after each read, a value that encodes
// (kernel column, tile, address). For a block of 2 kernel groups and 2 tile
// groups the test checks that rows reach the P' inverse FFT units in the
// order kernel group, kernel, tile group, row, that each row holds the K
// words of its address range, that every word is read with clear exactly
// once, and that done pulses once. The FFT units stall at random.
module tb_psum_drain;
  import spec_pkg::*;
  localparam int K = 8, NP = 2, PP = 2, AW = 9, NW = 1;
  localparam int NG = 2, NTG = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd, done, drain_mode, drain_clr, ifft_in_valid;
  logic [CNT_W-1:0] blk_ns, blk_tg;
  logic [NW-1:0] drain_n;
  logic [AW-1:0] drain_addr;
  cplx_t [PP-1:0] drain_data;
  logic [PP-1:0] ifft_in_ready;
  cplx_t [PP-1:0][K-1:0] ifft_in_row;

  psum_drain #(.K(K), .NP(NP), .PP(PP), .AW(AW)) u_dut (.*);

  function automatic cplx_t enc(int n, int p, int a);
    cplx_t v;
    v.re = fx_t'(a); v.im = fx_t'(n * 16 + p);
    return v;
  endfunction

  always @(posedge clk)
    for (int p = 0; p < PP; p++) drain_data[p] <= enc(int'(drain_n), p, int'(drain_addr));

  int checks = 0, failures = 0, rows = 0, n_done = 0;
  int n_clr [NP][1 << AW];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always @(negedge clk) ifft_in_ready = ($urandom % 3 != 0) ? '1 : PP'($urandom);

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (drain_clr) n_clr[drain_n][drain_addr]++;
    if (ifft_in_valid) begin
      int g, n, t, y;
      y = rows % K; t = (rows / K) % NTG; n = (rows / (K * NTG)) % NP; g = rows / (K * NTG * NP);
      chk(&ifft_in_ready, "valid only when every unit is ready");
      for (int p = 0; p < PP; p++)
        for (int c = 0; c < K; c++)
          chk(ifft_in_row[p][c] == enc(n, p, (g * NTG + t) * K * K + y * K + c),
              $sformatf("row %0d unit %0d word %0d", rows, p, c));
      rows++;
    end
  end

  initial begin
    cmd = 0; blk_ns = CNT_W'(NG * NP); blk_tg = CNT_W'(NTG);
    foreach (n_clr[n, a]) n_clr[n][a] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cmd = 1'b1;
    @(negedge clk);
    cmd = 1'b0;
    while (n_done == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(n_done == 1, "one done");
    chk(rows == NG * NP * NTG * K, $sformatf("%0d rows sent", rows));
    for (int n = 0; n < NP; n++)
      for (int a = 0; a < NG * NTG * K * K; a++)
        chk(n_clr[n][a] == 1, $sformatf("column %0d word %0d cleared %0d times", n, a, n_clr[n][a]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog: psum_drain test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
