// tb_kernel_streamer: self-checking test of the kernel streamer. For several
// commands (different groups and lengths, including a 1-row schedule) it
// checks the request (channel, first kernel, one handshake), that each
// accepted beat is written to the kernel buffer at the next row of the
// commanded group with its data unchanged, that the row count is written on
// the last beat, and that done pulses once. Beats arrive with random gaps.
module tb_kernel_streamer;
  import spec_pkg::*;
  localparam int K = 8, NP = 2, R = 2, NGROUPS = 4, DEPTH = 64;
  localparam int IDX_W = 6, SEL_W = 1, GRP_W = 2, ADDR_W = 6, LEN_W = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd, done, req_valid, req_ready, k_valid, k_ready, k_last;
  logic [CNT_W-1:0] cmd_ch, cmd_kernel, req_ch, req_kernel;
  logic [GRP_W-1:0] cmd_group, kb_wr_group, kb_len_group;
  logic [R-1:0][IDX_W-1:0] k_idx, kb_wr_idx;
  logic [NP-1:0] k_kvalid, kb_wr_valid;
  logic [NP-1:0][SEL_W-1:0] k_sel, kb_wr_sel;
  cplx_t [NP-1:0] k_w, kb_wr_w;
  logic kb_wr_en, kb_len_we;
  logic [ADDR_W-1:0] kb_wr_addr;
  logic [LEN_W-1:0] kb_len_value;

  kernel_streamer #(.K(K), .NP(NP), .R(R), .NGROUPS(NGROUPS), .DEPTH(DEPTH)) u_dut (.*);

  int checks = 0, failures = 0;
  int n_req, n_done, n_wr, n_len, exp_grp, exp_row, exp_len;
  logic [R-1:0][IDX_W-1:0] cur_idx;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) n_req++;
    if (done) n_done++;
    if (kb_wr_en) begin
      chk(kb_wr_group == GRP_W'(exp_grp) && kb_wr_addr == ADDR_W'(exp_row) && kb_wr_idx == cur_idx,
          $sformatf("write row %0d of group %0d", exp_row, exp_grp));
      exp_row++; n_wr++;
    end
    if (kb_len_we) begin
      chk(kb_len_group == GRP_W'(exp_grp) && kb_len_value == LEN_W'(exp_len), "row count write");
      n_len++;
    end
  end

  initial begin
    int lens [4] = '{5, 1, 9, 3};
    cmd = 0; cmd_ch = 0; cmd_kernel = 0; cmd_group = 0; req_ready = 0;
    k_valid = 0; k_last = 0; k_idx = '0; k_kvalid = '0; k_sel = '0; k_w = '0; cur_idx = '0;
    n_req = 0; n_done = 0; n_wr = 0; n_len = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 4; c++) begin
      int r0, d0;
      r0 = n_req; d0 = n_done;
      exp_grp = (c + 1) % NGROUPS; exp_row = 0; exp_len = lens[c];
      @(negedge clk);
      cmd = 1'b1; cmd_ch = CNT_W'(c); cmd_kernel = CNT_W'(c * NP); cmd_group = GRP_W'(exp_grp);
      @(negedge clk);
      cmd = 1'b0;
      chk(req_valid && req_ch == CNT_W'(c) && req_kernel == CNT_W'(c * NP), "request fields");
      repeat ($urandom % 3) @(negedge clk);
      req_ready = 1'b1;
      @(negedge clk);
      req_ready = 1'b0;
      for (int r = 0; r < lens[c]; r++) begin
        bit hs;
        while ($urandom % 3 == 0) @(negedge clk);
        k_valid = 1'b1; k_last = (r == lens[c] - 1);
        for (int j = 0; j < R; j++) k_idx[j] = IDX_W'($urandom);
        cur_idx = k_idx;
        k_kvalid = NP'($urandom);
        do begin #1; hs = k_ready; @(negedge clk); end while (!hs);
        k_valid = 1'b0; k_last = 1'b0;
      end
      repeat (3) @(negedge clk);
      chk(n_req - r0 == 1, "one request per command");
      chk(n_done - d0 == 1, "one done per command");
      chk(exp_row == lens[c], "rows written");
    end
    chk(n_len == 4, "row counts written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: kernel_streamer test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
