// tb_stream_ctrl: self-checking test of the streaming controller with model
// responders (input and kernel streamers, schedule playback, drain and
// writer) that answer each command after a random delay. For three layer
// configurations it checks the number of input fetches M*(P/P')*(N/Ns),
// kernel fetches M*(N/N')*(P/Ps), convolution passes M*(N/N')*(P/P') and
// block drains (N/Ns)*(P/Ps); that every (channel, tile group, kernel group)
// pass happens once with the right first-channel flag and a partial-sum base
// inside the block; that the READ INPUT -> PROC CONV shortcut is taken when
// a block holds one kernel group; and that done pulses once per layer.
module tb_stream_ctrl;
  import spec_pkg::*;
  localparam int K = 8, NP = 4, PP = 2, NGROUPS = 4, AW = 8, GRP_W = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, in_cmd, in_done, k_cmd, k_done, conv_cmd, conv_first, conv_busy;
  logic drain_cmd, drain_done, write_done;
  logic [CNT_W-1:0] cfg_m, cfg_n, cfg_p, cfg_ns, cfg_ps;
  logic [CNT_W-1:0] in_cmd_ch, in_cmd_tile, k_cmd_ch, k_cmd_kernel, blk_n_base, blk_p_base, blk_ns, blk_tg;
  logic [GRP_W-1:0] k_cmd_group, conv_group;
  logic [AW-1:0] conv_base;
  ctrl_state_e state, prev;

  stream_ctrl #(.K(K), .NP(NP), .PP(PP), .NGROUPS(NGROUPS), .AW(AW)) u_dut (.*);

  int checks = 0, failures = 0;
  int n_in, n_k, n_conv, n_drain, n_done, n_short;
  int cur_ch, cur_tile;
  int seen [int];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // responders
  int in_t, k_t, c_t, d_t, w_t;
  always @(posedge clk) begin
    in_done <= 1'b0; k_done <= 1'b0; drain_done <= 1'b0; write_done <= 1'b0;
    if (in_cmd) in_t <= 2 + $urandom % 5; else if (in_t > 0) begin in_t <= in_t - 1; if (in_t == 1) in_done <= 1'b1; end
    if (k_cmd)  k_t  <= 2 + $urandom % 5; else if (k_t > 0)  begin k_t <= k_t - 1;   if (k_t == 1)  k_done <= 1'b1; end
    if (conv_cmd) begin c_t <= 1 + $urandom % 6; conv_busy <= 1'b1; end
    else if (c_t > 0) begin c_t <= c_t - 1; if (c_t == 1) conv_busy <= 1'b0; end
    if (drain_cmd) d_t <= 3 + $urandom % 5; else if (d_t > 0) begin d_t <= d_t - 1; if (d_t == 1) begin drain_done <= 1'b1; w_t <= 2 + $urandom % 4; end end
    if (w_t > 0) begin w_t <= w_t - 1; if (w_t == 1) write_done <= 1'b1; end
    if (!rst_n) begin in_t <= 0; k_t <= 0; c_t <= 0; d_t <= 0; w_t <= 0; conv_busy <= 1'b0; end
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    prev <= state;
    if (prev == ST_READ_INPUT && state == ST_PROC_CONV) n_short++;
    if (done) n_done++;
    if (in_cmd) begin
      n_in++; cur_ch = int'(in_cmd_ch); cur_tile = int'(in_cmd_tile);
      chk(int'(in_cmd_tile) % PP == 0 && in_cmd_tile < cfg_p && in_cmd_ch < cfg_m, "input command fields");
    end
    if (k_cmd) begin
      n_k++;
      chk(int'(k_cmd_ch) == cur_ch && k_cmd_kernel < cfg_n && int'(k_cmd_kernel) % NP == 0, "kernel command fields");
    end
    if (conv_cmd) begin
      int key, kg;
      n_conv++;
      kg = int'(blk_n_base) / NP + int'(conv_group);
      key = (cur_ch * 1000 + cur_tile) * 1000 + kg;
      chk(!seen.exists(key), $sformatf("pass ch %0d tile %0d kernel group %0d repeated", cur_ch, cur_tile, kg));
      seen[key] = 1;
      chk(conv_first == (cur_ch == 0), "first-channel flag");
      chk(int'(conv_base) + K * K <= (int'(blk_ns) / NP) * int'(blk_tg) * K * K, "partial-sum base inside block");
      chk(int'(conv_base) % (K * K) == 0, "partial-sum base aligned");
    end
    if (drain_cmd) n_drain++;
  end

  task automatic run_layer(int m, int n, int p, int ns, int ps);
    int ein, ek, ec, ed;
    n_in = 0; n_k = 0; n_conv = 0; n_drain = 0; n_done = 0; n_short = 0;
    seen.delete();
    cfg_m = CNT_W'(m); cfg_n = CNT_W'(n); cfg_p = CNT_W'(p); cfg_ns = CNT_W'(ns); cfg_ps = CNT_W'(ps);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (n_done == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    ein = m * (p / PP) * ((n + ns - 1) / ns);
    ek  = m * (n / NP) * ((p + ps - 1) / ps);
    ec  = m * (n / NP) * (p / PP);
    ed  = ((n + ns - 1) / ns) * ((p + ps - 1) / ps);
    chk(n_in == ein,  $sformatf("input fetches %0d expected %0d", n_in, ein));
    chk(n_k == ek,    $sformatf("kernel fetches %0d expected %0d", n_k, ek));
    chk(n_conv == ec, $sformatf("passes %0d expected %0d", n_conv, ec));
    chk(n_drain == ed, $sformatf("drains %0d expected %0d", n_drain, ed));
    chk(n_done == 1 && !busy, "one done, then idle");
    if (ns == NP && ps > PP) chk(n_short > 0, "READ INPUT -> PROC CONV shortcut taken");
    $display("layer M=%0d N=%0d P=%0d Ns=%0d Ps=%0d: %0d input, %0d kernel fetches, %0d shortcuts",
             m, n, p, ns, ps, n_in, n_k, n_short);
  endtask

  initial begin
    start = 0; cfg_m = 0; cfg_n = 0; cfg_p = 0; cfg_ns = 0; cfg_ps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer(2, 8, 8, 8, 4);
    run_layer(3, 8, 4, 4, 4);
    run_layer(1, 4, 2, 4, 2);
    run_layer(2, 12, 6, 8, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    $display("watchdog: stream_ctrl test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
