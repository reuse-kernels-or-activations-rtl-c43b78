// tb_cnn_env: test environment for the whole spectral convolution engine.
// It plays the off-chip memory and the host around the engine, and checks
// every output row against an independent floating-point model.
//
// What it does for each layer it runs:
//   * makes random spatial input tiles (Q8.8 values in [-1, 1)) and random
//     sparse spectral kernels (K*K/ALPHA non-zero complex weights each, at
//     random positions);
//   * builds the access schedule of every group of NP kernels with a greedy
//     rule (each row picks, up to R times, the tile position wanted by most
//     not-yet-served kernels); this stands in for the offline scheduler;
//   * answers input requests with NPP*K row beats and kernel requests with
//     the group's schedule rows, inserting random idle cycles (stalls), and
//     applies random back-pressure on the output stream;
//   * computes Re(IDFT2(sum_m DFT2(x_m) * w_m / 2^FRAC)) in real arithmetic
//     and compares every output row within TOL codes.
// It counts the mechanisms of the engine (kernel fetches, kernel reuse
// without a fetch, READ INPUT -> PROC CONV shortcut, channel and block
// changes, inactive kernel slots, stalls), checks the number of input and
// kernel requests against the dataflow formulas, and reports utilisation.
// PROG selects the list of layers: 0 = reduced engine, 1 = full-size engine.
module tb_cnn_env
  import spec_pkg::*;
#(
  parameter int K      = 8,
  parameter int NP     = 4,
  parameter int NPP    = 2,
  parameter int R      = 2,
  parameter int MMAX   = 2,
  parameter int NMAX   = 8,
  parameter int PMAX   = 8,
  parameter int ALPHA  = 4,
  parameter int PROG   = 0,
  parameter int TOL    = 3,
  parameter int MAXCYC = 400000,
  parameter int IDX_W  = $clog2(K * K),
  parameter int SEL_W  = (R > 1) ? $clog2(R) : 1
) (
  output logic                      clk,
  output logic                      rst_n,
  output logic                      start,
  output logic [CNT_W-1:0]          cfg_m, cfg_n, cfg_p, cfg_ns, cfg_ps,
  input  logic                      busy,
  input  logic                      done,
  input  ctrl_state_e               state,
  input  logic [$clog2(NP*NPP+1)-1:0] pe_active,
  input  logic                      in_req_valid,
  output logic                      in_req_ready,
  input  logic [CNT_W-1:0]          in_req_ch, in_req_tile,
  output logic                      in_valid,
  input  logic                      in_ready,
  output fx_t [K-1:0]               in_row,
  input  logic                      k_req_valid,
  output logic                      k_req_ready,
  input  logic [CNT_W-1:0]          k_req_ch, k_req_kernel,
  output logic                      k_valid,
  input  logic                      k_ready,
  output logic                      k_last,
  output logic [R-1:0][IDX_W-1:0]   k_idx,
  output logic [NP-1:0]             k_kvalid,
  output logic [NP-1:0][SEL_W-1:0]  k_sel,
  output cplx_t [NP-1:0]            k_w,
  input  logic                      out_valid,
  output logic                      out_ready,
  input  logic [CNT_W-1:0]          out_kernel, out_tile,
  input  logic [$clog2(K)-1:0]      out_y,
  input  fx_t [K-1:0]               out_row
);
  localparam int KK = K * K;
  localparam int NG = NMAX / NP;
  localparam real PI = 3.14159265358979323846;

  int checks = 0, failures = 0;
  longint cycles = 0;

  // ---------------- data of the current layer ----------------
  int x_mem [MMAX][PMAX][KK];          // spatial input codes
  int w_re  [NMAX][MMAX][KK];          // spectral weights (0 where pruned)
  int w_im  [NMAX][MMAX][KK];
  bit w_nz  [NMAX][MMAX][KK];
  int sch_len [MMAX][NG];
  int sch_idx [MMAX][NG][KK][R];
  bit sch_kv  [MMAX][NG][KK][NP];
  int sch_sel [MMAX][NG][KK][NP];
  real exp_y [NMAX][PMAX][KK];
  int got   [NMAX][PMAX][K];

  // ---------------- statistics ----------------
  int n_in_req, n_k_req, n_kernel_reuse, n_shortcut, n_channel, n_block;
  int n_out_beats, n_out_stall, n_in_stall, n_k_stall, n_idle_slots;
  longint pe_work, conv_cycles;

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  // watchdog
  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog: no completion after %0d cycles", MAXCYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycles++;

  // ---------------- layer generation ----------------
  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic gen_layer(input int M, input int N, input int P);
    for (int m = 0; m < M; m++)
      for (int t = 0; t < P; t++)
        for (int i = 0; i < KK; i++) x_mem[m][t][i] = rnd(-256, 255);
    for (int n = 0; n < N; n++)
      for (int m = 0; m < M; m++) begin
        int cnt;
        for (int i = 0; i < KK; i++) begin w_nz[n][m][i] = 0; w_re[n][m][i] = 0; w_im[n][m][i] = 0; end
        cnt = 0;
        while (cnt < KK / ALPHA) begin
          int pos;
          pos = rnd(0, KK - 1);
          if (!w_nz[n][m][pos]) begin
            w_nz[n][m][pos] = 1;
            w_re[n][m][pos] = rnd(-128, 127);
            w_im[n][m][pos] = rnd(-128, 127);
            cnt++;
          end
        end
      end
  endtask

  // greedy schedule of kernel group g (kernels g*NP .. g*NP+NP-1) of channel m
  task automatic gen_schedule(input int m, input int g);
    bit rem [NP][KK];
    int left, row;
    left = 0;
    for (int n = 0; n < NP; n++)
      for (int i = 0; i < KK; i++) begin
        rem[n][i] = w_nz[g*NP+n][m][i];
        if (rem[n][i]) left++;
      end
    row = 0;
    while (left > 0) begin
      bit served [NP];
      for (int n = 0; n < NP; n++) begin served[n] = 0; sch_kv[m][g][row][n] = 0; sch_sel[m][g][row][n] = 0; end
      for (int j = 0; j < R; j++) sch_idx[m][g][row][j] = 0;
      for (int j = 0; j < R; j++) begin
        int best, bestc;
        best = -1; bestc = 0;
        for (int i = 0; i < KK; i++) begin
          int c;
          c = 0;
          for (int n = 0; n < NP; n++) if (!served[n] && rem[n][i]) c++;
          if (c > bestc) begin bestc = c; best = i; end
        end
        if (best < 0) break;
        sch_idx[m][g][row][j] = best;
        for (int n = 0; n < NP; n++)
          if (!served[n] && rem[n][best]) begin
            served[n] = 1;
            rem[n][best] = 0;
            left--;
            sch_kv[m][g][row][n] = 1;
            sch_sel[m][g][row][n] = j;
          end
      end
      row++;
    end
    sch_len[m][g] = row;
  endtask

  // reference: Re(IDFT2(sum_m DFT2(x_m) .* w_m / 2^FRAC))
  task automatic gen_reference(input int M, input int N, input int P);
    real xr [MMAX][KK], xi [MMAX][KK];
    for (int t = 0; t < P; t++) begin
      for (int m = 0; m < M; m++)
        for (int u = 0; u < K; u++)
          for (int v = 0; v < K; v++) begin
            real sr, si;
            sr = 0.0; si = 0.0;
            for (int a = 0; a < K; a++)
              for (int b = 0; b < K; b++) begin
                real ph;
                ph = -2.0 * PI * real'(u * a + v * b) / real'(K);
                sr += real'(x_mem[m][t][a*K+b]) * $cos(ph);
                si += real'(x_mem[m][t][a*K+b]) * $sin(ph);
              end
            xr[m][u*K+v] = sr;
            xi[m][u*K+v] = si;
          end
      for (int n = 0; n < N; n++) begin
        real yr [KK], yi [KK];
        for (int i = 0; i < KK; i++) begin
          yr[i] = 0.0; yi[i] = 0.0;
          for (int m = 0; m < M; m++) begin
            yr[i] += (xr[m][i] * w_re[n][m][i] - xi[m][i] * w_im[n][m][i]) / real'(1 << FRAC_W);
            yi[i] += (xr[m][i] * w_im[n][m][i] + xi[m][i] * w_re[n][m][i]) / real'(1 << FRAC_W);
          end
        end
        for (int a = 0; a < K; a++)
          for (int b = 0; b < K; b++) begin
            real s;
            s = 0.0;
            for (int u = 0; u < K; u++)
              for (int v = 0; v < K; v++) begin
                real ph;
                ph = 2.0 * PI * real'(u * a + v * b) / real'(K);
                s += yr[u*K+v] * $cos(ph) - yi[u*K+v] * $sin(ph);
              end
            exp_y[n][t][a*K+b] = s / real'(KK);
          end
      end
    end
  endtask

  // The models drive on the falling edge; a beat is taken at the rising edge
  // when ready is high, and ready is sampled just before that edge.
  task automatic wait_accept_in();
    bit hs;
    do begin #1; hs = in_ready; @(negedge clk); end while (!hs);
  endtask
  task automatic wait_accept_k();
    bit hs;
    do begin #1; hs = k_ready; @(negedge clk); end while (!hs);
  endtask

  // ---------------- memory model: inputs ----------------
  initial begin
    in_req_ready = 1'b0;
    in_valid = 1'b0;
    in_row = '0;
    forever begin
      @(negedge clk);
      if (in_req_valid && rst_n) begin
        int ch, t0;
        in_req_ready = 1'b1;
        ch = int'(in_req_ch);
        t0 = int'(in_req_tile);
        n_in_req++;
        @(negedge clk);
        in_req_ready = 1'b0;
        for (int b = 0; b < NPP * K; b++) begin
          while ($urandom % 4 == 0) begin n_in_stall++; @(negedge clk); end
          in_valid = 1'b1;
          for (int k = 0; k < K; k++) in_row[k] = fx_t'(x_mem[ch][t0 + b / K][(b % K) * K + k]);
          wait_accept_in();
          in_valid = 1'b0;
        end
      end
    end
  end

  // ---------------- memory model: kernels ----------------
  initial begin
    k_req_ready = 1'b0;
    k_valid = 1'b0;
    k_last = 1'b0;
    k_idx = '0; k_kvalid = '0; k_sel = '0; k_w = '0;
    forever begin
      @(negedge clk);
      if (k_req_valid && rst_n) begin
        int ch, g;
        k_req_ready = 1'b1;
        ch = int'(k_req_ch);
        g  = int'(k_req_kernel) / NP;
        n_k_req++;
        @(negedge clk);
        k_req_ready = 1'b0;
        for (int rw = 0; rw < sch_len[ch][g]; rw++) begin
          while ($urandom % 4 == 0) begin n_k_stall++; @(negedge clk); end
          k_valid = 1'b1;
          k_last  = (rw == sch_len[ch][g] - 1);
          for (int j = 0; j < R; j++) k_idx[j] = IDX_W'(sch_idx[ch][g][rw][j]);
          for (int n = 0; n < NP; n++) begin
            int pos;
            pos = sch_idx[ch][g][rw][sch_sel[ch][g][rw][n]];
            k_kvalid[n] = sch_kv[ch][g][rw][n];
            if (!sch_kv[ch][g][rw][n]) n_idle_slots++;
            k_sel[n]    = SEL_W'(sch_sel[ch][g][rw][n]);
            k_w[n].re   = fx_t'(w_re[g*NP+n][ch][pos]);
            k_w[n].im   = fx_t'(w_im[g*NP+n][ch][pos]);
          end
          wait_accept_k();
          k_valid = 1'b0;
          k_last  = 1'b0;
        end
      end
    end
  end

  // ---------------- output sink and checker ----------------
  bit row_bad;
  int n_bad_print;
  always @(posedge clk) begin
    if (rst_n) out_ready <= ($urandom % 3 != 0);
    else       out_ready <= 1'b0;
    if (rst_n && out_valid && !out_ready) n_out_stall++;
    if (rst_n && out_valid && out_ready) begin
      int n, t, y;
      n = int'(out_kernel); t = int'(out_tile); y = int'(out_y);
      n_out_beats++;
      checks++;
      if (n >= NMAX || t >= PMAX) begin
        failures++;
        $display("output tag out of range: kernel %0d tile %0d", n, t);
      end else begin
        got[n][t][y]++;
        for (int k = 0; k < K; k++) begin
          real e, d;
          fx_t v;
          v = out_row[k];
          e = exp_y[n][t][y*K+k];
          d = real'(v) - e;
          if (d > real'(TOL) || d < -real'(TOL)) row_bad = 1'b1;
          if ((d > real'(TOL) || d < -real'(TOL)) && n_bad_print < 12) begin
            n_bad_print++;
            $display("mismatch kernel %0d tile %0d row %0d col %0d: got %0d expected %f",
                     n, t, y, k, v, e);
          end
        end
        if (row_bad) failures++;
        row_bad = 1'b0;
      end
    end
  end

  // ---------------- mechanism monitors ----------------
  ctrl_state_e prev_state;
  logic [CNT_W-1:0] k_req_seen;
  always @(posedge clk) begin
    prev_state <= state;
    if (state == ST_PROC_CONV) begin
      conv_cycles++;
      pe_work += longint'(pe_active);
    end
    if (prev_state == ST_READ_INPUT && state == ST_PROC_CONV) n_shortcut++;
    if (prev_state == ST_READ_KERNEL && state == ST_PROC_CONV && !k_req_valid && k_req_seen == 0) n_kernel_reuse++;
    if (state == ST_READ_KERNEL && prev_state != ST_READ_KERNEL) k_req_seen <= 0;
    if (k_req_valid) k_req_seen <= 1;
    if (prev_state == ST_DONE_CONV && (state == ST_PROC_IFFT)) n_channel++;
    if (prev_state == ST_WRITE_OUT && state == ST_READ_INPUT) n_block++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_layer(input int M, input int N, input int P, input int NS, input int PS);
    int in0, k0, beats0, t0, exp_in, exp_k;
    longint c0;
    $display("layer M=%0d N=%0d P=%0d Ns=%0d Ps=%0d", M, N, P, NS, PS);
    gen_layer(M, N, P);
    for (int m = 0; m < M; m++)
      for (int g = 0; g < N / NP; g++) gen_schedule(m, g);
    gen_reference(M, N, P);
    for (int n = 0; n < NMAX; n++) for (int t = 0; t < PMAX; t++) for (int y = 0; y < K; y++) got[n][t][y] = 0;
    in0 = n_in_req; k0 = n_k_req; beats0 = n_out_beats;
    c0 = cycles;
    @(posedge clk);
    cfg_m <= CNT_W'(M); cfg_n <= CNT_W'(N); cfg_p <= CNT_W'(P);
    cfg_ns <= CNT_W'(NS); cfg_ps <= CNT_W'(PS);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    repeat (4) @(posedge clk);
    // every output row exactly once
    for (int n = 0; n < N; n++)
      for (int t = 0; t < P; t++)
        for (int y = 0; y < K; y++) check(got[n][t][y] == 1, $sformatf("row n=%0d t=%0d y=%0d seen %0d times", n, t, y, got[n][t][y]));
    check(n_out_beats - beats0 == N * P * K, "output beat count");
    // off-chip traffic of the flexible dataflow
    exp_in = M * (P / NPP) * ((N + NS - 1) / NS);      // inputs fetched N/Ns times
    exp_k  = M * (N / NP) * ((P + PS - 1) / PS);       // kernels fetched P/Ps times
    check(n_in_req - in0 == exp_in, $sformatf("input requests %0d expected %0d", n_in_req - in0, exp_in));
    check(n_k_req - k0 == exp_k, $sformatf("kernel requests %0d expected %0d", n_k_req - k0, exp_k));
    $display("  cycles %0d, input requests %0d, kernel requests %0d", cycles - c0, n_in_req - in0, n_k_req - k0);
  endtask

  initial begin
    rst_n = 1'b0;
    start = 1'b0;
    cfg_m = '0; cfg_n = '0; cfg_p = '0; cfg_ns = '0; cfg_ps = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    if (PROG == 0) begin
      // two kernel groups kept on chip across two tile groups, two tile blocks
      run_layer(2, 2 * NP, 4 * NPP, 2 * NP, 2 * NPP);
      // one kernel group per block (shortcut), two kernel blocks, channel count 2
      run_layer(2, 2 * NP, 2 * NPP, NP, 2 * NPP);
      // single channel, single block
      run_layer(1, NP, NPP, NP, NPP);
    end else begin
      // full-size engine: N' kernels, two tile groups, two channels
      run_layer(2, NP, 2 * NPP, NP, 2 * NPP);
    end
    // every mechanism must have happened
    check(n_kernel_reuse > 0 || PROG != 0, "kernel group reused without a fetch");
    check(n_shortcut > 0, "READ INPUT -> PROC CONV shortcut");
    check(n_channel > 0, "all channels accumulated");
    check(n_block > 0 || PROG != 0, "more than one block");
    check(n_idle_slots > 0, "inactive kernel slots in a schedule");
    check(n_out_stall > 0, "output back-pressure");
    check(n_in_stall > 0 && n_k_stall > 0, "input and kernel stream stalls");
    $display("mechanisms: kernel fetches %0d, kernel reuse %0d, shortcut %0d, channel completions %0d, block changes %0d",
             n_k_req, n_kernel_reuse, n_shortcut, n_channel, n_block);
    $display("            idle kernel slots %0d, output stalls %0d, input stalls %0d, kernel stalls %0d",
             n_idle_slots, n_out_stall, n_in_stall, n_k_stall);
    if (conv_cycles > 0)
      $display("PE utilisation during PROC CONV: %0d%%", int'(100 * pe_work / (conv_cycles * NP * NPP)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
