// tb_pe_array: self-checking test of the PE array with its input selector,
// using the worked scheduling example of the architecture (N' = 4 kernels,
// 4 non-zeros each, r = 2 replicas, 4 schedule rows) on P' = 2 tiles. Model
// input buffers (1-cycle read) and model partial-sum banks sit around the
// array; the model banks ignore writes while reset is held. The example schedule is applied twice: once as the first input
// channel (overwrite) at base 0, once as a second channel (accumulate) with
// other input values, then a random schedule at base 64 with idle kernel
// slots. Every bank word is compared with a model of the intended result:
// kernel n adds x[p][INDEX[sel]] * w into address base + INDEX[sel].
module tb_pe_array;
  import spec_pkg::*;
  localparam int K = 8, NP = 4, PP = 2, R = 2, AW = 7, IDX_W = 6, SEL_W = 1, D = 1 << AW;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic row_valid, first_channel, busy;
  logic [R-1:0][IDX_W-1:0] row_idx, ib_rd_addr;
  logic [NP-1:0] row_kvalid;
  logic [NP-1:0][SEL_W-1:0] row_sel;
  cplx_t [NP-1:0] row_w;
  logic [AW-1:0] psum_base;
  cplx_t [PP-1:0][R-1:0] ib_rd_data;
  logic [NP-1:0][PP-1:0][AW-1:0] ps_rd_addr, ps_wr_addr;
  cplx_t [NP-1:0][PP-1:0] ps_rd_data, ps_wr_data;
  logic [NP-1:0][PP-1:0] ps_wr_en;
  logic [$clog2(NP*PP+1)-1:0] active_pes;

  pe_array #(.K(K), .NP(NP), .PP(PP), .R(R), .AW(AW)) u_dut (.*);

  cplx_t ibuf [PP][K*K];
  cplx_t bank [NP][PP][D];
  cplx_t ref_bank [NP][PP][D];
  always @(posedge clk) begin
    for (int p = 0; p < PP; p++)
      for (int j = 0; j < R; j++) ib_rd_data[p][j] <= ibuf[p][ib_rd_addr[j]];
    for (int n = 0; n < NP; n++)
      for (int p = 0; p < PP; p++) begin
        ps_rd_data[n][p] <= bank[n][p][ps_rd_addr[n][p]];
        if (rst_n && ps_wr_en[n][p]) bank[n][p][ps_wr_addr[n][p]] <= ps_wr_data[n][p];
      end
  end

  int ex_idx [4][2] = '{'{3, 3}, '{2, 6}, '{0, 4}, '{1, 5}};
  int ex_sel [4][4] = '{'{0, 0, 1, 1}, '{0, 0, 0, 1}, '{0, 1, 1, 1}, '{0, 0, 1, 1}};
  int ex_w   [4][4] = '{'{18, 13, 14, 7}, '{15, 7, 6, 12}, '{10, 9, 19, 16}, '{5, 8, 11, 9}};

  int checks = 0, failures = 0, max_active = 0;
  always @(posedge clk) if (int'(active_pes) > max_active) max_active = int'(active_pes);

  task automatic fill_inputs();
    for (int p = 0; p < PP; p++)
      for (int i = 0; i < K*K; i++) begin
        ibuf[p][i].re = fx_t'(int'($urandom % 4096) - 2048);
        ibuf[p][i].im = fx_t'(int'($urandom % 4096) - 2048);
      end
  endtask

  // one schedule row; updates the model
  task automatic send_row(logic [R-1:0][IDX_W-1:0] idx, logic [NP-1:0] kv,
                          logic [NP-1:0][SEL_W-1:0] sel, cplx_t [NP-1:0] w, int base, bit first);
    @(negedge clk);
    row_valid = 1'b1; row_idx = idx; row_kvalid = kv; row_sel = sel; row_w = w;
    psum_base = AW'(base); first_channel = first;
    for (int n = 0; n < NP; n++)
      if (kv[n])
        for (int p = 0; p < PP; p++) begin
          int a;
          a = base + int'(idx[sel[n]]);
          ref_bank[n][p][a] = first ? cmul_fx(ibuf[p][idx[sel[n]]], w[n])
                                    : cadd_fx(ref_bank[n][p][a], cmul_fx(ibuf[p][idx[sel[n]]], w[n]));
        end
  endtask

  task automatic example(bit first);
    for (int r = 0; r < 4; r++) begin
      logic [R-1:0][IDX_W-1:0] idx;
      logic [NP-1:0][SEL_W-1:0] sel;
      cplx_t [NP-1:0] w;
      for (int j = 0; j < R; j++) idx[j] = IDX_W'(ex_idx[r][j]);
      for (int n = 0; n < NP; n++) begin
        sel[n] = SEL_W'(ex_sel[r][n]);
        w[n].re = fx_t'((ex_w[r][n] * 256 + 50) / 100); w[n].im = '0;
      end
      send_row(idx, '1, sel, w, 0, first);
    end
  endtask

  task automatic wait_idle();
    @(negedge clk);
    row_valid = 1'b0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    row_valid = 0; first_channel = 0; row_idx = '0; row_kvalid = '0; row_sel = '0; row_w = '0;
    psum_base = '0;
    for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++) for (int a = 0; a < D; a++) begin
      bank[n][p][a] = '0; ref_bank[n][p][a] = '0;
    end
    fill_inputs();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    example(1'b1);
    wait_idle();
    fill_inputs();
    example(1'b0);
    wait_idle();
    fill_inputs();
    // random schedule at base 64: each kernel takes each position at most once
    for (int r = 0; r < 32; r++) begin
      logic [R-1:0][IDX_W-1:0] idx;
      logic [NP-1:0] kv;
      logic [NP-1:0][SEL_W-1:0] sel;
      cplx_t [NP-1:0] w;
      idx[0] = IDX_W'(2 * r); idx[1] = IDX_W'(2 * r + 1);
      for (int n = 0; n < NP; n++) begin
        kv[n] = ($urandom % 4 != 0); sel[n] = SEL_W'($urandom);
        w[n].re = fx_t'(int'($urandom % 512) - 256); w[n].im = fx_t'(int'($urandom % 512) - 256);
      end
      send_row(idx, kv, sel, w, 64, 1'b1);
    end
    wait_idle();
    for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++) for (int a = 0; a < D; a++) begin
      checks++;
      if (bank[n][p][a] !== ref_bank[n][p][a]) begin
        failures++;
        if (failures < 10) $display("FAIL kernel %0d tile %0d addr %0d got %0d,%0d exp %0d,%0d", n, p, a,
          bank[n][p][a].re, bank[n][p][a].im, ref_bank[n][p][a].re, ref_bank[n][p][a].im);
      end
    end
    checks++;
    if (max_active != NP * PP) begin failures++; $display("FAIL active PE count peaked at %0d", max_active); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: pe_array test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
