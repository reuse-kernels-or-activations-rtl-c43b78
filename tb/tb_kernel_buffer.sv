// tb_kernel_buffer: self-checking test of the kernel buffer and its schedule
// playback, using the worked scheduling example of the architecture (4
// kernels, 4 non-zeros each, 2 input replicas, a 4-row schedule). The
// example's INDEX and VALUE rows are written into group 1, a random 7-row
// schedule into group 0 and a 1-row schedule into group 2; each group is
// then played and every output row is compared with what was written, and
// busy must cover exactly the rows in flight. Weights are the example's
// values in Q8.8.
module tb_kernel_buffer;
  import spec_pkg::*;
  localparam int K = 8, NP = 4, R = 2, NGROUPS = 4, DEPTH = 64;
  localparam int IDX_W = 6, SEL_W = 1, GRP_W = 2, ADDR_W = 6, LEN_W = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, len_we, run, busy, out_row_valid;
  logic [GRP_W-1:0] wr_group, len_group, run_group;
  logic [ADDR_W-1:0] wr_addr;
  logic [R-1:0][IDX_W-1:0] wr_idx, out_idx;
  logic [NP-1:0] wr_valid, out_valid;
  logic [NP-1:0][SEL_W-1:0] wr_sel, out_sel;
  cplx_t [NP-1:0] wr_w, out_w;
  logic [LEN_W-1:0] len_value;

  kernel_buffer #(.K(K), .NP(NP), .R(R), .NGROUPS(NGROUPS), .DEPTH(DEPTH)) u_dut (.*);

  // worked example: INDEX rows and, per row, {sel, weight*100} of kernels 0..3
  int ex_idx [4][2] = '{'{3, 3}, '{2, 6}, '{0, 4}, '{1, 5}};
  int ex_sel [4][4] = '{'{0, 0, 1, 1}, '{0, 0, 0, 1}, '{0, 1, 1, 1}, '{0, 0, 1, 1}};
  int ex_w   [4][4] = '{'{18, 13, 14, 7}, '{15, 7, 6, 12}, '{10, 9, 19, 16}, '{5, 8, 11, 9}};

  typedef struct {
    logic [R-1:0][IDX_W-1:0] idx;
    logic [NP-1:0] v;
    logic [NP-1:0][SEL_W-1:0] sel;
    cplx_t [NP-1:0] w;
  } row_t;
  row_t sch [NGROUPS][DEPTH];
  int len [NGROUPS];
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic write_group(int g);
    for (int r = 0; r < len[g]; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_group = GRP_W'(g); wr_addr = ADDR_W'(r);
      wr_idx = sch[g][r].idx; wr_valid = sch[g][r].v; wr_sel = sch[g][r].sel; wr_w = sch[g][r].w;
    end
    @(negedge clk);
    wr_en = 1'b0;
    len_we = 1'b1; len_group = GRP_W'(g); len_value = LEN_W'(len[g]);
    @(negedge clk);
    len_we = 1'b0;
  endtask

  task automatic play(int g);
    int got;
    @(negedge clk);
    run = 1'b1; run_group = GRP_W'(g);
    @(negedge clk);
    run = 1'b0;
    got = 0;
    while (busy) begin
      if (out_row_valid) begin
        chk(got < len[g], $sformatf("group %0d: extra row", g));
        if (got < len[g]) begin
          chk(out_idx == sch[g][got].idx, $sformatf("group %0d row %0d INDEX", g, got));
          for (int n = 0; n < NP; n++) begin
            chk(out_valid[n] == sch[g][got].v[n], $sformatf("group %0d row %0d valid %0d", g, got, n));
            if (sch[g][got].v[n])
              chk(out_sel[n] == sch[g][got].sel[n] && out_w[n] == sch[g][got].w[n],
                  $sformatf("group %0d row %0d kernel %0d sel/weight", g, got, n));
          end
        end
        got++;
      end
      @(negedge clk);
    end
    chk(got == len[g], $sformatf("group %0d: %0d rows played, %0d expected", g, got, len[g]));
  endtask

  initial begin
    wr_en = 0; len_we = 0; run = 0; wr_group = 0; len_group = 0; run_group = 0; wr_addr = 0;
    wr_idx = '0; wr_valid = '0; wr_sel = '0; wr_w = '0; len_value = '0;
    len[1] = 4;
    for (int r = 0; r < 4; r++) begin
      for (int j = 0; j < R; j++) sch[1][r].idx[j] = IDX_W'(ex_idx[r][j]);
      for (int n = 0; n < NP; n++) begin
        sch[1][r].v[n] = 1'b1;
        sch[1][r].sel[n] = SEL_W'(ex_sel[r][n]);
        sch[1][r].w[n].re = fx_t'((ex_w[r][n] * 256 + 50) / 100);
        sch[1][r].w[n].im = '0;
      end
    end
    len[0] = 7; len[2] = 1; len[3] = 0;
    foreach (len[g]) if (g != 1)
      for (int r = 0; r < len[g]; r++) begin
        for (int j = 0; j < R; j++) sch[g][r].idx[j] = IDX_W'($urandom);
        for (int n = 0; n < NP; n++) begin
          sch[g][r].v[n] = 1'($urandom); sch[g][r].sel[n] = SEL_W'($urandom);
          sch[g][r].w[n].re = fx_t'($urandom); sch[g][r].w[n].im = fx_t'($urandom);
        end
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 3; g++) write_group(g);
    play(1); play(0); play(2); play(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: kernel_buffer test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
