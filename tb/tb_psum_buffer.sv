// tb_psum_buffer: self-checking test of the banked partial-sum buffer.
// After reset the zeroing sweep must leave every word at zero and raise
// init_done after DEPTH cycles. Then random words are written through every PE port and read back through the
// PE read ports (1-cycle latency). Then each kernel column is drained: the P'
// words of column n at each address must appear on drain_data one cycle
// later, and a drain read with clear must leave the word at zero.
module tb_psum_buffer;
  import spec_pkg::*;
  localparam int NP = 3, PP = 2, DEPTH = 16, AW = 4, NW = 2;

  logic clk = 1'b0, rst_n = 1'b0, init_done;
  always #5 clk = ~clk;

  logic [NP-1:0][PP-1:0][AW-1:0] ps_rd_addr, ps_wr_addr;
  cplx_t [NP-1:0][PP-1:0] ps_rd_data, ps_wr_data;
  logic [NP-1:0][PP-1:0] ps_wr_en;
  logic drain_mode, drain_clr;
  logic [NW-1:0] drain_n;
  logic [AW-1:0] drain_addr;
  cplx_t [PP-1:0] drain_data;

  psum_buffer #(.NP(NP), .PP(PP), .DEPTH(DEPTH)) u_dut (.*);

  cplx_t ref_mem [NP][PP][DEPTH];
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    ps_rd_addr = '0; ps_wr_addr = '0; ps_wr_data = '0; ps_wr_en = '0;
    drain_mode = 0; drain_clr = 0; drain_n = '0; drain_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (DEPTH) begin
      chk(!init_done, "init_done early");
      @(negedge clk);
    end
    chk(init_done, "init_done after DEPTH cycles");
    for (int a = 0; a < DEPTH; a++) begin
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++) ps_rd_addr[n][p] = AW'(a);
      @(negedge clk);
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++)
        chk(ps_rd_data[n][p] == '0, $sformatf("word %0d of bank %0d,%0d not zeroed", a, n, p));
    end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++) begin
        ps_wr_en[n][p] = 1'b1; ps_wr_addr[n][p] = AW'(a);
        ps_wr_data[n][p].re = fx_t'($urandom); ps_wr_data[n][p].im = fx_t'($urandom);
        ref_mem[n][p][a] = ps_wr_data[n][p];
      end
    end
    @(negedge clk);
    ps_wr_en = '0;
    for (int i = 0; i < 40; i++) begin
      logic [NP-1:0][PP-1:0][AW-1:0] a_q;
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++) ps_rd_addr[n][p] = AW'($urandom);
      a_q = ps_rd_addr;
      @(negedge clk);
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++)
        chk(ps_rd_data[n][p] === ref_mem[n][p][a_q[n][p]], $sformatf("PE read %0d %0d", n, p));
    end
    // drain every column; clear on even addresses only
    for (int n = 0; n < NP; n++)
      for (int a = 0; a < DEPTH; a++) begin
        drain_mode = 1'b1; drain_n = NW'(n); drain_addr = AW'(a); drain_clr = (a % 2 == 0);
        @(negedge clk);
        drain_clr = 1'b0;
        for (int p = 0; p < PP; p++)
          chk(drain_data[p] === ref_mem[n][p][a], $sformatf("drain column %0d addr %0d tile %0d", n, a, p));
        if (a % 2 == 0) for (int p = 0; p < PP; p++) ref_mem[n][p][a] = '0;
      end
    drain_mode = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++) ps_rd_addr[n][p] = AW'(a);
      @(negedge clk);
      for (int n = 0; n < NP; n++) for (int p = 0; p < PP; p++)
        chk(ps_rd_data[n][p] === ref_mem[n][p][a], $sformatf("after drain %0d %0d addr %0d", n, p, a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: psum_buffer test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
