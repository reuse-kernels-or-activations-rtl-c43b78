// tb_pe: self-checking test of one processing element. A model bank (one
// read with 1-cycle latency, one write) sits behind the PE. Random products
// are sent to random addresses (never the same address within three cycles),
// first with in_first set (overwrite) and then without (accumulate), with
// idle cycles in between. The bank contents are compared with a model that
// uses the same fixed-point multiply and saturating add.
module tb_pe;
  import spec_pkg::*;
  localparam int AW = 5, D = 1 << AW, OPS = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_first, ps_wr_en, busy;
  cplx_t in_x, in_w, ps_rd_data, ps_wr_data;
  logic [AW-1:0] in_addr, ps_rd_addr, ps_wr_addr;

  pe #(.AW(AW)) u_dut (.*);

  cplx_t bank [D];
  cplx_t ref_bank [D];
  always @(posedge clk) begin
    ps_rd_data <= bank[ps_rd_addr];
    if (rst_n && ps_wr_en) bank[ps_wr_addr] <= ps_wr_data;
  end

  int checks = 0, failures = 0, n_wr = 0, n_ops = 0;
  always @(posedge clk) if (rst_n && ps_wr_en) n_wr++;

  initial begin
    int a1, a2;
    in_valid = 1'b0; in_first = 1'b0; in_x = '0; in_w = '0; in_addr = '0;
    for (int i = 0; i < D; i++) begin bank[i] = '0; ref_bank[i] = '0; end
    a1 = -1; a2 = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < OPS; i++) begin
      int a;
      @(negedge clk);
      if ($urandom % 4 == 0) begin in_valid = 1'b0; a1 = -1; a2 = a1; continue; end
      do a = int'($urandom % D); while (a == a1 || a == a2);
      in_valid = 1'b1;
      in_first = (i < OPS / 4);
      in_addr  = AW'(a);
      in_x.re = fx_t'(int'($urandom % 2048) - 1024); in_x.im = fx_t'(int'($urandom % 2048) - 1024);
      in_w.re = fx_t'(int'($urandom % 512) - 256);   in_w.im = fx_t'(int'($urandom % 512) - 256);
      ref_bank[a] = in_first ? cmul_fx(in_x, in_w) : cadd_fx(ref_bank[a], cmul_fx(in_x, in_w));
      n_ops++;
      a2 = a1; a1 = a;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy still high"); end
    checks++;
    if (n_wr != n_ops) begin failures++; $display("FAIL %0d writes for %0d operations", n_wr, n_ops); end
    for (int i = 0; i < D; i++) begin
      checks++;
      if (bank[i] !== ref_bank[i]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %0d,%0d exp %0d,%0d", i,
                                    bank[i].re, bank[i].im, ref_bank[i].re, ref_bank[i].im);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: pe test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
