// tb_input_buffer: self-checking test of the replicated spectral input
// buffer. A tile of K rows is written, then all R read ports fetch random
// positions every cycle; each port's data, one cycle later, must equal the
// stored value. A second tile then overwrites the first and is checked too.
module tb_input_buffer;
  import spec_pkg::*;
  localparam int K = 8, R = 10, IDX_W = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [$clog2(K)-1:0] wr_row;
  cplx_t [K-1:0] wr_data;
  logic [R-1:0][IDX_W-1:0] rd_addr;
  cplx_t [R-1:0] rd_data;

  input_buffer #(.K(K), .R(R), .IDX_W(IDX_W)) u_dut (.*);

  int checks = 0, failures = 0;
  cplx_t ref_mem [K*K];

  initial begin
    wr_en = 1'b0; wr_row = '0; wr_data = '0; rd_addr = '0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < K; a++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_row = 3'(a);
        for (int b = 0; b < K; b++) begin
          wr_data[b].re = fx_t'($urandom); wr_data[b].im = fx_t'($urandom);
          ref_mem[a*K+b] = wr_data[b];
        end
      end
      @(negedge clk);
      wr_en = 1'b0;
      for (int c = 0; c < 50; c++) begin
        logic [R-1:0][IDX_W-1:0] a_q;
        for (int j = 0; j < R; j++) rd_addr[j] = IDX_W'($urandom);
        a_q = rd_addr;
        @(negedge clk);
        for (int j = 0; j < R; j++) begin
          checks++;
          if (rd_data[j] !== ref_mem[a_q[j]]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d addr %0d", j, a_q[j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: input_buffer test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
