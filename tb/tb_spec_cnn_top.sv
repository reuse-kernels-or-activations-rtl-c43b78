// tb_spec_cnn_top: end-to-end test of the engine at reduced size
// (N' = 4 kernels, P' = 2 tiles, r = 2 replicas, Ns up to 8). Three layers
// exercise kernel reuse across tile groups, the READ INPUT -> PROC CONV
// shortcut, several channels, several output blocks, inactive kernel slots
// and stalls on every stream; tb_cnn_env checks every output row.
module tb_spec_cnn_top;
  import spec_pkg::*;

  localparam int K = 8, NP = 4, PP = 2, R = 2, NS_MAX = 8, PSUM_DEPTH = 256;
  localparam int IDX_W = $clog2(K * K);
  localparam int SEL_W = $clog2(R);

  logic clk, rst_n, start, busy, done;
  logic [CNT_W-1:0] cfg_m, cfg_n, cfg_p, cfg_ns, cfg_ps;
  ctrl_state_e state;
  logic [$clog2(NP*PP+1)-1:0] pe_active;
  logic in_req_valid, in_req_ready, in_valid, in_ready;
  logic [CNT_W-1:0] in_req_ch, in_req_tile;
  fx_t [K-1:0] in_row;
  logic k_req_valid, k_req_ready, k_valid, k_ready, k_last;
  logic [CNT_W-1:0] k_req_ch, k_req_kernel;
  logic [R-1:0][IDX_W-1:0] k_idx;
  logic [NP-1:0] k_kvalid;
  logic [NP-1:0][SEL_W-1:0] k_sel;
  cplx_t [NP-1:0] k_w;
  logic out_valid, out_ready;
  logic [CNT_W-1:0] out_kernel, out_tile;
  logic [$clog2(K)-1:0] out_y;
  fx_t [K-1:0] out_row;

  spec_cnn_top #(.K(K), .NP(NP), .PP(PP), .R(R), .NS_MAX(NS_MAX), .PSUM_DEPTH(PSUM_DEPTH)) u_dut (.*);

  tb_cnn_env #(.K(K), .NP(NP), .NPP(PP), .R(R), .MMAX(2), .NMAX(8), .PMAX(8), .PROG(0),
               .MAXCYC(200000)) u_env (.*);

endmodule
