// tb_spec_cnn_full: the engine at its default, published size (K = 8,
// N' = 64 kernels, P' = 9 tiles, r = 10 replicas, Ns up to 512, 2048-deep
// partial-sum banks) taken through one complete layer: 2 input channels,
// 64 kernels, 18 tiles with Ps = 18 (two tile groups sharing the kernels).
// tb_cnn_env plays memory and checks every output row.
module tb_spec_cnn_full;
  import spec_pkg::*;

  localparam int K = 8, NP = 64, PP = 9, R = 10;
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

  spec_cnn_top u_dut (.*);

  tb_cnn_env #(.K(K), .NP(NP), .NPP(PP), .R(R), .MMAX(2), .NMAX(64), .PMAX(18), .PROG(1),
               .MAXCYC(400000)) u_env (.*);

endmodule
