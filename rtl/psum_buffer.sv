// psum_buffer: on-chip partial sums of the output tiles being built, one bank
// per processing element (N' x P' banks). Bank (n, p) holds, for every kernel
// group g and tile group t of the current Ns x Ps block, the K*K spectral
// values of output tile (kernel g*N'+n, tile t*P'+p) at addresses
// (g*(Ps/P') + t)*K*K + position.
//
// How it works: each bank is a simple dual-port memory (one read, one write
// per cycle, read data registered). While partial sums accumulate, the read
// address comes from the bank's PE. When drain_mode is high, every bank of
// kernel column drain_n is read at drain_addr instead and the P' values are
// returned on drain_data one cycle later, to feed the P' inverse FFT units.
// A drain read with drain_clr high also writes zero to the word it reads
// (read-before-write), so every block starts from empty banks even where a
// sparse kernel never touches a position. The banks are brought to
// zero by a sweep after reset: for DEPTH cycles after rst_n rises every bank
// writes zero to one address per cycle, and init_done rises when the sweep
// is over. The engine must not be started before init_done.
//
// Interface: per-bank PE ports (ps_rd_addr/ps_rd_data/ps_wr_*), and the drain
// port (drain_mode, drain_n, drain_addr -> drain_data). DEPTH defaults to
// 2048, the smallest whole number of 1024-deep block RAMs that holds the
// largest Ns*Ps*K*K/(N'*P') of the published per-layer streaming parameters
// (1792 for Ns=128, Ps=126). Banking follows the architecture; the drain port
// is this design's choice.
module psum_buffer
  import spec_pkg::*;
#(
  parameter int NP    = 64,
  parameter int PP    = 9,
  parameter int DEPTH = 2048,
  parameter int AW    = $clog2(DEPTH),
  parameter int NW    = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic                           init_done,
  input  logic [NP-1:0][PP-1:0][AW-1:0]  ps_rd_addr,
  output cplx_t [NP-1:0][PP-1:0]         ps_rd_data,
  input  logic [NP-1:0][PP-1:0]          ps_wr_en,
  input  logic [NP-1:0][PP-1:0][AW-1:0]  ps_wr_addr,
  input  cplx_t [NP-1:0][PP-1:0]         ps_wr_data,
  input  logic                           drain_mode,
  input  logic                           drain_clr,
  input  logic [NW-1:0]                  drain_n,
  input  logic [AW-1:0]                  drain_addr,
  output cplx_t [PP-1:0]                 drain_data
);
  logic [NW-1:0] drain_n_q;
  always_ff @(posedge clk) drain_n_q <= drain_n;

  // zeroing sweep after reset: one address of every bank per cycle
  logic [AW:0] init_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n)              init_cnt <= '0;
    else if (!init_cnt[AW])  init_cnt <= init_cnt + 1'b1;
  end
  assign init_done = init_cnt[AW];

  for (genvar n = 0; n < NP; n++) begin : g_n
    for (genvar p = 0; p < PP; p++) begin : g_p
      cplx_t mem [DEPTH];
      logic [AW-1:0] ra;
      assign ra = drain_mode ? drain_addr : ps_rd_addr[n][p];
      always_ff @(posedge clk) begin
        if (!init_done) mem[init_cnt[AW-1:0]] <= '0;
        else if (drain_clr && drain_n == NW'(n)) mem[drain_addr] <= '0;
        else if (ps_wr_en[n][p]) mem[ps_wr_addr[n][p]] <= ps_wr_data[n][p];
        ps_rd_data[n][p] <= mem[ra];
      end
    end
  end

  always_comb
    for (int p = 0; p < PP; p++) drain_data[p] = ps_rd_data[drain_n_q][p];

endmodule
