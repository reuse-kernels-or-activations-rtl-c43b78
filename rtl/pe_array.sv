// pe_array: the N' x P' grid of processing elements with the input selector
// in front of it. PE (n, p) applies kernel n of the current group to tile p.
//
// How it works: each schedule row from the kernel buffer carries R tile
// positions (the INDEX row) and, per kernel, {valid, sel, weight} (the VALUE
// row). The R positions are sent, unchanged, as read addresses to the R
// replicas of every one of the P' input buffers, since all tiles share the
// same kernels. One cycle later the P' x R values come back; the selector
// gives PE (n, p) the value from replica sel[n] of tile p, and PE (n, p)
// accumulates into partial-sum address psum_base + position, where position
// is the INDEX entry named by sel[n]. Kernels whose valid bit is 0 stay idle
// in that cycle.
//
// Timing: schedule row (cycle t) -> input buffer read addresses (t) -> input
// values and registered {sel, valid, w} (t+1) -> PE stage 1 (t+2) -> partial
// sum written (t+3). busy covers every row still in flight. active_pes
// counts the PEs that do work in the current cycle (for utilisation).
//
// Interface: kernel-buffer row in, input-buffer read addresses out and read
// data in, and one partial-sum bank port per PE. The selection by sel and
// valid follows the architecture's storage scheme; the pipeline is
// this design's choice.
module pe_array
  import spec_pkg::*;
#(
  parameter int K     = 8,
  parameter int NP    = 64,
  parameter int PP    = 9,
  parameter int R     = 10,
  parameter int AW    = 11,
  parameter int IDX_W = $clog2(K * K),
  parameter int SEL_W = (R > 1) ? $clog2(R) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // schedule row from the kernel buffer
  input  logic                             row_valid,
  input  logic [R-1:0][IDX_W-1:0]          row_idx,
  input  logic [NP-1:0]                    row_kvalid,
  input  logic [NP-1:0][SEL_W-1:0]         row_sel,
  input  cplx_t [NP-1:0]                   row_w,
  input  logic [AW-1:0]                    psum_base,
  input  logic                             first_channel,
  // input buffers (one per tile)
  output logic [R-1:0][IDX_W-1:0]          ib_rd_addr,
  input  cplx_t [PP-1:0][R-1:0]            ib_rd_data,
  // partial-sum banks, one per PE
  output logic [NP-1:0][PP-1:0][AW-1:0]    ps_rd_addr,
  input  cplx_t [NP-1:0][PP-1:0]           ps_rd_data,
  output logic [NP-1:0][PP-1:0]            ps_wr_en,
  output logic [NP-1:0][PP-1:0][AW-1:0]    ps_wr_addr,
  output cplx_t [NP-1:0][PP-1:0]           ps_wr_data,
  output logic                             busy,
  output logic [$clog2(NP*PP+1)-1:0]       active_pes
);
  // broadcast the replica addresses to all tiles
  assign ib_rd_addr = row_idx;

  // align the VALUE row with the input-buffer data
  logic                      rv_q;
  logic                      first_q;
  logic [NP-1:0]             kv_q;
  logic [NP-1:0][SEL_W-1:0]  sel_q;
  cplx_t [NP-1:0]            w_q;
  logic [R-1:0][IDX_W-1:0]   idx_q;
  logic [AW-1:0]             base_q;

  always_ff @(posedge clk) begin
    if (!rst_n) rv_q <= 1'b0;
    else        rv_q <= row_valid;
    first_q <= first_channel;
    kv_q    <= row_kvalid;
    sel_q   <= row_sel;
    w_q     <= row_w;
    idx_q   <= row_idx;
    base_q  <= psum_base;
  end

  logic [NP-1:0][PP-1:0] pe_busy;
  logic [NP-1:0]         pe_on;

  for (genvar n = 0; n < NP; n++) begin : g_n
    assign pe_on[n] = rv_q & kv_q[n];
    for (genvar p = 0; p < PP; p++) begin : g_p
      pe #(.AW(AW)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .in_valid  (pe_on[n]),
        .in_first  (first_q),
        .in_x      (ib_rd_data[p][sel_q[n]]),
        .in_w      (w_q[n]),
        .in_addr   (base_q + AW'(idx_q[sel_q[n]])),
        .ps_rd_addr(ps_rd_addr[n][p]),
        .ps_rd_data(ps_rd_data[n][p]),
        .ps_wr_en  (ps_wr_en[n][p]),
        .ps_wr_addr(ps_wr_addr[n][p]),
        .ps_wr_data(ps_wr_data[n][p]),
        .busy      (pe_busy[n][p])
      );
    end
  end

  assign busy = rv_q | (|pe_busy);

  always_comb begin
    active_pes = '0;
    for (int n = 0; n < NP; n++)
      if (pe_on[n]) active_pes = active_pes + ($clog2(NP*PP+1))'(PP);
  end

  // sel must name one of the R replicas
  for (genvar n = 0; n < NP; n++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (row_valid && row_kvalid[n]) |-> (32'(row_sel[n]) < R))
      else $error("pe_array: sel out of range");
  end

endmodule
