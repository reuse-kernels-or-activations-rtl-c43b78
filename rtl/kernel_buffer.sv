// kernel_buffer: on-chip store of the scheduled sparse spectral kernels of the
// current input channel, and the sequencer that plays one kernel group's
// schedule during a convolution pass.
//
// What is stored: the offline scheduler packs the non-zero weights of N'
// kernels into schedule rows, one row per cycle of the pass. Each row has
//   INDEX table : R tile positions, one per input replica (rep_0..rep_{R-1});
//   VALUE table : for every kernel n, {valid, sel, weight}: whether kernel n
//                 works this cycle, which replica (sel) supplies its input,
//                 and its complex weight.
// The buffer holds NGROUPS groups (Ns/N' groups of N' kernels, Ns <= NGROUPS*N')
// of up to DEPTH rows each, plus the row count of each group. The VALUE table
// is split into N' banks, one per kernel column, as in the architecture.
//
// Sequencer: a run pulse with run_group reads rows 0..len-1 of that group, one
// per cycle. Outputs appear one cycle after each read, flagged by out_row_valid.
// busy is high from the cycle after the run pulse until the last row has
// left the buffer.
//
// Interface: write port (wr_en, wr_group, wr_addr, row data) and length write
// (len_we, len_group, len_value) from the kernel streamer; run/run_group/busy
// and the registered row outputs to the PE array.
// The INDEX/VALUE layout follows the architecture; DEPTH = K*K (a schedule
// never needs more rows than there are tile positions) and the sequencer are
// this design's choices.
module kernel_buffer
  import spec_pkg::*;
#(
  parameter int K       = 8,
  parameter int NP      = 64,
  parameter int R       = 10,
  parameter int NGROUPS = 8,
  parameter int DEPTH   = K * K,
  parameter int IDX_W   = $clog2(K * K),
  parameter int SEL_W   = (R > 1) ? $clog2(R) : 1,
  parameter int GRP_W   = (NGROUPS > 1) ? $clog2(NGROUPS) : 1,
  parameter int ADDR_W  = $clog2(DEPTH),
  parameter int LEN_W   = $clog2(DEPTH + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // write port
  input  logic                         wr_en,
  input  logic [GRP_W-1:0]             wr_group,
  input  logic [ADDR_W-1:0]            wr_addr,
  input  logic [R-1:0][IDX_W-1:0]      wr_idx,
  input  logic [NP-1:0]                wr_valid,
  input  logic [NP-1:0][SEL_W-1:0]     wr_sel,
  input  cplx_t [NP-1:0]               wr_w,
  input  logic                         len_we,
  input  logic [GRP_W-1:0]             len_group,
  input  logic [LEN_W-1:0]             len_value,
  // schedule playback
  input  logic                         run,
  input  logic [GRP_W-1:0]             run_group,
  output logic                         busy,
  output logic                         out_row_valid,
  output logic [R-1:0][IDX_W-1:0]      out_idx,
  output logic [NP-1:0]                out_valid,
  output logic [NP-1:0][SEL_W-1:0]     out_sel,
  output cplx_t [NP-1:0]               out_w
);
  localparam int ROWS = NGROUPS * DEPTH;

  typedef struct packed {
    logic             valid;
    logic [SEL_W-1:0] sel;
    cplx_t            w;
  } kval_t;

  logic [R-1:0][IDX_W-1:0] idx_tab [ROWS];
  logic [LEN_W-1:0]        len_tab [NGROUPS];

  // playback counter
  logic [GRP_W-1:0]  grp_q;
  logic [ADDR_W:0]   rd_cnt;
  logic [LEN_W-1:0]  rd_len;
  logic              rd_en;
  logic              seq_on;      // rows still to be read
  logic [$clog2(ROWS)-1:0] rd_row, wr_row;

  assign wr_row = {wr_group, wr_addr};
  assign rd_row = {grp_q, rd_cnt[ADDR_W-1:0]};
  assign rd_en  = seq_on;
  assign busy   = seq_on | out_row_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      seq_on <= 1'b0;
      rd_cnt <= '0;
      grp_q  <= '0;
      rd_len <= '0;
      for (int g = 0; g < NGROUPS; g++) len_tab[g] <= '0;
    end else begin
      if (len_we) len_tab[len_group] <= len_value;
      if (run && !seq_on) begin
        grp_q  <= run_group;
        rd_cnt <= '0;
        rd_len <= len_tab[run_group];
        seq_on <= (len_tab[run_group] != '0);
      end else if (seq_on) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (LEN_W'(rd_cnt + 1'b1) == rd_len) seq_on <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_row_valid <= 1'b0;
    else        out_row_valid <= rd_en;
  end

  // INDEX table
  always_ff @(posedge clk) begin
    if (wr_en) idx_tab[wr_row] <= wr_idx;
    if (rd_en) out_idx <= idx_tab[rd_row];
  end

  // VALUE table, one bank per kernel column
  for (genvar n = 0; n < NP; n++) begin : g_bank
    kval_t vbank [ROWS];
    kval_t rd_q;
    always_ff @(posedge clk) begin
      if (wr_en) vbank[wr_row] <= '{valid: wr_valid[n], sel: wr_sel[n], w: wr_w[n]};
      if (rd_en) rd_q <= vbank[rd_row];
    end
    assign out_valid[n] = rd_q.valid;
    assign out_sel[n]   = rd_q.sel;
    assign out_w[n]     = rd_q.w;
  end

  initial assert (DEPTH == (1 << ADDR_W) && NGROUPS == (1 << GRP_W))
    else $error("kernel_buffer: DEPTH and NGROUPS must be powers of two");
  assert property (@(posedge clk) disable iff (!rst_n) len_we |-> len_value <= LEN_W'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) run |-> !busy);

endmodule
