// kernel_streamer: the "kernels streaming" half of the streaming controller.
// On a command it fetches one group of N' scheduled sparse kernels of one
// input channel from off-chip memory and writes it into a slot of the kernel
// buffer.
//
// How it works: one request (channel, first kernel of the group) is sent on
// the request handshake. Memory answers with the group's schedule, one beat
// per schedule row: the INDEX row (R tile positions) and the VALUE row
// ({valid, sel, weight} for each of the N' kernels), with last on the final
// row. Row i is written to address i of the slot; when last arrives the row
// count is written to the slot's length register and done pulses.
//
// Interface: cmd/cmd_ch/cmd_kernel/cmd_group/done from the controller;
// req_* and k_valid/k_ready/k_last/k_idx/k_kvalid/k_sel/k_w to memory;
// kb_* write port of the kernel buffer. The INDEX/VALUE row content follows
// the architecture; one schedule row per beat is this design's choice.
module kernel_streamer
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
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cmd,
  input  logic [CNT_W-1:0]          cmd_ch,
  input  logic [CNT_W-1:0]          cmd_kernel,
  input  logic [GRP_W-1:0]          cmd_group,
  output logic                      done,
  // memory
  output logic                      req_valid,
  input  logic                      req_ready,
  output logic [CNT_W-1:0]          req_ch,
  output logic [CNT_W-1:0]          req_kernel,
  input  logic                      k_valid,
  output logic                      k_ready,
  input  logic                      k_last,
  input  logic [R-1:0][IDX_W-1:0]   k_idx,
  input  logic [NP-1:0]             k_kvalid,
  input  logic [NP-1:0][SEL_W-1:0]  k_sel,
  input  cplx_t [NP-1:0]            k_w,
  // kernel buffer write port
  output logic                      kb_wr_en,
  output logic [GRP_W-1:0]          kb_wr_group,
  output logic [ADDR_W-1:0]         kb_wr_addr,
  output logic [R-1:0][IDX_W-1:0]   kb_wr_idx,
  output logic [NP-1:0]             kb_wr_valid,
  output logic [NP-1:0][SEL_W-1:0]  kb_wr_sel,
  output cplx_t [NP-1:0]            kb_wr_w,
  output logic                      kb_len_we,
  output logic [GRP_W-1:0]          kb_len_group,
  output logic [LEN_W-1:0]          kb_len_value
);
  logic             active;
  logic [GRP_W-1:0] grp_q;
  logic [LEN_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_valid  <= 1'b0;
      req_ch     <= '0;
      req_kernel <= '0;
    end else if (cmd) begin
      req_valid  <= 1'b1;
      req_ch     <= cmd_ch;
      req_kernel <= cmd_kernel;
    end else if (req_ready) begin
      req_valid  <= 1'b0;
    end
  end

  assign k_ready      = active;
  assign kb_wr_en     = active && k_valid;
  assign kb_wr_group  = grp_q;
  assign kb_wr_addr   = ADDR_W'(cnt);
  assign kb_wr_idx    = k_idx;
  assign kb_wr_valid  = k_kvalid;
  assign kb_wr_sel    = k_sel;
  assign kb_wr_w      = k_w;
  assign kb_len_we    = active && k_valid && k_last;
  assign kb_len_group = grp_q;
  assign kb_len_value = cnt + 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      grp_q  <= '0;
      cnt    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cmd) begin
        active <= 1'b1;
        grp_q  <= cmd_group;
        cnt    <= '0;
      end else if (active && k_valid) begin
        cnt <= cnt + 1'b1;
        if (k_last) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (active && k_valid) |-> (cnt < LEN_W'(DEPTH)))
    else $error("kernel_streamer: schedule longer than the kernel buffer slot");

endmodule
