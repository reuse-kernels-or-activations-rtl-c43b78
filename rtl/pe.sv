// pe: one processing element of the PE array. It multiplies a spectral input
// value by a spectral kernel weight (complex, 16-bit fixed point) and adds the
// product to the partial sum kept in its own bank of the partial-sum buffer.
//
// How it works (two register stages):
//   stage 1: the product x*w is computed and registered together with the
//            partial-sum address; the bank read of that address is issued.
//   stage 2: the bank returns the old partial sum; old+product (or the bare
//            product when in_first marks the first input channel) is written
//            back to the same address.
// A partial sum is therefore read one cycle before it is written. The
// schedule never sends the same address to a PE in two consecutive cycles (a
// kernel holds each tile position once, and different kernel or tile groups
// use different address ranges); an assertion checks it.
//
// Interface: in_valid/in_first/in_x/in_w/in_addr each cycle; ps_rd_addr,
// ps_rd_data (1-cycle read latency), ps_wr_en/ps_wr_addr/ps_wr_data towards
// the bank. Multiply-then-accumulate into the partial-sum buffer follows the
// architecture; the pipeline and the overwrite-on-first-channel are this
// design's choices.
module pe
  import spec_pkg::*;
#(
  parameter int AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_first,
  input  cplx_t         in_x,
  input  cplx_t         in_w,
  input  logic [AW-1:0] in_addr,
  output logic [AW-1:0] ps_rd_addr,
  input  cplx_t         ps_rd_data,
  output logic          ps_wr_en,
  output logic [AW-1:0] ps_wr_addr,
  output cplx_t         ps_wr_data,
  output logic          busy
);
  logic          v1, v2, f1, f2;
  logic [AW-1:0] a1, a2;
  cplx_t         p1, p2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
    end
    f1 <= in_first;
    a1 <= in_addr;
    p1 <= cmul_fx(in_x, in_w);
    f2 <= f1;
    a2 <= a1;
    p2 <= p1;
  end

  assign ps_rd_addr = a1;
  assign ps_wr_en   = v2;
  assign ps_wr_addr = a2;
  assign ps_wr_data = f2 ? p2 : cadd_fx(ps_rd_data, p2);
  assign busy       = v1 | v2;

  // read-after-write distance rule of the schedule
  assert property (@(posedge clk) disable iff (!rst_n) (v1 && v2) |-> (a1 != a2))
    else $error("pe: partial-sum address reused in consecutive cycles");

endmodule
