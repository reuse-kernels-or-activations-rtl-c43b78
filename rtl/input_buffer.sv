// input_buffer: on-chip store of one spectral input tile, held as R identical
// replicas so that R different addresses of the same tile can be read in one
// cycle. The engine has P' of these, one per parallel tile.
//
// Why replicas: N' sparse kernels are applied to the same tile at once, and
// each wants a different spectral position; a memory bank serves one address
// per cycle. The offline schedule guarantees that no cycle asks for more than
// R distinct positions, and tells each kernel which replica holds its value.
//
// How it works: each replica is K words of K complex values (one tile row per
// word, i.e. one block RAM of width K*32 bits per replica). A write stores one
// row into every replica. Read port j takes a position 0..K*K-1 from replica
// j: the row is the upper bits, the column the lower bits of the position.
//
// Interface: wr_en/wr_row/wr_data (one row per cycle, from the FFT unit),
// rd_addr[R] -> rd_data[R] with one cycle of latency. The replica count and
// the per-tile banks follow the architecture; the row-wide word layout is
// this design's choice.
module input_buffer
  import spec_pkg::*;
#(
  parameter int K     = 8,
  parameter int R     = 10,
  parameter int IDX_W = $clog2(K * K)
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(K)-1:0]       wr_row,
  input  cplx_t [K-1:0]              wr_data,
  input  logic [R-1:0][IDX_W-1:0]    rd_addr,
  output cplx_t [R-1:0]              rd_data
);
  localparam int LOGK = $clog2(K);

  for (genvar j = 0; j < R; j++) begin : g_rep
    cplx_t [K-1:0] bank [K];
    cplx_t [K-1:0] word;
    always_ff @(posedge clk) begin
      if (wr_en) bank[wr_row] <= wr_data;
      word <= bank[rd_addr[j][IDX_W-1:LOGK]];
    end
    // column select uses the position registered with the word
    logic [LOGK-1:0] col_q;
    always_ff @(posedge clk) col_q <= rd_addr[j][LOGK-1:0];
    assign rd_data[j] = word[col_q];
  end

endmodule
