// stream_ctrl: the streaming controller. It decides, for one convolutional
// layer, which data stays on chip and which is streamed, following the
// layer's streaming parameters Ns (kernels processed before the input tiles
// are flushed) and Ps (tiles processed before the kernels are flushed).
//
// Loop nest (one input channel at a time, M' = 1):
//   for each output block of Ns kernels x Ps tiles      (tiles inner)
//     for each input channel m
//       for each group of P' tiles in the block         READ INPUT  (Ps += P')
//         for each group of N' kernels in the block     READ KERNEL (Ns += N')
//           run the schedule of that group              PROC CONV -> DONE CONV
//     inverse FFT and write the finished block          PROC IFFT -> WRITE OUT
// The Ns kernels of the current channel stay in the kernel buffer across all
// Ps/P' tile groups: READ KERNEL fetches a group from off-chip memory only on
// the first tile group of a channel and otherwise just selects it. The
// kernel buffer is flushed when the channel changes. When the block holds a
// single kernel group that is already on chip, READ INPUT goes straight to
// PROC CONV. Input tiles are re-fetched for every new block of Ns kernels, and
// kernels for every new block of Ps tiles, which gives the traffic of the
// flexible dataflow (inputs N/Ns times, kernels P/Ps times).
//
// Interface: layer configuration (cfg_*) sampled at start; command/done
// pairs towards the input streamer, kernel streamer, schedule playback
// (conv), partial-sum drain and output writer; state for observation.
// Requirements: cfg_ns a multiple of N', cfg_ps a multiple of P', cfg_n a
// multiple of N', cfg_p a multiple of P', and
// (Ns/N')*(Ps/P')*K*K <= PSUM_DEPTH, Ns/N' <= NGROUPS.
// The states and counters follow the controller state diagram of the
// architecture; the block order, the "already on chip" test and the
// handshakes are this design's choices.
module stream_ctrl
  import spec_pkg::*;
#(
  parameter int K        = 8,
  parameter int NP       = 64,
  parameter int PP       = 9,
  parameter int NGROUPS  = 8,
  parameter int AW       = 11,
  parameter int GRP_W    = (NGROUPS > 1) ? $clog2(NGROUPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CNT_W-1:0]  cfg_m,     // input channels M
  input  logic [CNT_W-1:0]  cfg_n,     // kernels (output channels) N
  input  logic [CNT_W-1:0]  cfg_p,     // spectral tiles per channel P
  input  logic [CNT_W-1:0]  cfg_ns,    // streaming parameter Ns
  input  logic [CNT_W-1:0]  cfg_ps,    // streaming parameter Ps
  output logic              busy,
  output logic              done,
  output ctrl_state_e       state,
  // input streamer
  output logic              in_cmd,
  output logic [CNT_W-1:0]  in_cmd_ch,
  output logic [CNT_W-1:0]  in_cmd_tile,
  input  logic              in_done,
  // kernel streamer
  output logic              k_cmd,
  output logic [CNT_W-1:0]  k_cmd_ch,
  output logic [CNT_W-1:0]  k_cmd_kernel,
  output logic [GRP_W-1:0]  k_cmd_group,
  input  logic              k_done,
  // schedule playback
  output logic              conv_cmd,
  output logic [GRP_W-1:0]  conv_group,
  output logic [AW-1:0]     conv_base,
  output logic              conv_first,
  input  logic              conv_busy,
  // partial-sum drain and output writer
  output logic              drain_cmd,
  output logic [CNT_W-1:0]  blk_n_base,
  output logic [CNT_W-1:0]  blk_p_base,
  output logic [CNT_W-1:0]  blk_ns,
  output logic [CNT_W-1:0]  blk_tg,
  input  logic              drain_done,
  input  logic              write_done
);
  localparam int KK = K * K;

  ctrl_state_e st;
  assign state = st;

  logic [CNT_W-1:0] m_q, n_q, p_q, ns_q, ps_q, tg_q;   // Ms, N, P, Ns, Ps counters
  logic [CNT_W-1:0] cm, cn, cp, cns, cps;              // latched configuration
  logic [NGROUPS-1:0] loaded;                           // kernel groups on chip
  logic issued;                                         // command of this state sent

  // block sizes (last block may be smaller)
  logic [CNT_W-1:0] bns, bps;
  assign bns = ((cn - n_q) < cns) ? (cn - n_q) : cns;
  assign bps = ((cp - p_q) < cps) ? (cp - p_q) : cps;

  logic [GRP_W-1:0] grp_cur;
  assign grp_cur = GRP_W'((ns_q - CNT_W'(NP)) / CNT_W'(NP));   // group just selected

  assign busy        = (st != ST_IDLE);
  assign done        = (st == ST_DONE);
  assign in_cmd_ch   = m_q;
  assign in_cmd_tile = p_q + ps_q;
  assign k_cmd_ch    = m_q;
  assign k_cmd_kernel= n_q + ns_q;
  assign k_cmd_group = GRP_W'(ns_q / CNT_W'(NP));
  assign conv_group  = grp_cur;
  assign conv_base   = AW'((32'(grp_cur) * 32'(bps / CNT_W'(PP)) + 32'(tg_q)) * KK);
  assign conv_first  = (m_q == '0);
  assign blk_n_base  = n_q;
  assign blk_p_base  = p_q;
  assign blk_ns      = bns;
  assign blk_tg      = bps / CNT_W'(PP);

  always_comb begin
    in_cmd    = 1'b0;
    k_cmd     = 1'b0;
    conv_cmd  = 1'b0;
    drain_cmd = 1'b0;
    unique case (st)
      ST_READ_INPUT:  in_cmd    = !issued;
      ST_READ_KERNEL: k_cmd     = !issued && !loaded[k_cmd_group];
      ST_PROC_CONV:   conv_cmd  = !issued;
      ST_PROC_IFFT:   drain_cmd = !issued;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= ST_IDLE;
      issued <= 1'b0;
      m_q <= '0; n_q <= '0; p_q <= '0; ns_q <= '0; ps_q <= '0; tg_q <= '0;
      cm <= '0; cn <= '0; cp <= '0; cns <= '0; cps <= '0;
      loaded <= '0;
    end else begin
      unique case (st)
        ST_IDLE: if (start) begin
          cm <= cfg_m; cn <= cfg_n; cp <= cfg_p; cns <= cfg_ns; cps <= cfg_ps;
          m_q <= '0; n_q <= '0; p_q <= '0; ns_q <= '0; ps_q <= '0; tg_q <= '0;
          loaded <= '0;
          issued <= 1'b0;
          st <= ST_READ_INPUT;
        end
        ST_READ_INPUT: begin
          issued <= 1'b1;
          if (issued && in_done) begin
            issued <= 1'b0;
            tg_q   <= ps_q / CNT_W'(PP);
            ps_q   <= ps_q + CNT_W'(PP);                 // Ps += P'
            if (bns == CNT_W'(NP) && loaded[0]) begin    // kernels already on chip
              ns_q <= CNT_W'(NP);
              st   <= ST_PROC_CONV;
            end else begin
              st   <= ST_READ_KERNEL;
            end
          end
        end
        ST_READ_KERNEL: begin
          issued <= 1'b1;
          if (loaded[k_cmd_group] || (issued && k_done)) begin
            issued <= 1'b0;
            loaded[k_cmd_group] <= 1'b1;
            ns_q <= ns_q + CNT_W'(NP);                   // Ns += N'
            st   <= ST_PROC_CONV;
          end
        end
        ST_PROC_CONV: begin
          issued <= 1'b1;
          if (issued && !conv_busy) begin
            issued <= 1'b0;
            st <= ST_DONE_CONV;
          end
        end
        ST_DONE_CONV: begin
          if (ns_q != bns) begin
            st <= ST_READ_KERNEL;                        // !Ns
          end else begin
            ns_q <= '0;
            if (ps_q == bps) begin                       // channel finished for this block
              ps_q   <= '0;
              m_q    <= m_q + 1'b1;                      // Ms++
              loaded <= '0;                              // flush kernels
              st     <= (m_q + 1'b1 == cm) ? ST_PROC_IFFT : ST_READ_INPUT;
            end else begin
              st     <= ST_READ_INPUT;                   // Ns & !Ms, more tiles
            end
          end
        end
        ST_PROC_IFFT: begin
          issued <= 1'b1;
          if (issued && drain_done) begin
            issued <= 1'b0;
            st <= ST_WRITE_OUT;
          end
        end
        ST_WRITE_OUT: if (write_done) begin
          m_q <= '0; ps_q <= '0; ns_q <= '0;
          if (p_q + bps >= cp) begin
            p_q <= '0;
            n_q <= n_q + bns;
            st  <= (n_q + bns >= cn) ? ST_DONE : ST_READ_INPUT;
          end else begin
            p_q <= p_q + bps;
            st  <= ST_READ_INPUT;
          end
        end
        ST_DONE: st <= ST_IDLE;
        default: st <= ST_IDLE;
      endcase
    end
  end

  // configuration rules
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == ST_IDLE && start) |-> (32'(cfg_ns) % NP == 0 && 32'(cfg_ps) % PP == 0
                                  && 32'(cfg_n) % NP == 0 && 32'(cfg_p) % PP == 0
                                  && cfg_m != 0 && cfg_ns != 0 && cfg_ps != 0
                                  && 32'(cfg_ns) / NP <= NGROUPS
                                  && (32'(cfg_ns) / NP) * (32'(cfg_ps) / PP) * KK <= (1 << AW)))
    else $error("stream_ctrl: unsupported layer configuration");

endmodule
