// polar_decoder_top: adaptive SC / serial SCL-8 polar decoder of length N = 256.
//
// The common core (FSM, channel and intermediate LLR storage, partial-sum storage, PEs) is
// joined by the SC add-on (SC bit decision) and the serial-SCL add-on (SCL bit decision,
// sorter, path metric and index management, storage of the other list paths), and by the
// control logic of the adaptive mode, which reruns a packet in list mode when SC decoding
// fails its CRC. All of these except the controller sit inside polar_core.
// Use: write the N channel LLRs (Q-bit two's complement, positive means bit 0) through
// llr_we/llr_addr/llr_data, hold leaf_type (frozen / information / good leaf for every bit
// index u_0..u_{N-1}) and mode stable, pulse start for one cycle. done pulses when u_hat
// holds the decoded word (frozen positions 0); crc_pass tells whether its CRC matched and
// used_scl whether the list pass ran. The information bits, in index order, are the message
// followed by its 11-bit CRC. ev_ssp, ev_fsp and ev_check pulse once per simplified
// sub-process, full sub-process and CRC check. Timing at the default size: SC 266 cycles
// from start to done, the list pass about 7500 more; reset is asynchronous, active low.
// The adaptive SC-then-SCL8T8 flow, the leaf kinds and the SP types follow the paper; FAST
// (largest node stage decided in one step) and the cycle counts are this design's.
module polar_decoder_top
  import polar_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned Q = Q_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned T = T_DEF,
  parameter int unsigned P = P_DEF,
  parameter int unsigned FAST = FAST_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  llr_we,
  input  logic [$clog2(N)-1:0]  llr_addr,
  input  logic [Q-1:0]          llr_data,
  input  leaf_t                 leaf_type [N],
  input  dec_mode_t             mode,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  crc_pass,
  output logic                  used_scl,
  output logic [N-1:0]          u_hat,
  output logic                  ev_ssp,
  output logic                  ev_fsp,
  output logic                  ev_check
);

  logic core_start, core_list_en, core_busy, core_done, core_crc_pass, ctrl_busy;

  adaptive_ctrl u_ctrl (
    .clk, .rst_n, .start, .mode, .core_done, .core_crc_pass,
    .core_start, .core_list_en, .busy(ctrl_busy), .done, .crc_pass, .used_scl);

  polar_core #(.N(N), .Q(Q), .L(L), .T(T), .P(P), .FAST(FAST)) u_core (
    .clk, .rst_n, .llr_we, .llr_addr, .llr_data, .leaf_type,
    .start(core_start), .list_en(core_list_en), .busy(core_busy), .done(core_done),
    .crc_pass(core_crc_pass), .u_hat, .ev_ssp, .ev_fsp, .ev_check);

  assign busy = ctrl_busy | core_busy;

endmodule
