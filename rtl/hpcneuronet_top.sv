// hpcneuronet_top: neuromorphic speech denoiser, from noisy clip to clean audio.
//
// Data path, one frame per 128 input samples:
//   noisy_data_buffer -> stft (512-sample window, hop 128, 256 bands)
//   -> cordic_polar (magnitude, phase)
//        magnitude -> delay_unit --------------------------\
//        phase     -> delay_unit ---------------------------+-> mask_combine
//        magnitude -> [feature path] -> snn_encoder -> snn_decoder -/   (gain)
//   -> istft (inverse FFT, overlap-add) -> out_*
// The feature path is where the paper's transformer embedding, transformer
// layers and spiking self-attention sit in front of the spike encoder. They
// are not built here: with xf_bypass = 1 the magnitudes go straight to the
// encoder; with xf_bypass = 0 they leave on feat_out_* and the encoder takes
// its input from feat_in_* (one 18-bit value per band, band order), so an
// external model can be inserted. The SNN turns each band's magnitude into
// a spike train and back into a gain between 0 and 1, which scales that
// band; weak bands, below the neurons' threshold, are suppressed.
// All blocks talk through valid/ready streams (the paper's modules use AXI
// interfaces), so they run concurrently on consecutive frames, and back
// pressure from out_ready stalls the whole chain without loss.
// Control: write the clip with wr_en/wr_addr/wr_data, pulse start with
// length. With every gain at 1.0 the output is the input delayed by 384
// samples; append 384 zero samples to flush a clip.
// SNN configuration (mode, threshold, leak_shift, refrac, reset_zero,
// weights) as in
// snn_encoder; mode and thresholds are taken at the start of each frame.
// The chain of blocks, the two FFT cores and the magnitude and phase paths
// through delay units into one multiplier follow the source architecture;
// the feature-path ports, the clip-memory interface and the stream
// handshakes are this design's own.
module hpcneuronet_top
  import hpc_pkg::*;
#(
  parameter int CLIP_LEN = 48000,
  parameter int N        = FFT_N,
  parameter int HOP      = HOP_LEN,
  parameter int NB       = NBANDS,
  parameter int T        = 16,
  parameter int VW       = 24,
  parameter int DELAY_D  = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // clip memory
  input  logic                         wr_en,
  input  logic [$clog2(CLIP_LEN)-1:0]  wr_addr,
  input  logic signed [SAMPLE_W-1:0]   wr_data,
  input  logic                         start,
  input  logic [$clog2(CLIP_LEN+1)-1:0] length,
  output logic                         busy,
  // SNN configuration
  input  code_mode_e                   mode,
  input  logic [VW-1:0]                threshold,
  input  logic [3:0]                   leak_shift,
  input  logic [3:0]                   refrac,
  input  logic                         reset_zero,
  input  logic                         w_we,
  input  logic [7:0]                   w_addr,
  input  logic [15:0]                  w_data,
  // external feature path (transformer stages)
  input  logic                         xf_bypass,
  output logic                         feat_out_valid,
  input  logic                         feat_out_ready,
  output logic [MAG_W-1:0]             feat_out_data,
  input  logic                         feat_in_valid,
  output logic                         feat_in_ready,
  input  logic [MAG_W-1:0]             feat_in_data,
  // clean audio out
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic signed [SAMPLE_W-1:0]   out_sample,
  output logic                         out_last
);
  // noisy data -> STFT
  logic                       nd_valid, nd_ready;
  logic signed [SAMPLE_W-1:0] nd_sample;
  noisy_data_buffer #(.DEPTH(CLIP_LEN)) u_data (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .start, .length, .busy,
    .m_valid(nd_valid), .m_ready(nd_ready), .m_sample(nd_sample)
  );

  logic  st_valid, st_ready, st_last;
  cplx_t st_data;
  stft #(.N(N), .HOP(HOP), .NB(NB)) u_stft (
    .clk, .rst_n, .s_valid(nd_valid), .s_ready(nd_ready), .s_sample(nd_sample),
    .m_valid(st_valid), .m_ready(st_ready), .m_data(st_data), .m_last(st_last)
  );

  // magnitude / phase
  logic   cp_valid, cp_ready, cp_last;
  polar_t cp_data;
  cordic_polar u_polar (
    .clk, .rst_n, .s_valid(st_valid), .s_ready(st_ready), .s_data(st_data), .s_last(st_last),
    .m_valid(cp_valid), .m_ready(cp_ready), .m_data(cp_data), .m_last(cp_last)
  );

  // three-way split: magnitude delay, phase delay, feature path
  logic dm_s_ready, dp_s_ready, fp_ready;
  logic enc_s_valid, enc_s_ready;
  logic [MAG_W-1:0] enc_s_mag;
  assign fp_ready       = xf_bypass ? enc_s_ready : feat_out_ready;
  assign cp_ready       = dm_s_ready && dp_s_ready && fp_ready;
  assign feat_out_valid = !xf_bypass && cp_valid && dm_s_ready && dp_s_ready;
  assign feat_out_data  = cp_data.mag;
  assign feat_in_ready  = !xf_bypass && enc_s_ready;
  assign enc_s_valid    = xf_bypass ? (cp_valid && dm_s_ready && dp_s_ready) : feat_in_valid;
  assign enc_s_mag      = xf_bypass ? cp_data.mag : feat_in_data;

  logic             dm_valid, dm_last, dp_valid, dp_last, mc_p_ready, dm_full, dp_full;
  logic [MAG_W-1:0] dm_data;
  logic [PHASE_W-1:0] dp_data;
  delay_unit #(.W(MAG_W), .DEPTH(DELAY_D)) u_delay_mag (
    .clk, .rst_n,
    .s_valid(cp_valid && dp_s_ready && fp_ready), .s_ready(dm_s_ready), .s_data(cp_data.mag), .s_last(cp_last),
    .m_valid(dm_valid), .m_ready(mc_p_ready), .m_data(dm_data), .m_last(dm_last), .full(dm_full)
  );
  delay_unit #(.W(PHASE_W), .DEPTH(DELAY_D)) u_delay_phase (
    .clk, .rst_n,
    .s_valid(cp_valid && dm_s_ready && fp_ready), .s_ready(dp_s_ready), .s_data(cp_data.phase), .s_last(cp_last),
    .m_valid(dp_valid), .m_ready(mc_p_ready), .m_data(dp_data), .m_last(dp_last), .full(dp_full)
  );

  // SNN encode / decode
  logic         ev_valid, ev_ready;
  spike_event_t ev;
  snn_encoder #(.NB(NB), .T(T), .VW(VW)) u_enc (
    .clk, .rst_n, .mode, .threshold, .leak_shift, .refrac, .reset_zero, .w_we, .w_addr, .w_data,
    .s_valid(enc_s_valid), .s_ready(enc_s_ready), .s_mag(enc_s_mag),
    .m_valid(ev_valid), .m_ready(ev_ready), .m_event(ev)
  );

  logic              g_valid, g_ready, g_last;
  logic [MASK_W-1:0] g_data;
  snn_decoder #(.NB(NB), .T(T)) u_dec (
    .clk, .rst_n, .s_valid(ev_valid), .s_ready(ev_ready), .s_event(ev),
    .m_valid(g_valid), .m_ready(g_ready), .m_data(g_data), .m_last(g_last)
  );

  // recombine and back to time domain
  logic  mc_valid, mc_ready, mc_last;
  cplx_t mc_data;
  mask_combine u_comb (
    .clk, .rst_n,
    .p_valid(dm_valid && dp_valid), .p_ready(mc_p_ready),
    .p_data('{mag: dm_data, phase: dp_data}), .p_last(dm_last),
    .g_valid, .g_ready, .g_data,
    .m_valid(mc_valid), .m_ready(mc_ready), .m_data(mc_data), .m_last(mc_last)
  );

  istft #(.N(N), .HOP(HOP), .NB(NB)) u_istft (
    .clk, .rst_n, .s_valid(mc_valid), .s_ready(mc_ready), .s_data(mc_data), .s_last(mc_last),
    .m_valid(out_valid), .m_ready(out_ready), .m_sample(out_sample), .m_last(out_last)
  );

  // The two delay units always move together and frames stay aligned.
  a_delay_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (dm_valid == dp_valid) && (!dm_valid || dm_last == dp_last) && (dm_full == dp_full));
  a_frame_align: assert property (@(posedge clk) disable iff (!rst_n)
    dm_valid && g_valid && mc_p_ready |-> dm_last == g_last);
endmodule
