// fecg_top: fetal heart rate monitor - preprocessing, FECG extraction by an
// LMS adaptive filter, and FHR detection, all in single-precision floating
// point.
//
// Data flow: the abdominal and the thoracic lead each pass through their own
// preprocessing channel (Butterworth low pass, notch, baseline wander removal).
// The LMS adaptive filter takes the preprocessed abdominal signal as its input
// and the preprocessed thoracic signal as the desired signal; its error e[n]
// is the extracted FECG, in which the maternal ECG is cancelled. The FHR
// detection unit enhances the fetal R waves, finds the threshold from the
// whole record, detects the fetal R peaks and computes the heart rate.
//
// LMS_ARCH chooses the LMS-AF architecture: LMS_PARALLEL (the default; one
// sample per clock, 98 FPUs at M = 19) or LMS_SERIES (2M+1 clocks per sample,
// 9 FPUs). in_ready is always high in parallel mode; in series mode it is high
// only when no sample is in the preprocessing channels and the filter can take
// the next one, so a sample pair is taken at most every 2M+4 clocks.
//
// Interface: a sample pair (abd_in, tho_in) is taken when in_valid and
// in_ready are high. fecg/fecg_valid stream the extracted FECG: in parallel
// mode fecg is registered on the third rising edge after the one that takes
// the pair; the series LMS-AF adds 2M more clocks. The detection unit collects
// N_SAMPLES samples per record (record_open high), then spends about
// 2*N_SAMPLES clocks on its two passes, reporting each new fetal R peak on
// peak_valid/peak_loc, the threshold on th, and finally the rate in bpm on
// fhr with a one-clock fhr_valid; FECG samples arriving during the passes are
// not part of any record. Defaults are the paper's sizes: M = 19, N1 = N2 =
// 200, P = 40, a 30000-sample record at 1 kHz and convergence after 12000
// samples. The scaling factors are not given by the paper and default to 1.0.
module fecg_top
  import fecg_pkg::*;
#(
  parameter lms_arch_e   LMS_ARCH     = LMS_PARALLEL,
  parameter int unsigned M            = 19,
  parameter int unsigned N1           = 200,
  parameter int unsigned N2           = 200,
  parameter int unsigned P            = 40,
  parameter int unsigned N_SAMPLES    = 30000,
  parameter int unsigned MIN_DIST     = 200,
  parameter int unsigned FS           = 1000,
  parameter int unsigned CONV_SAMPLES = 12000,
  parameter fp32_t       BETA         = LMS_BETA,
  parameter fp32_t       SCALE_X      = FP_ONE,
  parameter fp32_t       SCALE_D      = FP_ONE
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp32_t       abd_in,
  input  fp32_t       tho_in,
  output logic        fecg_valid,
  output fp32_t       fecg,
  output logic        record_open,
  output logic        sdm_valid,
  output fp32_t       sdm,
  output fp32_t       th,
  output logic        th_valid,
  output logic        peak_valid,
  output logic [31:0] peak_loc,
  output logic [15:0] fhr,
  output logic        fhr_valid,
  output logic [15:0] rr_count
);

  logic  take;
  logic  abd_valid, abd_busy, tho_busy_unused, tho_valid_unused;
  fp32_t abd_pre, tho_pre;
  logic  lms_ready;
  fp32_t y_unused, m1_unused;

  assign take = in_valid && in_ready;

  preprocess #(.N1(N1), .N2(N2)) u_pre_abd (
    .clk, .rst_n, .in_valid(take), .in_data(abd_in),
    .out_valid(abd_valid), .out_data(abd_pre), .busy(abd_busy)
  );

  preprocess #(.N1(N1), .N2(N2)) u_pre_tho (
    .clk, .rst_n, .in_valid(take), .in_data(tho_in),
    .out_valid(tho_valid_unused), .out_data(tho_pre), .busy(tho_busy_unused)
  );

  if (LMS_ARCH == LMS_SERIES) begin : g_series
    lms_series #(.M(M), .BETA(BETA), .SCALE_X(SCALE_X), .SCALE_D(SCALE_D)) u_lms (
      .clk, .rst_n, .in_valid(abd_valid), .in_ready(lms_ready),
      .x_in(abd_pre), .d_in(tho_pre),
      .out_valid(fecg_valid), .e_out(fecg), .y_out(y_unused)
    );
    assign in_ready = lms_ready && !abd_busy && !abd_valid;
  end else begin : g_parallel
    lms_parallel #(.M(M), .BETA(BETA), .SCALE_X(SCALE_X), .SCALE_D(SCALE_D)) u_lms (
      .clk, .rst_n, .in_valid(abd_valid),
      .x_in(abd_pre), .d_in(tho_pre),
      .out_valid(fecg_valid), .e_out(fecg), .y_out(y_unused)
    );
    assign lms_ready = 1'b1;
    assign in_ready  = 1'b1;
  end

  // a preprocessed sample must always find the filter ready
  a_lms_ready : assert property (@(posedge clk) disable iff (!rst_n) abd_valid |-> lms_ready)
    else $error("preprocessed sample arrived while the LMS-AF was busy");

  fhr_detect #(
    .P(P), .N_SAMPLES(N_SAMPLES), .MIN_DIST(MIN_DIST), .FS(FS), .CONV_SAMPLES(CONV_SAMPLES)
  ) u_detect (
    .clk, .rst_n, .in_valid(fecg_valid), .in_data(fecg),
    .accepting(record_open), .sdm_valid, .sdm, .m1(m1_unused), .th, .th_valid,
    .peak_valid, .peak_loc, .fhr, .fhr_valid, .rr_count
  );

endmodule
