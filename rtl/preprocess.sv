// preprocess: one channel of ECG preprocessing.
//
// Removes high-frequency noise with the fourth-order Butterworth low pass,
// then power-line interference with the notch filter, then baseline wander
// with the two-stage moving average, in that order. Each stage has a latency
// of one clock, so a sample taken with in_valid leaves on out_data with
// out_valid three clocks later; a new sample may enter every clock. busy is
// high while a sample is inside the chain (used to pace the series LMS-AF).
// The top uses one instance for the abdominal and one for the thoracic lead.
module preprocess
  import fecg_pkg::*;
#(
  parameter int unsigned N1 = 200,
  parameter int unsigned N2 = 200
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t in_data,
  output logic  out_valid,
  output fp32_t out_data,
  output logic  busy
);

  logic  lp_valid, nt_valid;
  fp32_t lp_data, nt_data, base_unused;

  butterworth u_lowpass (
    .clk, .rst_n, .in_valid, .in_data,
    .out_valid(lp_valid), .out_data(lp_data)
  );

  notch u_notch (
    .clk, .rst_n, .in_valid(lp_valid), .in_data(lp_data),
    .out_valid(nt_valid), .out_data(nt_data)
  );

  baseline_wander #(.N1(N1), .N2(N2)) u_bwr (
    .clk, .rst_n, .in_valid(nt_valid), .in_data(nt_data),
    .out_valid, .out_data, .baseline(base_unused)
  );

  assign busy = lp_valid || nt_valid;

endmodule
