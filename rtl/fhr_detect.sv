// fhr_detect: fetal heart rate detection unit.
//
// Turns the extracted FECG into fetal R peak locations and a heart rate.
// Peak enhancement (difference, square, mean of P) runs on the live sample
// stream and produces sdm and its record mean m1. The threshold rule needs m1
// and then the mean m2 of the maxima over the whole record before any peak can
// be judged, so the N_SAMPLES values of sdm are kept in a record buffer and
// read back twice:
//   COLLECT : live samples -> peak_enhance -> buffer, until N samples are in;
//   THRESH  : buffer -> local_maxima (with the final m1) -> th;
//   DETECT  : buffer -> local_maxima -> fetal_peak (with th) -> fhr_calc;
//   RATE    : fhr_calc divides; fhr_valid pulses, fhr holds the rate, and
//             the unit clears itself and returns to COLLECT for a new record.
// A few idle clocks (DRAIN_T, DRAIN_D) let the last values leave the pipeline.
// Each read pass takes N_SAMPLES + a few clocks. Samples offered outside
// COLLECT are not taken (accepting is low); at the paper's 1 kHz sample rate
// and a 50 MHz clock the two passes of 30000 clocks last 1.2 ms.
//
// The four processing modules and their order are the paper's; the record
// buffer, the replay passes and this sequencer are this design's, since the
// paper runs each module over the whole record without saying how they are
// chained. peak_valid/peak_loc report each new fetal R peak (location counted
// from the first sample of the record); fhr/fhr_valid give the record's rate.
module fhr_detect
  import fecg_pkg::*;
#(
  parameter int unsigned P            = 40,
  parameter int unsigned N_SAMPLES    = 30000,
  parameter int unsigned MIN_DIST     = 200,
  parameter int unsigned FS           = 1000,
  parameter int unsigned CONV_SAMPLES = 12000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  fp32_t       in_data,
  output logic        accepting,
  output logic        sdm_valid,
  output fp32_t       sdm,
  output fp32_t       m1,
  output fp32_t       th,
  output logic        th_valid,
  output logic        peak_valid,
  output logic [31:0] peak_loc,
  output logic [15:0] fhr,
  output logic        fhr_valid,
  output logic [15:0] rr_count
);

  localparam int unsigned AW = $clog2(N_SAMPLES + 1);

  typedef enum logic [2:0] {COLLECT, THRESH, DRAIN_T, DETECT, DRAIN_D, RATE} phase_e;
  phase_e phase;

  fp32_t         rec [N_SAMPLES];   // record buffer of sdm
  logic [AW-1:0] wr_cnt, rd_cnt;
  logic          rd_valid;
  fp32_t         rd_data;
  logic [2:0]    drain_cnt;
  logic          new_record, pass_start, finish;

  // ------------------------------------------------------------ processing
  logic  pe_in_valid;
  assign accepting   = (phase == COLLECT) && !new_record;
  assign pe_in_valid = in_valid && accepting;

  peak_enhance #(.P(P), .N_SAMPLES(N_SAMPLES)) u_enhance (
    .clk, .rst_n, .start(new_record),
    .in_valid(pe_in_valid), .in_data,
    .out_valid(sdm_valid), .sdm, .m1
  );

  logic        pk_valid;
  logic [31:0] pl;
  fp32_t       pv;
  local_maxima #(.N_SAMPLES(N_SAMPLES)) u_maxima (
    .clk, .rst_n, .start(pass_start),
    .in_valid(rd_valid), .in_data(rd_data), .m1,
    .pk_valid, .pl, .pv, .th, .th_valid
  );

  logic        fp_valid;
  logic [31:0] fp_out;
  fetal_peak #(.MIN_DIST(MIN_DIST)) u_fetal (
    .clk, .rst_n, .start(pass_start),
    .in_valid(pk_valid && phase == DETECT), .pl, .pv, .th,
    .out_valid(fp_valid), .out(fp_out)
  );

  logic [15:0] fhr_calc_out;
  logic        fhr_calc_valid;
  fhr_calc #(.FS(FS), .CONV_SAMPLES(CONV_SAMPLES)) u_rate (
    .clk, .rst_n, .start(new_record),
    .in_valid(fp_valid), .loc(fp_out), .finish,
    .new_peak(peak_valid), .new_loc(peak_loc),
    .fhr(fhr_calc_out), .fhr_valid(fhr_calc_valid), .rr_count
  );

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= COLLECT;
      wr_cnt <= '0; rd_cnt <= '0;
      rd_valid <= 1'b0; rd_data <= FP_ZERO;
      drain_cnt <= '0;
      new_record <= 1'b1;
      pass_start <= 1'b0;
      finish <= 1'b0;
      fhr <= '0; fhr_valid <= 1'b0;
    end else begin
      new_record <= 1'b0;
      pass_start <= 1'b0;
      finish     <= 1'b0;
      rd_valid   <= 1'b0;
      fhr_valid  <= 1'b0;
      unique case (phase)
        COLLECT: begin
          if (sdm_valid) begin
            rec[wr_cnt] <= sdm;
            wr_cnt <= wr_cnt + 1'b1;
            if (wr_cnt == AW'(N_SAMPLES - 1)) begin
              phase <= THRESH;
              rd_cnt <= '0;
              pass_start <= 1'b1;
            end
          end
        end
        THRESH, DETECT: begin
          if (!pass_start) begin
            if (rd_cnt != AW'(N_SAMPLES)) begin
              rd_data  <= rec[rd_cnt];
              rd_valid <= 1'b1;
              rd_cnt   <= rd_cnt + 1'b1;
            end else begin
              drain_cnt <= '0;
              phase <= (phase == THRESH) ? DRAIN_T : DRAIN_D;
            end
          end
        end
        DRAIN_T: begin
          // last sample leaves local_maxima, th is final
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 3'd3) begin
            phase <= DETECT;
            rd_cnt <= '0;
            pass_start <= 1'b1;
          end
        end
        DRAIN_D: begin
          // last pair leaves fetal_peak and reaches fhr_calc
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 3'd3) begin
            phase <= RATE;
            finish <= 1'b1;
          end
        end
        RATE: begin
          if (fhr_calc_valid) begin
            fhr <= fhr_calc_out;
            fhr_valid <= 1'b1;
            wr_cnt <= '0;
            new_record <= 1'b1;
            phase <= COLLECT;
          end
        end
        default: phase <= COLLECT;
      endcase
    end
  end

endmodule
