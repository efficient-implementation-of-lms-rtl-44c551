// fhr_calc: fetal heart rate from the detected R peak locations.
//
// Keeps the current and the previous peak location. A location different from
// the current one is a new peak (new_peak strobes with it on new_loc); when the
// current peak lies at or after CONV_SAMPLES (the point where the LMS weights
// have converged, 12000 samples), the difference is an RR interval and is added
// to a sum and counted. On finish the average RR interval (sum/count samples,
// or sum/count/FS seconds) is turned into beats per minute by equation (6):
//   FHR = 60 / RR[s] = 60 * FS * count / sum
// with a restoring integer divider, one quotient bit per clock (34 clocks).
// The FHR is truncated to whole bpm; with no RR interval it is 0.
//
// Interface: start clears the unit for a new record. fhr_valid rises when fhr
// is ready and stays until start. The integer divider, the rounding and the
// rule that both peaks of an interval lie after CONV_SAMPLES are this design's
// choices; the paper gives the averaging and equation (6).
module fhr_calc #(
  parameter int unsigned FS           = 1000,
  parameter int unsigned CONV_SAMPLES = 12000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  input  logic [31:0] loc,
  input  logic        finish,
  output logic        new_peak,
  output logic [31:0] new_loc,
  output logic [15:0] fhr,
  output logic        fhr_valid,
  output logic [15:0] rr_count
);

  logic [31:0] cur;
  logic        have_cur;
  logic [31:0] rr_sum;
  logic        dividing;
  logic [5:0]  bit_cnt;
  logic [31:0] quo;
  logic [32:0] rem;
  logic [31:0] num;

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      cur <= '0; have_cur <= 1'b0; rr_sum <= '0; rr_count <= '0;
      new_peak <= 1'b0; new_loc <= '0;
      dividing <= 1'b0; bit_cnt <= '0; quo <= '0; rem <= '0; num <= '0;
      fhr <= '0; fhr_valid <= 1'b0;
    end else begin
      new_peak <= 1'b0;
      if (in_valid && (!have_cur || loc != cur)) begin
        new_peak <= 1'b1;
        new_loc  <= loc;
        if (have_cur && cur >= 32'(CONV_SAMPLES)) begin
          rr_sum   <= rr_sum + (loc - cur);
          rr_count <= rr_count + 1'b1;
        end
        cur <= loc;
        have_cur <= 1'b1;
      end

      if (finish && !dividing && !fhr_valid) begin
        if (rr_count == '0 || rr_sum == '0) begin
          fhr <= '0;
          fhr_valid <= 1'b1;
        end else begin
          dividing <= 1'b1;
          num <= 32'(60 * FS) * 32'(rr_count);
          quo <= '0;
          rem <= '0;
          bit_cnt <= 6'd32;
        end
      end else if (dividing) begin
        // restoring division num / rr_sum, MSB first
        if (bit_cnt != 0) begin
          logic [32:0] r;
          r = {rem[31:0], num[31]};
          num <= num << 1;
          if (r >= {1'b0, rr_sum}) begin
            rem <= r - {1'b0, rr_sum};
            quo <= {quo[30:0], 1'b1};
          end else begin
            rem <= r;
            quo <= {quo[30:0], 1'b0};
          end
          bit_cnt <= bit_cnt - 1'b1;
        end else begin
          dividing  <= 1'b0;
          fhr       <= (quo > 32'hFFFF) ? 16'hFFFF : quo[15:0];
          fhr_valid <= 1'b1;
        end
      end
    end
  end

endmodule
