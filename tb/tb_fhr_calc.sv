// tb_fhr_calc: checks RR averaging and the beats-per-minute result.
//
// Sends a stream of peak locations, each repeated a few times as the detector
// does, with intervals drawn around 420 samples (about 143 bpm at 1 kHz),
// CONV_SAMPLES = 12000. The expected FHR is floor(60 * FS * count / sum) over
// the intervals whose earlier peak lies at or after 12000; count, the new-peak
// strobes and the result are checked, then a second record with no usable
// interval must give 0.
module tb_fhr_calc;
  logic clk = 0, rst_n = 0, start = 0;
  logic in_valid = 0;
  logic [31:0] loc = '0;
  logic finish = 0;
  logic new_peak, fhr_valid;
  logic [31:0] new_loc;
  logic [15:0] fhr, rr_count;
  int checks = 0, failures = 0;

  fhr_calc #(.FS(1000), .CONV_SAMPLES(12000)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int strobes = 0;
  always @(negedge clk) if (rst_n && new_peak) strobes++;

  initial begin
    int unsigned l, prev, sum, cnt, npk, want;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    l = 100; sum = 0; cnt = 0; npk = 0; prev = 0;
    while (l < 30000) begin
      repeat ($urandom_range(1, 5)) begin
        @(negedge clk); in_valid = 1; loc = l;
      end
      if (npk > 0 && prev >= 12000) begin sum += l - prev; cnt++; end
      npk++;
      prev = l;
      l += $urandom_range(380, 460);
      if ($urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    finish = 1; @(negedge clk); finish = 0;
    repeat (40) @(negedge clk);
    want = (60 * 1000 * cnt) / sum;
    checks += 4;
    if (!fhr_valid) begin failures++; $display("FAIL fhr_valid low"); end
    if (fhr != want) begin failures++; $display("FAIL fhr=%0d want=%0d", fhr, want); end
    if (rr_count != cnt) begin failures++; $display("FAIL count=%0d want=%0d", rr_count, cnt); end
    if (strobes != npk) begin failures++; $display("FAIL %0d new peaks, want %0d", strobes, npk); end
    $display("fhr=%0d bpm from %0d intervals", fhr, rr_count);
    // second record: all peaks before convergence
    start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 5; i++) begin @(negedge clk); in_valid = 1; loc = 1000 * i; end
    @(negedge clk); in_valid = 0;
    finish = 1; @(negedge clk); finish = 0;
    repeat (40) @(negedge clk);
    checks += 2;
    if (!fhr_valid || fhr != 0) begin failures++; $display("FAIL empty record fhr=%0d", fhr); end
    if (rr_count != 0) begin failures++; $display("FAIL empty record count=%0d", rr_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
