// tb_fetal_peak: checks the fetal R peak selection rules.
//
// Sends 3000 (pl, pv) pairs built like the local maxima stream: runs of the
// same pair, new maxima at random distances (some closer than MIN_DIST = 200,
// some farther) and random heights around th. A model of the listing gives the
// expected out and out_valid for every pair; a directed sequence also checks
// that of two maxima 120 samples apart the larger one is reported.
module tb_fetal_peak;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic in_valid = 0;
  logic [31:0] pl = '0;
  fp32_t pv = '0, th;
  logic out_valid;
  logic [31:0] out;
  int checks = 0, failures = 0;

  fetal_peak #(.MIN_DIST(200)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        exp_v = 0, exp_v_q = 0;
  logic [31:0] exp_out, exp_out_q;
  always @(posedge clk) begin exp_v_q <= exp_v; exp_out_q <= exp_out; end
  always @(negedge clk) begin
    if (rst_n && !start) begin
      checks++;
      if (out_valid !== exp_v_q || (out_valid && out !== exp_out_q)) begin
        failures++;
        $display("FAIL out_valid=%b out=%0d, expected %b %0d", out_valid, out, exp_v_q, exp_out_q);
      end
    end
  end

  // model state
  int unsigned r1;
  real r2;
  bit first;
  real thr;
  int larger_kept = 0;

  task automatic send(input int unsigned l, input real v);
    @(negedge clk);
    pl = l; pv = real_to_fp(v);
    v = fp_to_real(pv);
    in_valid = 1;
    exp_v = 0;
    if (first) begin
      r1 = l; r2 = v; first = 0;
    end else if (v > thr) begin
      exp_v = 1;
      if (l - r1 > 200) begin exp_out = r1; r1 = l; r2 = v; end
      else if (v > r2) begin exp_out = l; r1 = l; r2 = v; end
      else exp_out = r1;
    end
  endtask

  initial begin
    int unsigned loc;
    real v;
    th = real_to_fp(0.5);
    thr = fp_to_real(th);
    first = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    // directed: peak at 1000 (0.8), larger one 120 later (1.2), far one at 1500
    send(0, 0.0);
    send(1000, 0.8); send(1000, 0.8);
    send(1120, 1.2); send(1120, 1.2);
    @(negedge clk); in_valid = 0; exp_v = 0;
    @(negedge clk);
    checks++;
    if (out !== 1120) begin failures++; $display("FAIL larger peak not kept, out=%0d", out); end
    send(1500, 0.9);
    @(negedge clk); in_valid = 0; exp_v = 0;
    @(negedge clk);
    checks++;
    if (out !== 1120) begin failures++; $display("FAIL confirmed peak %0d", out); end
    // random stream
    loc = 2000;
    for (int i = 0; i < 600; i++) begin
      loc += $urandom_range(30, 450);
      v = real'($urandom_range(0, 1000)) / 1000.0;
      repeat ($urandom_range(1, 8)) send(loc, v);
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0; exp_v = 0;
      end
    end
    @(negedge clk); in_valid = 0; exp_v = 0;
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
