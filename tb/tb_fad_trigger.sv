// tb_fad_trigger: self-checking testbench for fad_trigger. Random scores
// and thresholds, including score == threshold, are presented with random
// valid gaps; the registered flag must equal (valid && score > thr) one
// cycle later, the registered score must equal the input score, and
// out_valid must follow in_valid by one cycle.
module tb_fad_trigger;
  import fad_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid, anomaly;
  score_t score_in, thr, score;

  fad_trigger dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_fire = 0, n_quiet = 0, n_equal = 0;
  logic   e_valid = 1'b0, e_anom = 1'b0;
  score_t e_score = '0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    score_in = '0;
    thr      = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      // check the result of the previous cycle's inputs
      if (k > 0) begin
        checks++;
        if (out_valid !== e_valid || anomaly !== e_anom || (e_valid && score !== e_score)) begin
          failures++;
          $display("FAIL: k=%0d valid %0b/%0b anomaly %0b/%0b", k, out_valid, e_valid, anomaly, e_anom);
        end
      end
      in_valid = ($urandom_range(0, 3) != 0);
      score_in = score_t'($urandom_range(0, 4095));
      thr      = ($urandom_range(0, 4) == 0) ? score_in : score_t'($urandom_range(0, 4095));
      e_valid  = in_valid;
      e_anom   = in_valid && (score_in > thr);
      e_score  = score_in;
      if (in_valid && score_in == thr) n_equal++;
      if (e_anom) n_fire++; else if (in_valid) n_quiet++;
    end
    checks++;
    if (n_fire == 0 || n_quiet == 0 || n_equal == 0) failures++;
    $display("trigger: fired %0d, quiet %0d, equal %0d", n_fire, n_quiet, n_equal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
