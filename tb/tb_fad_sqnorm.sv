// tb_fad_sqnorm: self-checking testbench for fad_sqnorm at the design's
// size (57 components, 18-bit Q8.10 inputs, 23-bit Q15.8 score).
//
// The reference squares and sums the components in 64-bit integers, drops
// 12 fractional bits and saturates to 2^23 - 1. Vectors are streamed with
// random gaps; small vectors give unsaturated scores, large ones saturate.
// Score, latency (ceil(log2 57) + 2 = 8 cycles) and the one-output-per-
// input rule are checked.
module tb_fad_sqnorm;
  import fad_pkg::*;

  localparam int N   = N_OUT;
  localparam int LAT = 8;
  localparam longint SMAX = (longint'(1) << SW) - 1;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  data_t  v [N];
  score_t score;

  fad_sqnorm dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, n_in = 0, n_out = 0, n_sat = 0, n_mid = 0;
  longint exp_s [256];
  int     exp_t [256];
  int     wr = 0, rd = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && in_valid) begin
    automatic longint acc = 0;
    for (int i = 0; i < N; i++) acc += longint'(v[i]) * longint'(v[i]);
    acc = acc >>> (2 * DF - SF);
    if (acc > SMAX) acc = SMAX;
    exp_s[wr % 256] = acc;
    exp_t[wr % 256] = cycle;
    wr++;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    n_out++;
    checks++;
    if (rd == wr) begin
      failures++;
      $display("FAIL: output with no input");
    end else begin
      if (exp_s[rd % 256] == SMAX) n_sat++; else if (exp_s[rd % 256] > 0) n_mid++;
      if (longint'(score) != exp_s[rd % 256] || cycle - exp_t[rd % 256] != LAT) begin
        failures++;
        $display("FAIL: score %0d expected %0d, latency %0d", score, exp_s[rd % 256],
                 cycle - exp_t[rd % 256]);
      end
      rd++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) v[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int k = 0; k < 400; k++) begin
      automatic int mag = (k % 5 == 4) ? 17 : $urandom_range(8, 13);
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) n_in++;
      for (int i = 0; i < N; i++) begin
        automatic int m = $urandom_range(0, (1 << mag) - 1);
        v[i] = data_t'($urandom_range(0, 1) ? -m : m);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (n_in != n_out || n_sat == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL: in %0d out %0d saturated %0d mid %0d", n_in, n_out, n_sat, n_mid);
    end
    $display("sqnorm: %0d vectors, %0d saturated", n_out, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
