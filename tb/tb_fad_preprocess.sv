// tb_fad_preprocess: self-checking testbench for fad_preprocess at the
// design's size (19 objects x 3 features). Random events, means and shift
// amounts are applied; every one of the 58 output words is compared with a
// reference computed in 64-bit integers: (x - mean) >>> shift, saturated
// to 18 bits, except word 55 (MET eta), which must be zero, and word 57,
// which must be t = 1.0 (1024 in Q8.10). Latency 1 cycle and valid
// propagation are checked; saturation of both signs must occur.
module tb_fad_preprocess;
  import fad_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  data_t  feat  [N_OBJ][N_FEAT];
  data_t  mean  [N_X];
  shift_t shift [N_X];
  data_t  z     [N_IN];

  fad_preprocess dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;
  longint e [N_IN];
  logic   e_valid = 1'b0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N_OBJ; r++) for (int c = 0; c < N_FEAT; c++) feat[r][c] = '0;
    for (int i = 0; i < N_X; i++) begin mean[i] = '0; shift[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      if (k > 0) begin
        checks++;
        if (out_valid !== e_valid) begin
          failures++;
          $display("FAIL: out_valid %0b expected %0b", out_valid, e_valid);
        end
        if (e_valid) begin
          for (int i = 0; i < N_IN; i++) begin
            checks++;
            if (longint'(z[i]) != e[i]) begin
              failures++;
              if (failures < 10) $display("FAIL: z[%0d]=%0d expected %0d", i, z[i], e[i]);
            end
          end
        end
      end
      in_valid = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < N_X; i++) begin
        feat[i / N_FEAT][i % N_FEAT] = data_t'($urandom);
        mean[i]  = data_t'($urandom);
        shift[i] = shift_t'($urandom_range(0, 3) == 0 ? 0 : $urandom_range(0, 15));
      end
      e_valid = in_valid;
      for (int i = 0; i < N_X; i++) begin
        automatic longint d = (longint'(feat[i / N_FEAT][i % N_FEAT]) - longint'(mean[i])) >>> shift[i];
        if (d > 131071)  begin d = 131071;  if (in_valid) n_hi++; end
        if (d < -131072) begin d = -131072; if (in_valid) n_lo++; end
        e[i] = (i == 55) ? 0 : d;
      end
      e[57] = 1024;
    end
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("preprocess: saturated hi %0d lo %0d", n_hi, n_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
