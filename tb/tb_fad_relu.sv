// tb_fad_relu: self-checking testbench for fad_relu. Drives random signed
// vectors (including the extreme values 0, -1, the most negative and the
// most positive word) and checks every element against max(0, x).
module tb_fad_relu;
  import fad_pkg::*;

  localparam int N = N_HID;

  data_t x [N];
  data_t y [N];
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;

  fad_relu #(.N(N)) dut (.x(x), .y(y));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      for (int i = 0; i < N; i++) begin
        case ($urandom_range(0, 7))
          0:       x[i] = '0;
          1:       x[i] = -data_t'(1);
          2:       x[i] = data_t'(-(1 << (DW - 1)));
          3:       x[i] = data_t'((1 << (DW - 1)) - 1);
          default: x[i] = data_t'($urandom);
        endcase
      end
      #1;
      for (int i = 0; i < N; i++) begin
        int e;
        e = (int'(x[i]) < 0) ? 0 : int'(x[i]);
        if (int'(x[i]) < 0) n_neg++; else n_pos++;
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          $display("FAIL: x=%0d y=%0d expected %0d", x[i], y[i], e);
        end
      end
    end
    checks++;
    if (n_neg == 0 || n_pos == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
