// tb_fad_dense: self-checking testbench for fad_dense at the first hidden
// layer's shape (58 inputs, 16 outputs).
//
// A fixed-point reference model in 64-bit integers computes every output
// (exact dot product, bias aligned to the product's binary point, floor
// shift by the weight fractional bits, saturation to 18 bits). Several
// batches of random vectors are streamed with random gaps in in_valid;
// between batches the weights are redrawn, half the batches with large
// values so that both saturation limits are reached. Each output word is
// checked, and so is the latency (ceil(log2 58) + 2 = 8 cycles) and that an
// output appears for every input and never otherwise.
module tb_fad_dense;
  import fad_pkg::*;

  localparam int NI  = N_IN;
  localparam int NO  = N_HID;
  localparam int LAT = 8;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  data_t   x [NI];
  weight_t w [NO][NI];
  bias_t   b [NO];
  data_t   y [NO];

  fad_dense #(.N_IN(NI), .N_OUT(NO)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_out = 0;
  // expected results, in a ring buffer indexed by input order
  longint exp_mem [256][NO];
  int     exp_t   [256];
  int     wr = 0, rd = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic longint ref_neuron(int o);
    longint acc = 0;
    for (int i = 0; i < NI; i++) acc += longint'(x[i]) * longint'(w[o][i]);
    acc += longint'(b[o]) <<< WF;
    acc = acc >>> WF;
    if (acc > 131071)  acc = 131071;
    if (acc < -131072) acc = -131072;
    return acc;
  endfunction

  function automatic int rnd(int bits, int mag);
    int v = $urandom_range(0, (1 << mag) - 1);
    if ($urandom_range(0, 1)) v = -v;
    return v;
  endfunction

  // capture expected results when an input is presented
  always @(posedge clk) if (rst_n && in_valid) begin
    for (int o = 0; o < NO; o++) exp_mem[wr % 256][o] = ref_neuron(o);
    exp_t[wr % 256] = cycle;
    wr++;
  end

  // compare outputs
  always @(posedge clk) if (rst_n && out_valid) begin
    n_out++;
    if (rd == wr) begin
      failures++; checks++;
      $display("FAIL: output with no input at cycle %0d", cycle);
    end else begin
      checks++;
      if (cycle - exp_t[rd % 256] != LAT) begin
        failures++;
        $display("FAIL: latency %0d, expected %0d", cycle - exp_t[rd % 256], LAT);
      end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (exp_mem[rd % 256][o] == 131071)  n_sat_hi++;
        if (exp_mem[rd % 256][o] == -131072) n_sat_lo++;
        if (longint'(y[o]) != exp_mem[rd % 256][o]) begin
          failures++;
          if (failures < 10) $display("FAIL: y[%0d]=%0d expected %0d", o, y[o], exp_mem[rd % 256][o]);
        end
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

  int n_in = 0;

  initial begin
    for (int i = 0; i < NI; i++) x[i] = '0;
    for (int o = 0; o < NO; o++) begin
      b[o] = '0;
      for (int i = 0; i < NI; i++) w[o][i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int batch = 0; batch < 6; batch++) begin
      automatic bit big = batch[0];
      @(negedge clk);
      for (int o = 0; o < NO; o++) begin
        b[o] = data_t'(rnd(18, big ? 17 : 12));
        for (int i = 0; i < NI; i++) w[o][i] = weight_t'(rnd(12, big ? 11 : 8));
      end
      for (int k = 0; k < 60; k++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        if (in_valid) n_in++;
        for (int i = 0; i < NI; i++) x[i] = data_t'(rnd(18, big ? 17 : 12));
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (LAT + 2) @(negedge clk);
    end
    checks++;
    if (n_out != n_in || rd != wr) begin
      failures++;
      $display("FAIL: %0d inputs, %0d outputs", n_in, n_out);
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("FAIL: saturation not exercised (hi %0d lo %0d)", n_sat_hi, n_sat_lo);
    end
    $display("dense: %0d vectors, saturated hi %0d lo %0d", n_out, n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
