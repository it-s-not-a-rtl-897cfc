// tb_fad_param_bank: self-checking testbench for fad_param_bank. After
// reset every output must be zero. Every address of the map is then written
// once with a random word, in random order with idle cycles in between, and
// every output field is compared with the low bits of the word written to
// its address. A second pass rewrites a random subset and checks that only
// those fields changed. Finally a reset must clear everything again.
module tb_fad_param_bank;
  import fad_pkg::*;

  logic              clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  weight_t w1 [N_HID][N_IN];
  bias_t   b1 [N_HID];
  weight_t w2 [N_HID][N_HID];
  bias_t   b2 [N_HID];
  weight_t w3 [N_OUT][N_HID];
  bias_t   b3 [N_OUT];
  data_t   mean  [N_X];
  shift_t  shift [N_X];
  score_t  thr;

  fad_param_bank dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [CFG_DW-1:0] img [CFG_WORDS];   // expected contents
  int order [CFG_WORDS];

  // value of the field at address a as seen on the outputs, zero-extended
  function automatic longint field(int a);
    if (a < A_B1)    return longint'(w1[(a - A_W1) / N_IN][(a - A_W1) % N_IN]) & 'hFFF;
    if (a < A_W2)    return longint'(b1[a - A_B1]) & 'h3FFFF;
    if (a < A_B2)    return longint'(w2[(a - A_W2) / N_HID][(a - A_W2) % N_HID]) & 'hFFF;
    if (a < A_W3)    return longint'(b2[a - A_B2]) & 'h3FFFF;
    if (a < A_B3)    return longint'(w3[(a - A_W3) / N_HID][(a - A_W3) % N_HID]) & 'hFFF;
    if (a < A_MEAN)  return longint'(b3[a - A_B3]) & 'h3FFFF;
    if (a < A_SHIFT) return longint'(mean[a - A_MEAN]) & 'h3FFFF;
    if (a < A_THR)   return longint'(shift[a - A_SHIFT]);
    return longint'(thr);
  endfunction

  function automatic longint mask(int a);
    if (a < A_B1 || (a >= A_W2 && a < A_B2) || (a >= A_W3 && a < A_B3)) return 'hFFF;
    if (a >= A_SHIFT && a < A_THR) return 'hF;
    if (a == A_THR) return 'h7FFFFF;
    return 'h3FFFF;
  endfunction

  task automatic check_all(string tag);
    for (int a = 0; a < CFG_WORDS; a++) begin
      checks++;
      if (field(a) != (longint'(img[a]) & mask(a))) begin
        failures++;
        if (failures < 10) $display("FAIL(%s): addr %0d holds %0h expected %0h", tag, a,
                                    field(a), longint'(img[a]) & mask(a));
      end
    end
  endtask

  task automatic write(int a, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
    if ($urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < CFG_WORDS; a++) begin img[a] = '0; order[a] = a; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    check_all("reset");
    order.shuffle();
    for (int k = 0; k < CFG_WORDS; k++) begin
      img[order[k]] = CFG_DW'($urandom);
      write(order[k], img[order[k]]);
    end
    @(negedge clk);
    check_all("load");
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(0, CFG_WORDS - 1);
      img[a] = CFG_DW'($urandom);
      write(a, img[a]);
    end
    @(negedge clk);
    check_all("rewrite");
    rst_n = 1'b0;
    #1;
    for (int a = 0; a < CFG_WORDS; a++) img[a] = '0;
    check_all("reset2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
