// tb_fad_flow_vt_top: end-to-end, self-checking testbench of the complete
// Flow v_t anomaly trigger at its default (full) size.
//
// The testbench carries its own integer model of the whole chain
// (standard scaling, three dense layers with ReLU on the hidden ones, the
// squared norm and the threshold), written from the fixed-point rules in
// fad_pkg and independent of the RTL. It runs three phases. In each, a random
// network (weights, biases, scaling constants) is written through the
// configuration port; a set of random events is generated, with a fraction
// of "hot" events carrying very large features; the threshold is set to the
// median of the model's scores for that set, so roughly half the events
// fire. The events are then streamed, mostly back to back (one per clock)
// with random idle gaps. For every event the 57-word vector field, the
// score, the trigger bit and the latency are compared with the model.
// The third phase loads a sparse, low-precision network of the kind a
// per-weight quantisation produces: 84 % of the weights zero, the others
// 1- to 5-bit integers with 6 fractional bits. It shows that such a network
// runs on this datapath unchanged.
//
// Mechanisms that must each occur at least once (else a failure is
// counted): configuration writes, reconfiguration between phases, ReLU
// clipping in both hidden layers, saturation in a dense layer, saturation
// of the score, the trigger firing and not firing, the MET eta slot being
// non-zero at the input, back-to-back events, idle gaps, and non-zero
// weights of the sparse network.
module tb_fad_flow_vt_top;
  import fad_pkg::*;

  localparam int NEV     = 300;            // events per phase
  localparam int LATENCY = 30;             // pipeline latency in cycles
  localparam int PAPER_LAT_MAX = 46;       // 230 ns at a 5 ns clock
  localparam longint DMAX = (longint'(1) << (DW - 1)) - 1;
  localparam longint DMIN = -(longint'(1) << (DW - 1));
  localparam longint SMAX = (longint'(1) << SW) - 1;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              cfg_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic              in_valid = 1'b0;
  data_t             feat [N_OBJ][N_FEAT];
  logic              v_valid, out_valid, anomaly;
  data_t             v [N_OUT];
  score_t            score;

  fad_flow_vt_top dut (.*);

  always #2.5 clk = ~clk;   // 5 ns clock

  // ---- model state ------------------------------------------------------
  longint m_w1 [N_HID][N_IN],  m_b1 [N_HID];
  longint m_w2 [N_HID][N_HID], m_b2 [N_HID];
  longint m_w3 [N_OUT][N_HID], m_b3 [N_OUT];
  longint m_mean [N_X], m_shift [N_X], m_thr;

  longint ev    [NEV][N_X];      // events of the current phase
  longint e_v   [NEV][N_OUT];    // expected vector field
  longint e_s   [NEV];           // expected score
  int     t_in  [NEV];           // cycle each event was sent

  int checks = 0, failures = 0, cycle = 0;
  int n_cfg = 0, n_reconf = 0, n_relu1 = 0, n_relu2 = 0, n_dsat = 0, n_ssat = 0;
  int n_fire = 0, n_quiet = 0, n_met_eta = 0, n_b2b = 0, n_gap = 0;
  int n_sent = 0, n_vrecv = 0, n_srecv = 0, n_hgq_nz = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic longint sat(longint x, longint lo, longint hi);
    return (x > hi) ? hi : (x < lo) ? lo : x;
  endfunction

  function automatic longint srnd(int mag);
    longint m = longint'($urandom_range(0, (1 << mag) - 1));
    return $urandom_range(0, 1) ? -m : m;
  endfunction

  // the whole chain for event k
  task automatic model(int k);
    longint z [N_IN];
    longint h1 [N_HID];
    longint h2 [N_HID];
    longint acc;
    for (int i = 0; i < N_X; i++)
      z[i] = (i == MET_ETA_IDX) ? 0 : sat((ev[k][i] - m_mean[i]) >>> m_shift[i], DMIN, DMAX);
    z[N_X] = longint'(1) << DF;
    for (int o = 0; o < N_HID; o++) begin
      acc = m_b1[o] <<< WF;
      for (int i = 0; i < N_IN; i++) acc += z[i] * m_w1[o][i];
      acc = sat(acc >>> WF, DMIN, DMAX);
      if (acc == DMAX || acc == DMIN) n_dsat++;
      if (acc < 0) n_relu1++;
      h1[o] = (acc < 0) ? 0 : acc;
    end
    for (int o = 0; o < N_HID; o++) begin
      acc = m_b2[o] <<< WF;
      for (int i = 0; i < N_HID; i++) acc += h1[i] * m_w2[o][i];
      acc = sat(acc >>> WF, DMIN, DMAX);
      if (acc == DMAX || acc == DMIN) n_dsat++;
      if (acc < 0) n_relu2++;
      h2[o] = (acc < 0) ? 0 : acc;
    end
    acc = 0;
    for (int o = 0; o < N_OUT; o++) begin
      longint a = m_b3[o] <<< WF;
      for (int i = 0; i < N_HID; i++) a += h2[i] * m_w3[o][i];
      a = sat(a >>> WF, DMIN, DMAX);
      if (a == DMAX || a == DMIN) n_dsat++;
      e_v[k][o] = a;
      acc += a * a;
    end
    e_s[k] = sat(acc >>> (2 * DF - SF), 0, SMAX);
    if (e_s[k] == SMAX) n_ssat++;
  endtask

  task automatic cfg_write(int a, longint d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 1'b0;
    n_cfg++;
  endtask

  // A weight of a sparse, per-weight quantised network: 84 % zero, the rest
  // k-bit signed integers (k = 1..5, fewer for larger k) with 6 fractional
  // bits, i.e. multiplied by 4 to reach the 8 fractional bits of Q4.8.
  function automatic longint hgq_w();
    int r = $urandom_range(0, 999);
    int k = (r < 842) ? 0 : (r < 920) ? 1 : (r < 958) ? 2 : (r < 985) ? 3 : (r < 997) ? 4 : 5;
    longint m;
    if (k == 0) return 0;
    n_hgq_nz++;
    m = longint'($urandom_range(0, (1 << k) - 1)) - (longint'(1) << (k - 1));
    return m * 4;
  endfunction

  // draw a network, write it, draw events, set the threshold to the median
  task automatic setup_phase(int wmag, bit hgq);
    longint sorted [NEV];
    for (int o = 0; o < N_HID; o++) begin
      m_b1[o] = srnd(10); m_b2[o] = srnd(10);
      for (int i = 0; i < N_IN; i++)  m_w1[o][i] = hgq ? hgq_w() : srnd(wmag);
      for (int i = 0; i < N_HID; i++) m_w2[o][i] = hgq ? hgq_w() : srnd(wmag + 1);
    end
    for (int o = 0; o < N_OUT; o++) begin
      m_b3[o] = srnd(10);
      for (int i = 0; i < N_HID; i++) m_w3[o][i] = hgq ? hgq_w() : srnd(wmag + 1);
    end
    for (int i = 0; i < N_X; i++) begin
      m_mean[i]  = srnd(10);
      m_shift[i] = $urandom_range(0, 2);
    end
    for (int k = 0; k < NEV; k++) begin
      automatic bit hot = ($urandom_range(0, 9) == 0);
      for (int i = 0; i < N_X; i++) ev[k][i] = srnd(hot ? 17 : 11);
      model(k);
      sorted[k] = e_s[k];
    end
    sorted.sort();
    m_thr = sorted[NEV / 2];
    for (int o = 0; o < N_HID; o++) begin
      for (int i = 0; i < N_IN; i++)  cfg_write(A_W1 + o * N_IN + i, m_w1[o][i]);
      for (int i = 0; i < N_HID; i++) cfg_write(A_W2 + o * N_HID + i, m_w2[o][i]);
      cfg_write(A_B1 + o, m_b1[o]);
      cfg_write(A_B2 + o, m_b2[o]);
    end
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_HID; i++) cfg_write(A_W3 + o * N_HID + i, m_w3[o][i]);
      cfg_write(A_B3 + o, m_b3[o]);
    end
    for (int i = 0; i < N_X; i++) begin
      cfg_write(A_MEAN + i, m_mean[i]);
      cfg_write(A_SHIFT + i, m_shift[i]);
    end
    cfg_write(A_THR, m_thr);
  endtask

  // ---- output checkers ----------------------------------------------------
  always @(posedge clk) if (rst_n && v_valid) begin
    checks++;
    if (n_vrecv >= n_sent) begin
      failures++;
      $display("FAIL: vector field with no event");
    end else begin
      automatic int k = n_vrecv % NEV;
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (longint'(v[o]) != e_v[k][o]) begin
          failures++;
          if (failures < 10) $display("FAIL: event %0d v[%0d]=%0d expected %0d", k, o, v[o], e_v[k][o]);
        end
      end
    end
    n_vrecv++;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (n_srecv >= n_sent) begin
      failures++;
      $display("FAIL: score with no event");
    end else begin
      automatic int k = n_srecv % NEV;
      automatic bit e_an = (e_s[k] > m_thr);
      if (longint'(score) != e_s[k] || anomaly != e_an || cycle - t_in[k] != LATENCY) begin
        failures++;
        if (failures < 10)
          $display("FAIL: event %0d score %0d/%0d anomaly %0b/%0b latency %0d", k, score, e_s[k],
                   anomaly, e_an, cycle - t_in[k]);
      end
      if (anomaly) n_fire++; else n_quiet++;
    end
    n_srecv++;
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N_OBJ; r++) for (int c = 0; c < N_FEAT; c++) feat[r][c] = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    for (int phase = 0; phase < 3; phase++) begin
      if (phase > 0) n_reconf++;
      setup_phase(phase == 0 ? 6 : 7, phase == 2);
      n_sent = 0; n_vrecv = 0; n_srecv = 0;
      for (int k = 0; k < NEV; k++) begin
        @(negedge clk);
        if ($urandom_range(0, 7) == 0) begin
          in_valid = 1'b0;
          n_gap++;
          @(negedge clk);
        end else if (k > 0) n_b2b++;
        in_valid = 1'b1;
        for (int i = 0; i < N_X; i++) feat[i / N_FEAT][i % N_FEAT] = data_t'(ev[k][i]);
        if (ev[k][MET_ETA_IDX] != 0) n_met_eta++;
        t_in[k] = cycle;
        n_sent++;
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (LATENCY + 4) @(negedge clk);
      checks++;
      if (n_srecv != NEV || n_vrecv != NEV) begin
        failures++;
        $display("FAIL: phase %0d sent %0d, got %0d fields %0d scores", phase, NEV, n_vrecv, n_srecv);
      end
    end
    // latency within what the paper reports for its pipeline
    checks++;
    if (LATENCY > PAPER_LAT_MAX) failures++;
    // every mechanism seen
    begin
      int cnt [12];
      string nm [12];
      cnt = '{n_cfg, n_reconf, n_relu1, n_relu2, n_dsat, n_ssat, n_fire, n_quiet, n_met_eta, n_b2b, n_gap,
              n_hgq_nz};
      nm  = '{"config_write", "reconfigure", "relu_clip_l1", "relu_clip_l2", "dense_saturate",
              "score_saturate", "trigger_fire", "trigger_quiet", "met_eta_zeroed", "back_to_back", "idle_gap",
              "sparse_weights"};
      for (int i = 0; i < 12; i++) begin
        checks++;
        $display("mechanism %-15s %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL: mechanism %s never happened", nm[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
