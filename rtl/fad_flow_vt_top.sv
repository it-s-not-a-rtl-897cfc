// fad_flow_vt_top: real-time anomaly-detection trigger built on the
// vector field of a continuous normalizing flow ("Flow v_t" score).
//
// A flow-matching network v_t(x, t) is trained to move background events
// toward a Gaussian. Events unlike the training data need a larger push, so
// the squared norm of the field at the data point, evaluated once at t = 1,
// serves as the anomaly score; no ODE has to be integrated. The pipeline:
//
//   event (19x3) -> fad_preprocess -> 58 words (57 scaled features + t)
//     -> fad_dense 58->16 -> fad_relu -> fad_dense 16->16 -> fad_relu
//     -> fad_dense 16->57  (= v_t, 57 words)
//     -> fad_sqnorm  (score = sum v_i^2, 23 bits)
//     -> fad_trigger (anomaly = score > threshold)
//
// All constants (weights, biases, scaling, threshold) live in
// fad_param_bank and are written through the cfg_* port before events are
// sent. One event is accepted every clock (initiation interval 1, no
// back-pressure). Latency from in_valid to out_valid is LATENCY = 30 cycles
// (1 + 8 + 6 + 6 + 8 + 1), i.e. 150 ns at the paper's 5 ns clock, within
// the 230 ns the paper reports for its own (HLS-generated) pipeline.
// The vector field itself is also brought out (v, v_valid) for monitoring.
//
// From the paper: the network shape, ReLU, t = 1, the score definition, the
// 18/12/23-bit formats, II = 1 at a 5 ns clock. This design's own choices:
// run-time loadable constants, binary points, casts, pipelining, threshold
// compare.
module fad_flow_vt_top
  import fad_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration write port (see fad_pkg address map)
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_wdata,
  // event input
  input  logic              in_valid,
  input  data_t             feat [N_OBJ][N_FEAT],
  // vector field at t = 1
  output logic              v_valid,
  output data_t             v    [N_OUT],
  // trigger output
  output logic              out_valid,
  output score_t            score,
  output logic              anomaly
);

  // ---- constants --------------------------------------------------------
  weight_t w1 [N_HID][N_IN];
  bias_t   b1 [N_HID];
  weight_t w2 [N_HID][N_HID];
  bias_t   b2 [N_HID];
  weight_t w3 [N_OUT][N_HID];
  bias_t   b3 [N_OUT];
  data_t   mean  [N_X];
  shift_t  shift [N_X];
  score_t  thr;

  fad_param_bank u_params (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .w1, .b1, .w2, .b2, .w3, .b3, .mean, .shift, .thr
  );

  // ---- preprocessing ----------------------------------------------------
  logic  z_valid;
  data_t z [N_IN];

  fad_preprocess #(.T_VAL(T_ONE)) u_pre (
    .clk, .rst_n, .in_valid, .feat, .mean, .shift,
    .out_valid (z_valid),
    .z         (z)
  );

  // ---- hidden layer 1 ---------------------------------------------------
  logic  h1_valid;
  data_t h1_pre [N_HID];
  data_t h1     [N_HID];

  fad_dense #(.N_IN(N_IN), .N_OUT(N_HID)) u_l1 (
    .clk, .rst_n, .in_valid (z_valid), .x (z), .w (w1), .b (b1),
    .out_valid (h1_valid), .y (h1_pre)
  );

  fad_relu #(.N(N_HID)) u_r1 (.x (h1_pre), .y (h1));

  // ---- hidden layer 2 ---------------------------------------------------
  logic  h2_valid;
  data_t h2_pre [N_HID];
  data_t h2     [N_HID];

  fad_dense #(.N_IN(N_HID), .N_OUT(N_HID)) u_l2 (
    .clk, .rst_n, .in_valid (h1_valid), .x (h1), .w (w2), .b (b2),
    .out_valid (h2_valid), .y (h2_pre)
  );

  fad_relu #(.N(N_HID)) u_r2 (.x (h2_pre), .y (h2));

  // ---- output layer: the vector field v_t --------------------------------
  fad_dense #(.N_IN(N_HID), .N_OUT(N_OUT)) u_l3 (
    .clk, .rst_n, .in_valid (h2_valid), .x (h2), .w (w3), .b (b3),
    .out_valid (v_valid), .y (v)
  );

  // ---- anomaly score and decision ---------------------------------------
  logic   s_valid;
  score_t s;

  fad_sqnorm #(.N(N_OUT)) u_norm (
    .clk, .rst_n, .in_valid (v_valid), .v (v),
    .out_valid (s_valid), .score (s)
  );

  fad_trigger u_trig (
    .clk, .rst_n, .in_valid (s_valid), .score_in (s), .thr,
    .out_valid, .score, .anomaly
  );

endmodule
