// fad_pkg: shared sizes, fixed-point formats, types and the configuration
// address map of the Flow v_t anomaly-detection trigger.
//
// Network shape (from the paper): a 19 x 3 event tensor (4 muons, 4 electrons,
// 10 jets, MET; each with pT, eta, phi) flattened to 57 features, plus the
// time input t, gives 58 inputs; two hidden layers of 16 ReLU units; 57
// outputs, the vector field v_t. The anomaly score is sum(v_t^2).
//
// Widths follow the paper's post-training quantisation: 18-bit activations
// and biases, 12-bit weights, 23-bit anomaly score. The split between
// integer and fractional bits is not given there and is this design's
// choice: activations/biases Q8.10, weights Q4.8, score unsigned Q15.8.
package fad_pkg;

  // ---- network shape --------------------------------------------------
  localparam int N_OBJ  = 19;               // physics objects incl. MET
  localparam int N_FEAT = 3;                // pT, eta, phi
  localparam int N_X    = N_OBJ * N_FEAT;   // 57 flattened features
  localparam int N_IN   = N_X + 1;          // 58: features + time t
  localparam int N_HID  = 16;               // hidden units per layer
  localparam int N_OUT  = N_X;              // 57: vector field components

  // object slots in the input tensor
  localparam int N_MU   = 4;
  localparam int N_EL   = 4;
  localparam int N_JET  = 10;
  localparam int MET_OBJ = N_MU + N_EL + N_JET;      // 18: last row
  localparam int MET_ETA_IDX = MET_OBJ * N_FEAT + 1; // 55: forced to zero

  // ---- fixed-point formats -------------------------------------------
  localparam int DW  = 18;  // activation / feature width
  localparam int DF  = 10;  // activation fractional bits
  localparam int WW  = 12;  // weight width
  localparam int WF  = 8;   // weight fractional bits
  localparam int BW  = 18;  // bias width (same format as activations)
  localparam int SW  = 23;  // anomaly score width (unsigned)
  localparam int SF  = 8;   // anomaly score fractional bits
  localparam int SHW = 4;   // standard-scaling shift amount width

  // time input: the field is evaluated at t = 1
  localparam logic signed [DW-1:0] T_ONE = DW'(1 << DF);

  typedef logic signed [DW-1:0]  data_t;
  typedef logic signed [WW-1:0]  weight_t;
  typedef logic signed [BW-1:0]  bias_t;
  typedef logic        [SW-1:0]  score_t;
  typedef logic        [SHW-1:0] shift_t;

  // ---- parameter bank address map (one word per address) --------------
  // weights are stored row-major: address = base + out * n_in + in
  localparam int CFG_AW    = 12;
  localparam int A_W1      = 0;
  localparam int A_B1      = A_W1   + N_HID * N_IN;    //  928
  localparam int A_W2      = A_B1   + N_HID;           //  944
  localparam int A_B2      = A_W2   + N_HID * N_HID;   // 1200
  localparam int A_W3      = A_B2   + N_HID;           // 1216
  localparam int A_B3      = A_W3   + N_OUT * N_HID;   // 2128
  localparam int A_MEAN    = A_B3   + N_OUT;           // 2185
  localparam int A_SHIFT   = A_MEAN + N_X;             // 2242
  localparam int A_THR     = A_SHIFT + N_X;            // 2299
  localparam int CFG_WORDS = A_THR + 1;                // 2300
  localparam int CFG_DW    = SW;                       // widest field: the score threshold

endpackage
