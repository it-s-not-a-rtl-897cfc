// fad_preprocess: builds the 58-word network input from one event.
//
// The event arrives as a 19 x 3 tensor of signed fixed-point words: rows
// 0-3 muons, 4-7 electrons, 8-17 jets, 18 missing transverse energy (MET);
// columns pT, eta, phi. Empty object slots are expected to be zero-padded by
// the source. The tensor is flattened row-major (index = row*3 + column).
// Each of the 57 features is standard-scaled as (x - mean) >>> shift, i.e.
// the division by the standard deviation is a power-of-two arithmetic right
// shift; the result is saturated to DW bits. The MET eta slot (index 55) is
// forced to zero. Word 57 is the flow time input, the constant T_VAL
// (t = 1 in the activation format), the point at which the vector field is
// evaluated for the anomaly score.
//
// Latency 1 cycle (registered output), initiation interval 1; out_valid is
// in_valid delayed by one cycle.
//
// From the paper: the object list and ordering, MET eta set to zero, the
// flattening to 57 features, standard scaling done by subtraction and
// bit shift, the extra input t and the choice t = 1. This design's own
// choices: the flattening order, the input format, right shifts only (no
// left shift), rounding toward minus infinity and saturation.
module fad_preprocess #(
  parameter int N_OBJ  = fad_pkg::N_OBJ,
  parameter int N_FEAT = fad_pkg::N_FEAT,
  parameter int DW     = fad_pkg::DW,
  parameter int DF     = fad_pkg::DF,
  parameter int SHW    = fad_pkg::SHW,
  parameter int ZERO_IDX = (N_OBJ - 1) * N_FEAT + 1,  // MET eta
  parameter logic signed [DW-1:0] T_VAL = DW'(1 << DF)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [DW-1:0]  feat  [N_OBJ][N_FEAT],
  input  logic signed [DW-1:0]  mean  [N_OBJ*N_FEAT],
  input  logic        [SHW-1:0] shift [N_OBJ*N_FEAT],
  output logic                  out_valid,
  output logic signed [DW-1:0]  z     [N_OBJ*N_FEAT+1]
);

  localparam int NX = N_OBJ * N_FEAT;
  localparam logic signed [DW:0] MAXV = (DW+1)'((1 << (DW - 1)) - 1);
  localparam logic signed [DW:0] MINV = -(DW+1)'(1 << (DW - 1));

  always_ff @(posedge clk) begin
    for (int r = 0; r < N_OBJ; r++) begin
      for (int c = 0; c < N_FEAT; c++) begin
        logic signed [DW:0] d;
        d = ((DW+1)'(feat[r][c]) - (DW+1)'(mean[r*N_FEAT+c])) >>> shift[r*N_FEAT+c];
        if (r * N_FEAT + c == ZERO_IDX) z[r*N_FEAT+c] <= '0;
        else if (d > MAXV)              z[r*N_FEAT+c] <= MAXV[DW-1:0];
        else if (d < MINV)              z[r*N_FEAT+c] <= MINV[DW-1:0];
        else                            z[r*N_FEAT+c] <= d[DW-1:0];
      end
    end
    z[NX] <= T_VAL;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
