// fad_sqnorm: the Flow v_t anomaly score, AS = sum_i v_i^2, over the N
// outputs of the vector-field network, cast to an SW-bit unsigned word.
//
// Stage 1 squares all N components in parallel at full precision (2*DW
// bits, 2*DF fractional bits). A pipelined adder tree sums the squares
// without loss. The last stage drops 2*DF - SF fractional bits (truncation)
// and saturates to the largest SW-bit value, so very anomalous events stay
// above any threshold instead of wrapping around.
//
// Latency: ceil(log2(N)) + 2 cycles, initiation interval 1; out_valid is
// in_valid delayed by the latency.
//
// From the paper: the score definition and its 23-bit cast (the paper's
// "einsum" needed at least 23 bits). This design's own choices: the binary
// point of the score (SF), exact accumulation before the cast, saturation.
module fad_sqnorm #(
  parameter int N  = fad_pkg::N_OUT,
  parameter int DW = fad_pkg::DW,
  parameter int DF = fad_pkg::DF,
  parameter int SW = fad_pkg::SW,
  parameter int SF = fad_pkg::SF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] v [N],
  output logic                 out_valid,
  output logic        [SW-1:0] score
);

  localparam int PW     = 2 * DW;
  localparam int LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int AW     = PW + LEVELS;
  localparam int DROP   = 2 * DF - SF;
  localparam int LAT    = LEVELS + 2;

  localparam logic signed [AW-1:0] MAXS = AW'((64'(1) << SW) - 64'(1));

  logic signed [PW-1:0] sq [N];
  logic signed [AW-1:0] acc;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) sq[i] <= PW'(v[i]) * PW'(v[i]);
  end

  fad_adder_tree #(.N(N), .IW(PW)) u_tree (
    .clk (clk),
    .in  (sq),
    .sum (acc)
  );

  always_ff @(posedge clk) begin
    logic signed [AW-1:0] q;
    q = acc >>> DROP;
    if (q > MAXS)              score <= '1;
    else if (q < AW'(0))       score <= '0;
    else                       score <= q[SW-1:0];
  end

  logic [LAT-1:0] vpipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end

  assign out_valid = vpipe[LAT-1];

endmodule
