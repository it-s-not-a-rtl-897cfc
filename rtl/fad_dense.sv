// fad_dense: fully parallel, fully pipelined fixed-point dense layer,
// y = cast(W * x + b), one input vector accepted every clock cycle.
//
// Stage 1 forms all N_OUT x N_IN products in parallel (DW x WW bits, full
// precision) and registers them. One pipelined adder tree per output
// (ceil(log2(N_IN)) register stages) sums the products of its row without
// loss. The last stage adds the bias, aligned to the product's binary point,
// drops the WF extra fractional bits by an arithmetic right shift (round
// toward minus infinity) and saturates to the DW-bit activation format.
//
// Latency: LAT = ceil(log2(N_IN)) + 2 cycles from in_valid/x to
// out_valid/y; initiation interval 1; out_valid is in_valid delayed by LAT.
// Weights and biases are static inputs, normally driven by fad_param_bank.
//
// From the paper: the layer shapes (58-16, 16-16, 16-57), 18-bit data and
// biases, 12-bit weights and II = 1. This design's own choices: the binary
// point positions, the truncating and saturating cast, and the pipelining.
module fad_dense #(
  parameter int N_IN  = fad_pkg::N_IN,
  parameter int N_OUT = fad_pkg::N_HID,
  parameter int DW    = fad_pkg::DW,   // activation width
  parameter int DF    = fad_pkg::DF,   // activation fractional bits
  parameter int WW    = fad_pkg::WW,   // weight width
  parameter int WF    = fad_pkg::WF,   // weight fractional bits
  parameter int BW    = fad_pkg::BW,   // bias width
  parameter int BF    = fad_pkg::DF    // bias fractional bits
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] x   [N_IN],
  input  logic signed [WW-1:0] w   [N_OUT][N_IN],
  input  logic signed [BW-1:0] b   [N_OUT],
  output logic                 out_valid,
  output logic signed [DW-1:0] y   [N_OUT]
);

  localparam int PW     = DW + WW;                       // product width
  localparam int LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0; // adder-tree depth
  localparam int AW     = PW + LEVELS;                   // exact row sum
  localparam int BSH    = DF + WF - BF;                  // bias alignment
  localparam int TW     = ((AW > BW + BSH) ? AW : BW + BSH) + 1;
  localparam int LAT    = LEVELS + 2;

  localparam logic signed [TW-1:0] MAXV = (TW'(1) <<< (DW - 1)) - TW'(1);
  localparam logic signed [TW-1:0] MINV = -(TW'(1) <<< (DW - 1));

  // ---- stage 1: products ----------------------------------------------
  logic signed [PW-1:0] prod [N_OUT][N_IN];

  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++)
      for (int i = 0; i < N_IN; i++)
        prod[o][i] <= PW'(x[i]) * PW'(w[o][i]);
  end

  // ---- stages 2 .. LEVELS+1: one adder tree per output -----------------
  logic signed [AW-1:0] acc [N_OUT];

  for (genvar o = 0; o < N_OUT; o++) begin : g_row
    fad_adder_tree #(.N(N_IN), .IW(PW)) u_tree (
      .clk (clk),
      .in  (prod[o]),
      .sum (acc[o])
    );
  end

  // ---- last stage: bias, cast, saturate --------------------------------
  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [TW-1:0] tot;
      logic signed [TW-1:0] q;
      tot = TW'(acc[o]) + (TW'(b[o]) <<< BSH);
      q   = tot >>> WF;
      if (q > MAXV)      y[o] <= MAXV[DW-1:0];
      else if (q < MINV) y[o] <= MINV[DW-1:0];
      else               y[o] <= q[DW-1:0];
    end
  end

  // ---- valid pipeline ---------------------------------------------------
  logic [LAT-1:0] vpipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end

  assign out_valid = vpipe[LAT-1];

endmodule
