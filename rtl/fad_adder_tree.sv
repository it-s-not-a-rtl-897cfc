// fad_adder_tree: pipelined binary adder tree summing N signed words.
//
// Each level adds neighbouring pairs and registers the result; an odd word
// at the end of a level is carried to the next level unchanged. The tree has
// LEVELS = ceil(log2(N)) register stages, so the sum of the words presented
// in cycle k appears on `sum` in cycle k + LEVELS. A new set of words can be
// presented every cycle (initiation interval 1). The output is IW + LEVELS
// bits wide, so no sum can overflow. There is no reset: the tree holds only
// data, whose validity is tracked by the caller.
//
// Register after every level is this design's choice; the paper gives only
// the overall latency of its HLS-generated pipeline.
module fad_adder_tree #(
  parameter int N  = 58,
  parameter int IW = 30,
  parameter int LEVELS = (N > 1) ? $clog2(N) : 0,
  parameter int OW = IW + LEVELS
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] in  [N],
  output logic signed [OW-1:0] sum
);

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    // number of partial sums alive at this level
    localparam int CNT = (N + (1 << l) - 1) >> l;
    logic signed [OW-1:0] s [CNT];

    if (l == 0) begin : g_in
      always_comb begin
        for (int i = 0; i < N; i++) s[i] = OW'(in[i]);
      end
    end else begin : g_add
      localparam int PCNT = (N + (1 << (l - 1)) - 1) >> (l - 1);
      always_ff @(posedge clk) begin
        for (int i = 0; i < CNT; i++) begin
          if (2 * i + 1 < PCNT) s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
          else                  s[i] <= g_lvl[l-1].s[2*i];
        end
      end
    end
  end

  assign sum = g_lvl[LEVELS].s[0];

endmodule
