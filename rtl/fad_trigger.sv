// fad_trigger: the anomaly-detection trigger decision. An event is flagged
// when its anomaly score is strictly above the programmable threshold thr;
// the threshold sets the working point (the paper quotes results at a
// background acceptance of 1e-5). Score, flag and valid are registered:
// latency 1 cycle, initiation interval 1.
//
// From the paper: a lower threshold applied on the score selects events.
// This design's own choices: strict comparison and the registered output.
module fad_trigger #(
  parameter int SW = fad_pkg::SW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [SW-1:0] score_in,
  input  logic [SW-1:0] thr,
  output logic          out_valid,
  output logic [SW-1:0] score,
  output logic          anomaly
);

  always_ff @(posedge clk) score <= score_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      anomaly   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      anomaly   <= in_valid && (score_in > thr);
    end
  end

endmodule
