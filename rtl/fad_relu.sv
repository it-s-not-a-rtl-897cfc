// fad_relu: element-wise rectified linear unit, y[i] = max(0, x[i]), on N
// signed DW-bit words. Purely combinational (no latency): in the top level it
// sits between the registered output of one dense layer and the product
// stage of the next. The paper uses ReLU on both hidden layers of the
// vector-field network; the activation is exact in fixed point, so there is
// no design choice here beyond placing it without a register.
module fad_relu #(
  parameter int N  = fad_pkg::N_HID,
  parameter int DW = fad_pkg::DW
) (
  input  logic signed [DW-1:0] x [N],
  output logic signed [DW-1:0] y [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) y[i] = x[i][DW-1] ? '0 : x[i];
  end

endmodule
