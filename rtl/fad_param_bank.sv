// fad_param_bank: register bank holding every run-time constant of the
// anomaly-detection pipeline: the weights and biases of the three dense
// layers, the per-feature standard-scaling mean and shift, and the trigger
// threshold.
//
// It is written one word per clock through a simple write port (cfg_we,
// cfg_addr, cfg_wdata); the address map is in fad_pkg (A_W1 ... A_THR),
// weights row-major (address = base + out*n_in + in). Each field takes the
// low bits of cfg_wdata it needs. A write takes effect at the next clock
// edge and all registers drive the datapath in parallel, so the datapath
// reads them with no latency. Reset clears everything to zero. Writes to
// addresses past A_THR are ignored (and flagged by an assertion).
//
// The paper's network has its trained weights built into the FPGA
// firmware (12-bit weights, 18-bit biases). The trained values are not
// published with it, so this design keeps the formats but loads the values
// at run time instead; that choice, the address map and the write port are
// this design's own.
module fad_param_bank
  import fad_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_wdata,
  output weight_t           w1    [N_HID][N_IN],
  output bias_t             b1    [N_HID],
  output weight_t           w2    [N_HID][N_HID],
  output bias_t             b2    [N_HID],
  output weight_t           w3    [N_OUT][N_HID],
  output bias_t             b3    [N_OUT],
  output data_t             mean  [N_X],
  output shift_t            shift [N_X],
  output score_t            thr
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_HID; o++) begin
        for (int i = 0; i < N_IN; i++)  w1[o][i] <= '0;
        for (int i = 0; i < N_HID; i++) w2[o][i] <= '0;
        b1[o] <= '0;
        b2[o] <= '0;
      end
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_HID; i++) w3[o][i] <= '0;
        b3[o] <= '0;
      end
      for (int i = 0; i < N_X; i++) begin
        mean[i]  <= '0;
        shift[i] <= '0;
      end
      thr <= '0;
    end else if (cfg_we) begin
      for (int o = 0; o < N_HID; o++) begin
        for (int i = 0; i < N_IN; i++)
          if (int'(cfg_addr) == A_W1 + o * N_IN + i) w1[o][i] <= cfg_wdata[WW-1:0];
        for (int i = 0; i < N_HID; i++)
          if (int'(cfg_addr) == A_W2 + o * N_HID + i) w2[o][i] <= cfg_wdata[WW-1:0];
        if (int'(cfg_addr) == A_B1 + o) b1[o] <= cfg_wdata[BW-1:0];
        if (int'(cfg_addr) == A_B2 + o) b2[o] <= cfg_wdata[BW-1:0];
      end
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_HID; i++)
          if (int'(cfg_addr) == A_W3 + o * N_HID + i) w3[o][i] <= cfg_wdata[WW-1:0];
        if (int'(cfg_addr) == A_B3 + o) b3[o] <= cfg_wdata[BW-1:0];
      end
      for (int i = 0; i < N_X; i++) begin
        if (int'(cfg_addr) == A_MEAN + i)  mean[i]  <= cfg_wdata[DW-1:0];
        if (int'(cfg_addr) == A_SHIFT + i) shift[i] <= cfg_wdata[SHW-1:0];
      end
      if (int'(cfg_addr) == A_THR) thr <= cfg_wdata[SW-1:0];
    end
  end

  // every write must land in the map
  a_addr_in_map: assert property (@(posedge clk) disable iff (!rst_n)
                                  cfg_we |-> int'(cfg_addr) < CFG_WORDS)
    else $error("fad_param_bank: write to unmapped address %0d", cfg_addr);

endmodule
