// tb_pulse_net_full: one frame through the network at its default size,
// the FashionMNIST network (28x28 input, 32C3-MP2-32C3-MP2-256-600,
// 16/32/8/8 cores, 8 time steps), with about 28 % input spike density
// (the input sparsity of that dataset is 68-76 %). Every spike RAM is
// compared with the reference model.
module tb_pulse_net_full;
  localparam int T = 8, IN_C = 1, IN_H = 28, IN_W = 28, K = 3;
  localparam int C1 = 32, C2 = 32, F1 = 256, F2 = 600;
  localparam int N1 = 16, N2 = 32, N3 = 8, N4 = 8, P1 = 2, P2 = 2, CH1 = 0;
  localparam int W_SUM = 6000, W_MIN = 40;
  localparam int FRAMES = 1, DENS = 28;

  `include "net_tb_body.svh"

  pulse_net dut (.*);
endmodule
