// tb_pulse_net: end-to-end test of the four-layer network at a reduced
// size (13x13x2 input, 3 and 4 channels, FC 36-10-6, 2/4/3/4 cores, 3 time
// steps, 2x2 pooling after layer 1 only, layer 1 in spatial chunks of 4
// output rows) so that several channel groups, chunks, FC padding neurons
// and a dropped pooling edge all occur. Two frames, each
// compared with the reference model at every layer.
module tb_pulse_net;
  localparam int T = 3, IN_C = 2, IN_H = 13, IN_W = 13, K = 3;
  localparam int C1 = 3, C2 = 4, F1 = 10, F2 = 6;
  localparam int N1 = 2, N2 = 4, N3 = 3, N4 = 4, P1 = 2, P2 = 1, CH1 = 4;
  localparam int W_SUM = 6000, W_MIN = 40;
  localparam int FRAMES = 2, DENS = 35;

  `include "net_tb_body.svh"

  pulse_net #(
    .T(T), .IN_C(IN_C), .IN_H(IN_H), .IN_W(IN_W), .K(K), .C1(C1), .C2(C2), .F1(F1), .F2(F2),
    .N1(N1), .N2(N2), .N3(N3), .N4(N4), .P1(P1), .P2(P2), .CH1(CH1), .EV_DEPTH(4)
  ) dut (.*);
endmodule
