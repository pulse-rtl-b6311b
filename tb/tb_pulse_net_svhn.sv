// tb_pulse_net_svhn: one frame through the network sized for the SVHN
// network (32x32x3 input, 32C3-P2-32C3-P2-256, output population of 400,
// 32/32/3/3 cores, 18 time steps), which has the same layer chain as the
// default and differs from it only in its sizes. Input density 40 %, in the
// range of that dataset's lower input sparsity. Every spike RAM is compared
// with the reference model.
module tb_pulse_net_svhn;
  localparam int T = 18, IN_C = 3, IN_H = 32, IN_W = 32, K = 3;
  localparam int C1 = 32, C2 = 32, F1 = 256, F2 = 400;
  localparam int N1 = 32, N2 = 32, N3 = 3, N4 = 3, P1 = 2, P2 = 2, CH1 = 0;
  localparam int W_SUM = 6000, W_MIN = 6;
  localparam int FRAMES = 1, DENS = 40;

  `include "net_tb_body.svh"

  // tighter watchdog than the shared one: the frame takes about 2.8M cycles
  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("frame not finished in 10M cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pulse_net #(
    .T(T), .IN_C(IN_C), .IN_H(IN_H), .IN_W(IN_W), .K(K), .C1(C1), .C2(C2), .F1(F1), .F2(F2),
    .N1(N1), .N2(N2), .N3(N3), .N4(N4), .P1(P1), .P2(P2)
  ) dut (.*);
endmodule
