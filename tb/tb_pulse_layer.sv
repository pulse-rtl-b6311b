// tb_pulse_layer: end-to-end test of one CONV layer (two channel groups,
// the last one only partly used, 2x2 pooling with a dropped edge row) and
// one FC layer (output neurons not a multiple of the core count), plus a
// CONV layer run in spatial chunks of two output rows (last chunk one row),
// each against the reference model. The small event queue makes the encoder
// stall; both conditions are counted and must occur.
module tb_pulse_layer;
  logic clk = 0, rst_n = 1, go = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int c_checks, c_fail, c_stall, c_fwd, f_checks, f_fail, f_stall, f_fwd;
  int k_checks, k_fail, k_stall, k_fwd;
  logic c_fin, f_fin, k_fin;
  int checks, failures;

  layer_harness #(.IS_FC(0), .CIN(2), .H(7), .W(8), .K(3), .COUT(3), .N(2), .P(2), .T(3),
                  .EV_DEPTH(4), .FRAMES(3), .DENS(40)) h_conv (
    .clk, .rst_n, .go, .fin(c_fin), .checks(c_checks), .failures(c_fail),
    .stalls(c_stall), .fwd_hits(c_fwd));
  // CONV in spatial chunks of 2 output rows (OH = 7: chunks 0-1, 2-3, 4-5, 6)
  layer_harness #(.IS_FC(0), .CIN(2), .H(9), .W(8), .K(3), .COUT(3), .N(2), .P(2), .T(3),
                  .EV_DEPTH(4), .FRAMES(3), .DENS(40), .CHUNK_ROWS(2)) h_chunk (
    .clk, .rst_n, .go, .fin(k_fin), .checks(k_checks), .failures(k_fail),
    .stalls(k_stall), .fwd_hits(k_fwd));
  layer_harness #(.IS_FC(1), .CIN(3), .H(2), .W(2), .K(1), .COUT(1), .OUT(7), .N(3), .P(1),
                  .T(3), .EV_DEPTH(4), .FRAMES(3), .DENS(50)) h_fc (
    .clk, .rst_n, .go, .fin(f_fin), .checks(f_checks), .failures(f_fail),
    .stalls(f_stall), .fwd_hits(f_fwd));

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c_checks + f_checks + k_checks,
             c_fail + f_fail + k_fail + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); go = 1;
    wait (c_fin && f_fin && k_fin);
    checks = c_checks + f_checks + k_checks + 2;
    failures = c_fail + f_fail + k_fail;
    if (c_stall == 0) begin failures++; $display("conv layer: encoder never stalled"); end
    if (f_stall == 0) begin failures++; $display("fc layer: encoder never stalled"); end
    $display("stalls conv %0d fc %0d, forwarding conv %0d fc %0d", c_stall, f_stall, c_fwd, f_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
