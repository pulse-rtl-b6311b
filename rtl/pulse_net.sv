// pulse_net: a four-layer PULSE accelerator, CONV - CONV - FC - FC, with
// one spike RAM in front of, between and after the layers.
//
// Defaults are the FashionMNIST network of the evaluation:
// 28x28 input, 32C3 - MP2 - 32C3 - MP2 - 256 - output population of 600
// neurons, 8 time steps, with 16, 32, 8 and 8 neural cores in the four
// layers. Each layer is a pulse_layer whose size and core count are
// parameters, so the hardware of every layer can be matched to its own
// spike workload. Convolutions are unpadded (28 -> 26 -> pool 13 -> 11 ->
// pool 5), so the first FC layer sees 32 x 5 x 5 = 800 inputs.
//
// Operation: the host writes the rate-coded input spike trains into the
// input RAM (word (t*IN_C + c)*IN_H + r, bit = column) and the weights and
// biases through the cfg port (cfg_layer selects the layer, cfg_nc the
// core; addresses as documented in pulse_layer), then pulses start. The
// layers run one after the other on the frame; done pulses when the last
// layer has written its output spikes, which the host reads through the
// out_* port: word t*N4 + n holds the spikes of output neurons n*M4 ..
// n*M4+M4-1 at time step t. Per-layer performance counters give cycles,
// spike events, encoder stalls and output spikes of the last frame.
//
// The layer chain, the core counts and the sizes are the paper's; the
// strict layer-after-layer order within a frame, the host ports and the
// memory layouts are this design's choices.
module pulse_net #(
  parameter int unsigned T    = 8,
  parameter int unsigned IN_C = 1,
  parameter int unsigned IN_H = 28,
  parameter int unsigned IN_W = 28,
  parameter int unsigned K    = 3,
  parameter int unsigned C1   = 32,
  parameter int unsigned C2   = 32,
  parameter int unsigned F1   = 256,
  parameter int unsigned F2   = 600,
  parameter int unsigned N1   = 16,
  parameter int unsigned N2   = 32,
  parameter int unsigned N3   = 8,
  parameter int unsigned N4   = 8,
  parameter int unsigned P1   = 2,
  parameter int unsigned P2   = 2,
  parameter int unsigned CH1  = 0,  // output rows per spatial chunk of layer 1/2 (0 = whole map)
  parameter int unsigned CH2  = 0,
  parameter int unsigned EV_DEPTH = 16,
  // derived sizes
  localparam int unsigned H1  = (IN_H - K + 1) / P1,   // layer-2 input
  localparam int unsigned W1  = (IN_W - K + 1) / P1,
  localparam int unsigned H2  = (H1 - K + 1) / P2,     // layer-3 input
  localparam int unsigned W2  = (W1 - K + 1) / P2,
  localparam int unsigned M3  = pulse_pkg::cdiv(F1, N3),
  localparam int unsigned M4  = pulse_pkg::cdiv(F2, N4),
  localparam int unsigned D0  = T * IN_C * IN_H,
  localparam int unsigned D1  = T * C1 * H1,
  localparam int unsigned D2  = T * C2 * H2,
  localparam int unsigned D3  = T * N3,
  localparam int unsigned D4  = T * N4,
  localparam int unsigned A0  = pulse_pkg::aw(D0),
  localparam int unsigned A4  = pulse_pkg::aw(D4)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           done,
  output logic           busy,
  // input spike trains (host write)
  input  logic           in_we,
  input  logic [A0-1:0]  in_waddr,
  input  logic [IN_W-1:0] in_wdata,
  // output spike trains (host read, data one cycle after out_re)
  input  logic           out_re,
  input  logic [A4-1:0]  out_raddr,
  output logic [M4-1:0]  out_rdata,
  // weights and biases
  input  logic [1:0]     cfg_layer,
  input  logic           cfg_w_we,
  input  logic           cfg_b_we,
  input  logic [7:0]     cfg_nc,
  input  logic [31:0]    cfg_addr,
  input  logic [31:0]    cfg_data,
  // per-layer performance counters
  output logic [31:0]    perf_cycles [4],
  output logic [31:0]    perf_events [4],
  output logic [31:0]    perf_stalls [4],
  output logic [31:0]    perf_spikes [4]
);
  import pulse_pkg::*;

  logic [3:0] l_start, l_done, l_busy;
  logic [3:0] l_wwe, l_bwe;

  // layer read ports
  logic          r0_re, r1_re, r2_re, r3_re;
  logic [aw(D0)-1:0] r0_ra;
  logic [aw(D1)-1:0] r1_ra;
  logic [aw(D2)-1:0] r2_ra;
  logic [aw(D3)-1:0] r3_ra;
  logic [IN_W-1:0] r0_rd;
  logic [W1-1:0]   r1_rd;
  logic [W2-1:0]   r2_rd;
  logic [M3-1:0]   r3_rd;
  // layer write ports
  logic          w1_we, w2_we, w3_we, w4_we;
  logic [aw(D1)-1:0] w1_wa;
  logic [aw(D2)-1:0] w2_wa;
  logic [aw(D3)-1:0] w3_wa;
  logic [aw(D4)-1:0] w4_wa;
  logic [W1-1:0]   w1_wd;
  logic [W2-1:0]   w2_wd;
  logic [M3-1:0]   w3_wd;
  logic [M4-1:0]   w4_wd;

  // ---- sequencing: each layer starts when the one before it is done ------
  assign l_start = {l_done[2:0], start};
  assign done    = l_done[3];
  assign busy    = |l_busy;

  for (genvar l = 0; l < 4; l++) begin : g_cfg
    assign l_wwe[l] = cfg_w_we && (cfg_layer == 2'(l));
    assign l_bwe[l] = cfg_b_we && (cfg_layer == 2'(l));
  end

  // ---- spike RAMs ---------------------------------------------------------
  spike_ram #(.WIDTH(IN_W), .DEPTH(D0)) u_ram0 (
    .clk(clk), .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .re(r0_re), .raddr(r0_ra), .rdata(r0_rd));
  spike_ram #(.WIDTH(W1), .DEPTH(D1)) u_ram1 (
    .clk(clk), .we(w1_we), .waddr(w1_wa), .wdata(w1_wd),
    .re(r1_re), .raddr(r1_ra), .rdata(r1_rd));
  spike_ram #(.WIDTH(W2), .DEPTH(D2)) u_ram2 (
    .clk(clk), .we(w2_we), .waddr(w2_wa), .wdata(w2_wd),
    .re(r2_re), .raddr(r2_ra), .rdata(r2_rd));
  spike_ram #(.WIDTH(M3), .DEPTH(D3)) u_ram3 (
    .clk(clk), .we(w3_we), .waddr(w3_wa), .wdata(w3_wd),
    .re(r3_re), .raddr(r3_ra), .rdata(r3_rd));
  spike_ram #(.WIDTH(M4), .DEPTH(D4)) u_ram4 (
    .clk(clk), .we(w4_we), .waddr(w4_wa), .wdata(w4_wd),
    .re(out_re), .raddr(out_raddr), .rdata(out_rdata));

  // ---- layers -------------------------------------------------------------
  pulse_layer #(
    .IS_FC(1'b0), .CIN(IN_C), .H(IN_H), .W(IN_W), .K(K), .COUT(C1), .OUT(1),
    .N(N1), .P(P1), .T(T), .EV_DEPTH(EV_DEPTH), .CHUNK_ROWS(CH1)
  ) u_l1 (
    .clk(clk), .rst_n(rst_n), .start(l_start[0]), .done(l_done[0]), .busy(l_busy[0]),
    .in_re(r0_re), .in_raddr(r0_ra), .in_rdata(r0_rd),
    .out_we(w1_we), .out_waddr(w1_wa), .out_wdata(w1_wd),
    .cfg_w_we(l_wwe[0]), .cfg_b_we(l_bwe[0]), .cfg_nc(aw(N1)'(cfg_nc)),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .perf_cycles(perf_cycles[0]), .perf_events(perf_events[0]),
    .perf_stalls(perf_stalls[0]), .perf_spikes(perf_spikes[0]));

  pulse_layer #(
    .IS_FC(1'b0), .CIN(C1), .H(H1), .W(W1), .K(K), .COUT(C2), .OUT(1),
    .N(N2), .P(P2), .T(T), .EV_DEPTH(EV_DEPTH), .CHUNK_ROWS(CH2)
  ) u_l2 (
    .clk(clk), .rst_n(rst_n), .start(l_start[1]), .done(l_done[1]), .busy(l_busy[1]),
    .in_re(r1_re), .in_raddr(r1_ra), .in_rdata(r1_rd),
    .out_we(w2_we), .out_waddr(w2_wa), .out_wdata(w2_wd),
    .cfg_w_we(l_wwe[1]), .cfg_b_we(l_bwe[1]), .cfg_nc(aw(N2)'(cfg_nc)),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .perf_cycles(perf_cycles[1]), .perf_events(perf_events[1]),
    .perf_stalls(perf_stalls[1]), .perf_spikes(perf_spikes[1]));

  pulse_layer #(
    .IS_FC(1'b1), .CIN(C2), .H(H2), .W(W2), .K(1), .COUT(1), .OUT(F1),
    .N(N3), .P(1), .T(T), .EV_DEPTH(EV_DEPTH)
  ) u_l3 (
    .clk(clk), .rst_n(rst_n), .start(l_start[2]), .done(l_done[2]), .busy(l_busy[2]),
    .in_re(r2_re), .in_raddr(r2_ra), .in_rdata(r2_rd),
    .out_we(w3_we), .out_waddr(w3_wa), .out_wdata(w3_wd),
    .cfg_w_we(l_wwe[2]), .cfg_b_we(l_bwe[2]), .cfg_nc(aw(N3)'(cfg_nc)),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .perf_cycles(perf_cycles[2]), .perf_events(perf_events[2]),
    .perf_stalls(perf_stalls[2]), .perf_spikes(perf_spikes[2]));

  pulse_layer #(
    .IS_FC(1'b1), .CIN(N3), .H(1), .W(M3), .K(1), .COUT(1), .OUT(F2),
    .N(N4), .P(1), .T(T), .EV_DEPTH(EV_DEPTH)
  ) u_l4 (
    .clk(clk), .rst_n(rst_n), .start(l_start[3]), .done(l_done[3]), .busy(l_busy[3]),
    .in_re(r3_re), .in_raddr(r3_ra), .in_rdata(r3_rd),
    .out_we(w4_we), .out_waddr(w4_wa), .out_wdata(w4_wd),
    .cfg_w_we(l_wwe[3]), .cfg_b_we(l_bwe[3]), .cfg_nc(aw(N4)'(cfg_nc)),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .perf_cycles(perf_cycles[3]), .perf_events(perf_events[3]),
    .perf_stalls(perf_stalls[3]), .perf_spikes(perf_spikes[3]));

endmodule
