// tb_mnist_layers: one frame of the MNIST network, 28x28-32C3-32C3-P3-10C3
// followed by an FC output population of 500 neurons, 3 time steps, with
// 8/32/4/2 cores in the four layers. Its layer chain (three CONV layers,
// one FC) differs from pulse_net's, so four pulse_layer instances are
// chained here directly, with the spike RAMs between them modelled as
// arrays and the layers started one after the other. Every layer's output
// is compared with the reference model, and the event counter of the first
// layer with its input spike count times its channel groups.
module tb_mnist_layers;
  import pulse_ref_pkg::*;
  localparam int T = 3, K = 3;
  localparam int C1 = 32, C2 = 32, C3 = 10, F = 500;
  localparam int N1 = 8, N2 = 32, N3 = 4, N4 = 2;
  localparam int H0 = 28, H1 = 26, H2 = 24 / 3, H3 = H2 - K + 1;   // 28, 26, 8, 6
  localparam int M4 = (F + N4 - 1) / N4;
  localparam int D0 = T * H0, D1 = T * C1 * H1, D2 = T * C2 * H2, D3 = T * C3 * H3, D4 = T * N4;
  localparam int BETA = 32'h04CC_CCCD;
  localparam int DENS = 30;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]  start = '0, done, busy;
  logic [3:0]  re, we;
  logic [31:0] ra [4], wa [4];
  logic [255:0] rd [4], wd [4];
  logic [3:0]  w_we = '0, b_we = '0;
  logic [7:0]  cfg_nc = '0;
  logic [31:0] cfg_addr = '0, cfg_data = '0;
  logic [31:0] p_cyc [4], p_ev [4], p_st [4], p_sp [4];
  logic [255:0] ram [5][];

  // address bits above each layer's address width
  assign ra[0][31:$clog2(D0)] = '0;
  assign ra[1][31:$clog2(D1)] = '0;
  assign ra[2][31:$clog2(D2)] = '0;
  assign ra[3][31:$clog2(D3)] = '0;
  assign wa[0][31:$clog2(D1)] = '0;
  assign wa[1][31:$clog2(D2)] = '0;
  assign wa[2][31:$clog2(D3)] = '0;
  assign wa[3][31:$clog2(D4)] = '0;

  initial begin
    ram[0] = new[D0]; ram[1] = new[D1]; ram[2] = new[D2]; ram[3] = new[D3]; ram[4] = new[D4];
  end

  // spike RAMs: synchronous read for layer l from ram[l], write into ram[l+1]
  always @(posedge clk)
    for (int l = 0; l < 4; l++) begin
      if (re[l]) rd[l] <= ram[l][ra[l]];
      if (we[l]) ram[l + 1][wa[l]] <= wd[l];
    end

  pulse_layer #(.IS_FC(0), .CIN(1), .H(H0), .W(H0), .K(K), .COUT(C1), .N(N1), .P(1), .T(T))
  u_l1 (.clk, .rst_n, .start(start[0]), .done(done[0]), .busy(busy[0]),
    .in_re(re[0]), .in_raddr(ra[0][$clog2(D0)-1:0]), .in_rdata(rd[0][H0-1:0]),
    .out_we(we[0]), .out_waddr(wa[0][$clog2(D1)-1:0]), .out_wdata(wd[0][H1-1:0]),
    .cfg_w_we(w_we[0]), .cfg_b_we(b_we[0]), .cfg_nc(cfg_nc[$clog2(N1)-1:0]), .cfg_addr, .cfg_data,
    .perf_cycles(p_cyc[0]), .perf_events(p_ev[0]), .perf_stalls(p_st[0]), .perf_spikes(p_sp[0]));
  pulse_layer #(.IS_FC(0), .CIN(C1), .H(H1), .W(H1), .K(K), .COUT(C2), .N(N2), .P(3), .T(T))
  u_l2 (.clk, .rst_n, .start(start[1]), .done(done[1]), .busy(busy[1]),
    .in_re(re[1]), .in_raddr(ra[1][$clog2(D1)-1:0]), .in_rdata(rd[1][H1-1:0]),
    .out_we(we[1]), .out_waddr(wa[1][$clog2(D2)-1:0]), .out_wdata(wd[1][H2-1:0]),
    .cfg_w_we(w_we[1]), .cfg_b_we(b_we[1]), .cfg_nc(cfg_nc[$clog2(N2)-1:0]), .cfg_addr, .cfg_data,
    .perf_cycles(p_cyc[1]), .perf_events(p_ev[1]), .perf_stalls(p_st[1]), .perf_spikes(p_sp[1]));
  pulse_layer #(.IS_FC(0), .CIN(C2), .H(H2), .W(H2), .K(K), .COUT(C3), .N(N3), .P(1), .T(T))
  u_l3 (.clk, .rst_n, .start(start[2]), .done(done[2]), .busy(busy[2]),
    .in_re(re[2]), .in_raddr(ra[2][$clog2(D2)-1:0]), .in_rdata(rd[2][H2-1:0]),
    .out_we(we[2]), .out_waddr(wa[2][$clog2(D3)-1:0]), .out_wdata(wd[2][H3-1:0]),
    .cfg_w_we(w_we[2]), .cfg_b_we(b_we[2]), .cfg_nc(cfg_nc[$clog2(N3)-1:0]), .cfg_addr, .cfg_data,
    .perf_cycles(p_cyc[2]), .perf_events(p_ev[2]), .perf_stalls(p_st[2]), .perf_spikes(p_sp[2]));
  pulse_layer #(.IS_FC(1), .CIN(C3), .H(H3), .W(H3), .K(1), .OUT(F), .N(N4), .P(1), .T(T))
  u_l4 (.clk, .rst_n, .start(start[3]), .done(done[3]), .busy(busy[3]),
    .in_re(re[3]), .in_raddr(ra[3][$clog2(D3)-1:0]), .in_rdata(rd[3][H3-1:0]),
    .out_we(we[3]), .out_waddr(wa[3][$clog2(D4)-1:0]), .out_wdata(wd[3][M4-1:0]),
    .cfg_w_we(w_we[3]), .cfg_b_we(b_we[3]), .cfg_nc(cfg_nc[0:0]), .cfg_addr, .cfg_data,
    .perf_cycles(p_cyc[3]), .perf_events(p_ev[3]), .perf_stalls(p_st[3]), .perf_spikes(p_sp[3]));

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input int l, input bit is_bias, input int nc, input int addr, input int data);
    @(negedge clk);
    w_we[l] = !is_bias; b_we[l] = is_bias; cfg_nc = 8'(nc); cfg_addr = addr; cfg_data = data;
    @(negedge clk);
    w_we = '0; b_we = '0;
  endtask

  task automatic load_conv(input int l, input int CI, input int CO, input int NN,
                           input int w[], input int b[]);
    automatic int GG = (CO + NN - 1) / NN;
    for (int n = 0; n < NN; n++)
      for (int g = 0; g < GG; g++) begin
        automatic int co = g * NN + n;
        cfg_write(l, 1, n, g, co < CO ? b[co] : 0);
        for (int k = 0; k < CI * K * K; k++)
          cfg_write(l, 0, n, g * CI * K * K + k, co < CO ? w[co * CI * K * K + k] : 0);
      end
  endtask

  function automatic int fan_w(input int fanin, input int wmin);
    automatic int width = (6000 / fanin > wmin) ? 6000 / fanin : wmin;
    return rand_q(-(width * 2) / 5, width);
  endfunction

  task automatic compare(input string name, input int l, input int words, input int width,
                         input bit ref_s[]);
    automatic int bad = 0;
    for (int a = 0; a < words; a++)
      for (int x = 0; x < width; x++)
        if (ram[l][a][x] !== ref_s[a * width + x]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d bits differ", name, bad); end
  endtask

  initial begin
    bit s0[], s1[], s2[], s3[], s4[];
    int w1[], b1[], w2[], b2[], w3[], b3[], w4[], b4[];
    int k1, k2, k3, k4, nin;
    repeat (3) @(posedge clk);
    rst_n = 1;
    s0 = new[D0 * H0];
    nin = 0;
    foreach (s0[i]) begin
      s0[i] = ($urandom_range(99) < DENS);
      nin += s0[i];
    end
    w1 = new[C1 * K * K];      b1 = new[C1];
    w2 = new[C2 * C1 * K * K]; b2 = new[C2];
    w3 = new[C3 * C2 * K * K]; b3 = new[C3];
    w4 = new[C3 * H3 * H3 * F]; b4 = new[F];
    foreach (w1[i]) w1[i] = fan_w(K * K, 40);
    foreach (w2[i]) w2[i] = fan_w(C1 * K * K, 40);
    foreach (w3[i]) w3[i] = fan_w(C2 * K * K, 20);
    foreach (w4[i]) w4[i] = fan_w(C3 * H3 * H3, 40);
    foreach (b1[i]) b1[i] = rand_q(-50, 50);
    foreach (b2[i]) b2[i] = rand_q(-50, 50);
    foreach (b3[i]) b3[i] = rand_q(-50, 50);
    foreach (b4[i]) b4[i] = rand_q(-50, 50);
    conv_ref(T, 1, H0, H0, K, C1, 1, BETA, s0, w1, b1, s1, k1);
    conv_ref(T, C1, H1, H1, K, C2, 3, BETA, s1, w2, b2, s2, k2);
    conv_ref(T, C2, H2, H2, K, C3, 1, BETA, s2, w3, b3, s3, k3);
    fc_ref(T, C3 * H3 * H3, F, N4, M4, BETA, s3, w4, b4, s4, k4);
    $display("reference spikes in %0d, L1 %0d, L2 %0d, L3 %0d, L4 %0d", nin, k1, k2, k3, k4);
    load_conv(0, 1, C1, N1, w1, b1);
    load_conv(1, C1, C2, N2, w2, b2);
    load_conv(2, C2, C3, N3, w3, b3);
    for (int n = 0; n < N4; n++)
      for (int jj = 0; jj < M4; jj++) begin
        automatic int j = n * M4 + jj;
        cfg_write(3, 1, n, jj, j < F ? b4[j] : 0);
        for (int i = 0; i < C3 * H3 * H3; i++)
          cfg_write(3, 0, n, i * M4 + jj, j < F ? w4[i * F + j] : 0);
      end
    for (int a = 0; a < D0; a++)
      for (int x = 0; x < H0; x++) ram[0][a][x] = s0[a * H0 + x];
    for (int l = 0; l < 4; l++) begin
      @(negedge clk); start[l] = 1;
      @(negedge clk); start[l] = 0;
      wait (done[l]);
      @(negedge clk);
      $display("  layer %0d: %0d cycles, %0d events, %0d stalls, %0d spikes", l + 1,
               p_cyc[l], p_ev[l], p_st[l], p_sp[l]);
      checks++;
      if (p_sp[l] == 0) begin failures++; $display("layer %0d never fired", l + 1); end
    end
    compare("layer 1", 1, D1, H1, s1);
    compare("layer 2", 2, D2, H2, s2);
    compare("layer 3", 3, D3, H3, s3);
    compare("layer 4", 4, D4, M4, s4);
    checks++;
    // each input spike is compressed once per channel group
    if (int'(p_ev[0]) != C1 / N1 * nin) begin
      failures++; $display("L1 events %0d want %0d", p_ev[0], C1 / N1 * nin);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
