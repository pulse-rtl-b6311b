// net_tb_body.svh: body of the network testbenches. The including module
// defines the network sizes as localparams (T, IN_C, IN_H, IN_W, K, C1,
// C2, F1, F2, N1..N4, P1, P2, CH1), FRAMES, DENS and the weight scale
// W_SUM / W_MIN (see fan_w), and instantiates pulse_net
// as "dut" on the signals declared here.
//
// For each frame: random input spikes, random weights and biases scaled to
// each layer's fan-in, all loaded through the network's ports; one start;
// then the output RAM is read back through the host port and every
// intermediate spike RAM is compared with the reference model
// (pulse_ref_pkg) layer by layer. Also checked: the per-layer event
// counters. Mechanisms counted, each of which must occur: encoder stalls on
// a full event queue, compression overlapping accumulation, empty spike
// trains, channel-group switches, spatial-chunk switches in layer 1 (when
// CH1 splits its map), pooled-row drains, spikes in every layer.
  import pulse_ref_pkg::*;
  localparam int H1 = (IN_H - K + 1) / P1, W1 = (IN_W - K + 1) / P1;
  localparam int H2 = (H1 - K + 1) / P2,   W2 = (W1 - K + 1) / P2;
  localparam int M3 = (F1 + N3 - 1) / N3,  M4 = (F2 + N4 - 1) / N4;
  localparam int G1 = (C1 + N1 - 1) / N1,  G2 = (C2 + N2 - 1) / N2;
  localparam int D0 = T * IN_C * IN_H, D4 = T * N4;
  localparam int NIN3 = C2 * H2 * W2, NIN4 = N3 * M3;
  localparam int BETA = 32'h04CC_CCCD;
  localparam int OH1 = IN_H - K + 1;
  localparam int CR1 = (CH1 == 0 || CH1 >= OH1) ? OH1 : CH1;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic start = 0, done, busy;
  logic in_we = 0;
  logic [$clog2(D0)-1:0] in_waddr = 0;
  logic [IN_W-1:0] in_wdata = 0;
  logic out_re = 0;
  logic [$clog2(D4)-1:0] out_raddr = 0;
  logic [M4-1:0] out_rdata;
  logic [1:0] cfg_layer = 0;
  logic cfg_w_we = 0, cfg_b_we = 0;
  logic [7:0] cfg_nc = 0;
  logic [31:0] cfg_addr = 0, cfg_data = 0;
  logic [31:0] perf_cycles [4], perf_events [4], perf_stalls [4], perf_spikes [4];

  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_empty = 0, n_gswitch = 0, n_drain = 0, n_cswitch = 0;
  int n_spk [4] = '{0, 0, 0, 0};

  initial begin
    repeat (50_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  logic [$bits(dut.u_l1.u_ecu.cur_g)-1:0] g_prev = '0;
  logic [$bits(dut.u_l1.u_ecu.cur_cbase)-1:0] c_prev = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_l1.u_ecu.ag_valid && dut.u_l1.u_ecu.ev_fire) n_overlap++;
    if (dut.u_l2.u_ecu.ag_valid && dut.u_l2.u_ecu.ev_fire) n_overlap++;
    if (dut.u_l1.u_ecu.u_penc.in_valid && dut.u_l1.u_ecu.u_penc.in_ready &&
        dut.u_l1.u_ecu.u_penc.in_bits == '0) n_empty++;
    if (dut.u_l1.u_ecu.cur_g != g_prev) n_gswitch++;
    g_prev <= dut.u_l1.u_ecu.cur_g;
    if (dut.u_l1.u_ecu.cur_cbase != c_prev) n_cswitch++;
    c_prev <= dut.u_l1.u_ecu.cur_cbase;
    if (dut.u_l1.u_mp.out_valid || dut.u_l2.u_mp.out_valid) n_drain++;
  end

  // weights in milli-units, range about W_SUM/fanin (at least W_MIN); a
  // dense layer needs a small W_MIN to keep its membrane sums inside Q3.29
  function automatic int fan_w(input int fanin);
    automatic int width = (W_SUM / fanin > W_MIN) ? W_SUM / fanin : W_MIN;
    return rand_q(-(width * 2) / 5, width);
  endfunction

  task automatic cfg_write(input int layer, input bit is_bias, input int nc, input int addr,
                           input int data);
    @(negedge clk);
    cfg_layer = 2'(layer); cfg_w_we = !is_bias; cfg_b_we = is_bias;
    cfg_nc = 8'(nc); cfg_addr = addr; cfg_data = data;
    @(negedge clk);
    cfg_w_we = 0; cfg_b_we = 0;
  endtask

  task automatic load_conv(input int layer, input int CI, input int CO, input int NN,
                           input int w[], input int b[]);
    automatic int GG = (CO + NN - 1) / NN;
    for (int n = 0; n < NN; n++)
      for (int g = 0; g < GG; g++) begin
        automatic int co = g * NN + n;
        cfg_write(layer, 1, n, g, co < CO ? b[co] : 0);
        for (int k = 0; k < CI * K * K; k++)
          cfg_write(layer, 0, n, g * CI * K * K + k, co < CO ? w[co * CI * K * K + k] : 0);
      end
  endtask

  task automatic load_fc(input int layer, input int NIN, input int OUT, input int NN,
                         input int w[], input int b[]);
    automatic int MM = (OUT + NN - 1) / NN;
    for (int n = 0; n < NN; n++)
      for (int jj = 0; jj < MM; jj++) begin
        automatic int j = n * MM + jj;
        cfg_write(layer, 1, n, jj, j < OUT ? b[j] : 0);
        for (int i = 0; i < NIN; i++)
          cfg_write(layer, 0, n, i * MM + jj, j < OUT ? w[i * OUT + j] : 0);
      end
  endtask

  // compare a spike RAM of the network with a reference map
  task automatic compare_ram(input string name, input int words, input int width,
                             input bit ref_s[], ref logic [1023:0] got []);
    automatic int bad = 0;
    for (int a = 0; a < words; a++)
      for (int x = 0; x < width; x++)
        if (got[a][x] !== ref_s[a * width + x]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d bits differ", name, bad); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      bit s0[], s1[], s2[], s3[], s4[];
      int w1[], b1[], w2[], b2[], w3[], b3[], w4[], b4[];
      int k1, k2, k3, k4, nin0, ev0;
      logic [1023:0] got [];
      s0 = new[D0 * IN_W];
      nin0 = 0;
      foreach (s0[i]) begin
        s0[i] = ($urandom_range(99) < DENS);
        if ((i / IN_W) % IN_H == 0) s0[i] = 0;   // top rows empty, as in centred images
        nin0 += s0[i];
      end
      // layer 1 compresses the input rows cb .. cb+CR1+K-2 for each chunk
      ev0 = 0;
      for (int cb = 0; cb < OH1; cb += CR1)
        foreach (s0[i])
          if ((i / IN_W) % IN_H >= cb && (i / IN_W) % IN_H <= cb + CR1 + K - 2) ev0 += G1 * s0[i];
      w1 = new[C1 * IN_C * K * K]; b1 = new[C1];
      w2 = new[C2 * C1 * K * K];   b2 = new[C2];
      w3 = new[NIN3 * F1];         b3 = new[F1];
      w4 = new[NIN4 * F2];         b4 = new[F2];
      foreach (w1[i]) w1[i] = fan_w(IN_C * K * K);
      foreach (w2[i]) w2[i] = fan_w(C1 * K * K);
      foreach (w3[i]) w3[i] = fan_w(NIN3);
      foreach (w4[i]) w4[i] = fan_w(F1);
      foreach (b1[i]) b1[i] = rand_q(-50, 50);
      foreach (b2[i]) b2[i] = rand_q(-50, 50);
      foreach (b3[i]) b3[i] = rand_q(-50, 50);
      foreach (b4[i]) b4[i] = rand_q(-50, 50);
      conv_ref(T, IN_C, IN_H, IN_W, K, C1, P1, BETA, s0, w1, b1, s1, k1);
      conv_ref(T, C1, H1, W1, K, C2, P2, BETA, s1, w2, b2, s2, k2);
      fc_ref(T, NIN3, F1, N3, M3, BETA, s2, w3, b3, s3, k3);
      fc_ref(T, NIN4, F2, N4, M4, BETA, s3, w4, b4, s4, k4);
      $display("frame %0d: reference spikes in %0d, L1 %0d, L2 %0d, L3 %0d, L4 %0d",
               f, nin0, k1, k2, k3, k4);
      load_conv(0, IN_C, C1, N1, w1, b1);
      load_conv(1, C1, C2, N2, w2, b2);
      load_fc(2, NIN3, F1, N3, w3, b3);
      load_fc(3, NIN4, F2, N4, w4, b4);
      for (int a = 0; a < D0; a++) begin
        @(negedge clk);
        in_we = 1; in_waddr = $bits(in_waddr)'(a);
        for (int x = 0; x < IN_W; x++) in_wdata[x] = s0[a * IN_W + x];
      end
      @(negedge clk); in_we = 0;
      start = 1;
      @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      // output RAM through the host port
      got = new[D4];
      for (int a = 0; a < D4; a++) begin
        out_re = 1; out_raddr = $bits(out_raddr)'(a);
        @(negedge clk);
        out_re = 0;
        got[a] = 1024'(out_rdata);
      end
      compare_ram("output (host port)", D4, M4, s4, got);
      // intermediate spike RAMs
      got = new[T * C1 * H1];
      foreach (got[a]) got[a] = 1024'(dut.u_ram1.mem[a]);
      compare_ram("layer 1 output", T * C1 * H1, W1, s1, got);
      got = new[T * C2 * H2];
      foreach (got[a]) got[a] = 1024'(dut.u_ram2.mem[a]);
      compare_ram("layer 2 output", T * C2 * H2, W2, s2, got);
      got = new[T * N3];
      foreach (got[a]) got[a] = 1024'(dut.u_ram3.mem[a]);
      compare_ram("layer 3 output", T * N3, M3, s3, got);
      // event counters: each input spike is compressed once per channel
      // group and spatial chunk it reaches
      checks++;
      if (int'(perf_events[0]) != ev0) begin
        failures++; $display("L1 events %0d want %0d", perf_events[0], ev0);
      end
      checks++;
      if (int'(perf_spikes[3]) != k4) begin
        failures++; $display("L4 spikes %0d want %0d", perf_spikes[3], k4);
      end
      for (int l = 0; l < 4; l++) begin
        n_stall += int'(perf_stalls[l]);
        n_spk[l] += int'(perf_spikes[l]);
        $display("  layer %0d: %0d cycles, %0d events, %0d stalls, %0d spikes", l + 1,
                 perf_cycles[l], perf_events[l], perf_stalls[l], perf_spikes[l]);
      end
    end
    $display("mechanisms: stalls %0d, overlap %0d, empty trains %0d, group switches %0d, chunk switches %0d, pooled-row writes %0d",
             n_stall, n_overlap, n_empty, n_gswitch, n_cswitch, n_drain);
    checks++; if (n_stall == 0)   begin failures++; $display("no encoder stall"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no compression/accumulation overlap"); end
    checks++; if (n_empty == 0)   begin failures++; $display("no empty spike train"); end
    checks++; if (G1 > 1 && n_gswitch == 0) begin failures++; $display("no channel-group switch"); end
    checks++; if (CR1 < OH1 && n_cswitch == 0) begin failures++; $display("no chunk switch"); end
    checks++; if (n_drain == 0)   begin failures++; $display("no pooled row written"); end
    for (int l = 0; l < 4; l++) begin
      checks++;
      if (n_spk[l] == 0) begin failures++; $display("layer %0d never fired", l + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
