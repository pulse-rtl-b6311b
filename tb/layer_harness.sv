// layer_harness: drives one pulse_layer through FRAMES random frames and
// compares every output spike-train word with pulse_ref_pkg. For each
// frame it draws input spikes (DENS percent density), weights and biases,
// loads them through the configuration port, fills the input spike RAM
// (modelled here), pulses start and waits for done. Checks: every output
// word, the spike-event counter (each input spike is compressed once per
// channel group), the output-spike counter, and the cycle count against a
// lower bound (one neuron update per cycle) and an upper bound (overlapped
// fetch, compression and accumulation). Reports through its ports.
module layer_harness #(
  parameter bit IS_FC = 1'b0,
  parameter int CIN = 2, H = 7, W = 7, K = 3, COUT = 3, OUT = 1, N = 2, P = 2, T = 3,
  parameter int EV_DEPTH = 4, FRAMES = 3, DENS = 40, CHUNK_ROWS = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures,
  output int   stalls,
  output int   fwd_hits
);
  import pulse_ref_pkg::*;
  localparam int M  = IS_FC ? (OUT + N - 1) / N : 1;
  localparam int G  = IS_FC ? 1 : (COUT + N - 1) / N;
  localparam int OH = IS_FC ? 1 : H - K + 1;
  localparam int CR = (IS_FC || CHUNK_ROWS == 0 || CHUNK_ROWS >= OH) ? OH : CHUNK_ROWS;
  localparam int NCH = (OH + CR - 1) / CR;
  localparam int OW = IS_FC ? M : W - K + 1;
  localparam int OC = IS_FC ? N : COUT;
  localparam int PH = OH / P, PW = OW / P;
  localparam int IWORDS = T * CIN * H, OWORDS = T * OC * PH;
  localparam int NIN = CIN * H * W;
  localparam int STEPS = IS_FC ? M : K * K;
  localparam int BETA = 32'h04CC_CCCD;

  logic start = 0, done, busy, in_re, out_we;
  logic [$clog2(IWORDS)-1:0] in_raddr;
  logic [W-1:0] in_rdata;
  logic [$clog2(OWORDS > 1 ? OWORDS : 2)-1:0] out_waddr;
  logic [PW-1:0] out_wdata;
  logic cfg_w_we = 0, cfg_b_we = 0;
  logic [$clog2(N > 1 ? N : 2)-1:0] cfg_nc = 0;
  logic [31:0] cfg_addr = 0, cfg_data = 0;
  logic [31:0] perf_cycles, perf_events, perf_stalls, perf_spikes;

  pulse_layer #(
    .IS_FC(IS_FC), .CIN(CIN), .H(H), .W(W), .K(K), .COUT(COUT), .OUT(OUT), .N(N),
    .P(P), .T(T), .EV_DEPTH(EV_DEPTH), .CHUNK_ROWS(CHUNK_ROWS)
  ) dut (.*);

  logic [W-1:0]  inram  [IWORDS];
  logic [PW-1:0] outram [OWORDS];
  bit            written [OWORDS];

  always_ff @(posedge clk) begin
    if (in_re) in_rdata <= inram[in_raddr];
    if (out_we) begin
      outram[out_waddr] <= out_wdata;
      written[out_waddr] <= 1'b1;
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_fwd
    always @(posedge clk) if (dut.g_nc[n].u_nc.fwd_hit) fwd_hits++;
  end

  task automatic cfg_write(input bit is_bias, input int nc, input int addr, input int data);
    @(negedge clk);
    cfg_w_we = !is_bias; cfg_b_we = is_bias;
    cfg_nc = $bits(cfg_nc)'(nc); cfg_addr = addr; cfg_data = data;
    @(negedge clk);
    cfg_w_we = 0; cfg_b_we = 0;
  endtask

  initial begin
    checks = 0; failures = 0; stalls = 0; fwd_hits = 0; fin = 0;
    wait (go);
    for (int f = 0; f < FRAMES; f++) begin
      bit in_s[], out_s[];
      int w[], b[];
      int nspk, nin_spk, nev, lo_bound, hi_bound;
      in_s = new[T * NIN];
      nin_spk = 0;
      foreach (in_s[i]) begin
        in_s[i] = ($urandom_range(99) < DENS);
        // one all-zero row per frame exercises the empty-train path
        if (i / W == 1) in_s[i] = 0;
        nin_spk += in_s[i];
      end
      if (IS_FC) begin
        w = new[NIN * OUT]; b = new[OUT];
        foreach (w[i]) w[i] = rand_q(-300, 500);
        foreach (b[i]) b[i] = rand_q(-100, 100);
        fc_ref(T, NIN, OUT, N, M, BETA, in_s, w, b, out_s, nspk);
        for (int n = 0; n < N; n++)
          for (int jj = 0; jj < M; jj++) begin
            automatic int j = n * M + jj;
            cfg_write(1, n, jj, j < OUT ? b[j] : 0);
            for (int i = 0; i < NIN; i++) cfg_write(0, n, i * M + jj, j < OUT ? w[i * OUT + j] : 0);
          end
      end else begin
        w = new[COUT * CIN * K * K]; b = new[COUT];
        foreach (w[i]) w[i] = rand_q(-250, 600);
        foreach (b[i]) b[i] = rand_q(-100, 100);
        conv_ref(T, CIN, H, W, K, COUT, P, BETA, in_s, w, b, out_s, nspk);
        for (int n = 0; n < N; n++)
          for (int g = 0; g < G; g++) begin
            automatic int co = g * N + n;
            cfg_write(1, n, g, co < COUT ? b[co] : 0);
            for (int ci = 0; ci < CIN; ci++)
              for (int kk = 0; kk < K * K; kk++)
                cfg_write(0, n, (g * CIN + ci) * K * K + kk,
                          co < COUT ? w[(co * CIN + ci) * K * K + kk] : 0);
          end
      end
      for (int a = 0; a < IWORDS; a++)
        for (int x = 0; x < W; x++) inram[a][x] = in_s[a * W + x];
      foreach (written[a]) written[a] = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      for (int a = 0; a < OWORDS; a++) begin
        checks++;
        begin
          automatic bit bad = !written[a];
          if (!written[a]) $display("frame %0d word %0d never written", f, a);
          for (int x = 0; x < PW; x++)
            if (outram[a][x] !== out_s[a * PW + x]) begin
              bad = 1;
              $display("frame %0d word %0d bit %0d got %b want %b", f, a, x, outram[a][x], out_s[a * PW + x]);
            end
          if (bad) failures++;
        end
      end
      checks++;
      // each chunk compresses the input rows cb .. cb+CR+K-2 that reach it
      nev = 0;
      for (int cb = 0; cb < OH; cb += CR)
        foreach (in_s[i])
          if (IS_FC || ((i / W) % H >= cb && (i / W) % H <= cb + CR + K - 2)) nev += G * in_s[i];
      if (int'(perf_events) != nev) begin
        failures++; $display("events %0d want %0d", perf_events, nev);
      end
      checks++;
      if (int'(perf_spikes) != nspk) begin
        failures++; $display("spikes %0d want %0d", perf_spikes, nspk);
      end
      // one neuron update per cycle: the accumulation alone needs
      // events * STEPS cycles; everything else is bounded overhead
      lo_bound = nev * STEPS + G * T * OH * OW;
      hi_bound = G * NCH * (CR * OW + T * (IWORDS / T + 8)) + nev * STEPS
               + G * T * (OH * OW + (OH / P + NCH) * (N + 4) + 8 * NCH);
      checks++;
      if (int'(perf_cycles) < lo_bound || int'(perf_cycles) > hi_bound) begin
        failures++; $display("cycles %0d outside [%0d, %0d]", perf_cycles, lo_bound, hi_bound);
      end
      stalls += int'(perf_stalls);
      $display("layer fc=%0d frame %0d: %0d input spikes, %0d output spikes, %0d cycles",
               IS_FC, f, nin_spk, nspk, perf_cycles);
    end
    fin = 1;
  end
endmodule
