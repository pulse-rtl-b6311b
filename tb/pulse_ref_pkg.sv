// pulse_ref_pkg: reference model of spiking CONV and FC layers, used by the
// layer and network testbenches. It computes, frame-wise and without any
// notion of events or cores, what the hardware must produce:
//   for every output neuron and time step t
//     u += sum of weights of the input spikes of step t
//     v  = u + bias;  s = (v >= 1.0);  if s: v -= 1.0;  u = v * beta
// with 32-bit two's complement Q3.29 arithmetic (wrapping adds, product
// shifted right by 29). Spike maps are flat bit arrays whose index is
// word * width + bit in the hardware's spike-RAM layout, so they can be
// loaded into and compared with the RAMs directly.
package pulse_ref_pkg;

  localparam int ONE = 32'h2000_0000;

  function automatic int ref_leak(input int v, input int beta);
    longint p;
    p = longint'(v) * longint'(beta);
    return int'(p >>> 29);
  endfunction

  // CONV: in_s[((t*CIN+c)*H+r)*W+x], w[((co*CIN+c)*K+kr)*K+kc], b[co],
  // out_s[((t*COUT+co)*PH+pr)*PW+pc]; nspk = spikes before pooling.
  function automatic void conv_ref(input int T, input int CIN, input int H, input int W,
                                   input int K, input int COUT, input int P, input int beta,
                                   input bit in_s[], input int w[], input int b[],
                                   output bit out_s[], output int nspk);
    int OH, OW, PH, PW;
    int u[];
    OH = H - K + 1; OW = W - K + 1; PH = OH / P; PW = OW / P;
    out_s = new[T * COUT * PH * PW];
    nspk = 0;
    for (int co = 0; co < COUT; co++) begin
      u = new[OH * OW];
      foreach (u[i]) u[i] = 0;
      for (int t = 0; t < T; t++) begin
        for (int c = 0; c < CIN; c++)
          for (int r = 0; r < H; r++)
            for (int x = 0; x < W; x++)
              if (in_s[((t * CIN + c) * H + r) * W + x])
                for (int kr = 0; kr < K; kr++)
                  for (int kc = 0; kc < K; kc++)
                    if (r - kr >= 0 && r - kr < OH && x - kc >= 0 && x - kc < OW)
                      u[(r - kr) * OW + (x - kc)] += w[((co * CIN + c) * K + kr) * K + kc];
        for (int orow = 0; orow < OH; orow++)
          for (int ocol = 0; ocol < OW; ocol++) begin
            int v;
            bit s;
            v = u[orow * OW + ocol] + b[co];
            s = (v >= ONE);
            if (s) v -= ONE;
            u[orow * OW + ocol] = ref_leak(v, beta);
            if (s) begin
              nspk++;
              if (orow / P < PH && ocol / P < PW)
                out_s[((t * COUT + co) * PH + orow / P) * PW + ocol / P] = 1'b1;
            end
          end
      end
    end
  endfunction

  // FC: in_s[t*NIN+i], w[i*OUT+j], b[j]; out_s[t*N*M + j] for neuron j
  // (neurons j >= OUT are padding and stay silent).
  function automatic void fc_ref(input int T, input int NIN, input int OUT, input int N,
                                 input int M, input int beta, input bit in_s[],
                                 input int w[], input int b[],
                                 output bit out_s[], output int nspk);
    int u[];
    u = new[OUT];
    foreach (u[i]) u[i] = 0;
    out_s = new[T * N * M];
    nspk = 0;
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < NIN; i++)
        if (in_s[t * NIN + i])
          for (int j = 0; j < OUT; j++) u[j] += w[i * OUT + j];
      for (int j = 0; j < OUT; j++) begin
        int v;
        bit s;
        v = u[j] + b[j];
        s = (v >= ONE);
        if (s) begin v -= ONE; nspk++; out_s[t * N * M + j] = 1'b1; end
        u[j] = ref_leak(v, beta);
      end
    end
  endfunction

  // random Q3.29 value in [lo, hi) given in 1/1024 units of 1.0
  function automatic int rand_q(input int lo_milli, input int hi_milli);
    int r;
    r = $urandom_range(hi_milli - lo_milli - 1) + lo_milli;
    return r * (ONE / 1024) + int'($urandom_range(ONE / 1024 - 1));
  endfunction

endpackage
