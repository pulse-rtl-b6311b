// pulse_layer: one PULSE layer engine (CONV or FC) with N neural cores.
//
// The layer reads its input spike trains from the previous layer's spike
// RAM, accumulates them event by event into the membrane potentials of N
// neural cores working in parallel on N output channels, fires the neurons
// once per time step, max-pools the binary output maps and writes them, as
// spike trains of the same layout, into the next spike RAM.
//
// CONV (IS_FC = 0): input CIN x H x W, K x K filters, COUT output channels,
// valid convolution, OH = H-K+1. With CHUNK_ROWS > 0 the output map is
// processed in spatial chunks of CHUNK_ROWS rows (a multiple of P), each
// through all T time steps, so each core's membrane RAM holds one chunk. Core n (its "offset") computes the output
// channels n, n+N, n+2N, ... one group of N channels after the other
// (G = ceil(COUT/N) groups); channels past COUT in the last group are
// computed but not written. Weights live in flip-flops in each core.
// FC (IS_FC = 1): the CIN x H x W input is flattened to i = (c*H+r)*W+col
// and core n holds the M = ceil(OUT/N) output neurons n*M .. n*M+M-1, with
// weights in an UltraRAM-style store. The FC output is written as N rows
// ("channels") of M bits, so a following FC layer reads it with
// CIN = N, H = 1, W = M. Neurons past OUT never fire.
//
// Input word for (t, c, r) at (t*CIN + c)*H + r, output word for
// (t, ch, pooled row) at (t*OC + ch)*PH + prow with OC = COUT (CONV) or N
// (FC). Configuration: cfg_w_we / cfg_b_we write weight or bias cfg_addr of
// core cfg_nc. CONV weight address ((g*CIN+c)*K+kr)*K+kc, CONV bias address
// g; FC weight address i*M+j, FC bias address j. Performance counters count
// cycles of the last run, spike events and FIFO-full stalls of the
// encoder, and output spikes (after pooling masks, before the OR).
//
// The output-channel unrolling by N, the broadcast of the controller to all
// cores and the pooling follow the paper; memory layouts, the FC neuron
// split and the configuration port are this design's own choices.
module pulse_layer #(
  parameter bit          IS_FC    = 1'b0,
  parameter int unsigned CIN      = 1,
  parameter int unsigned H        = 28,
  parameter int unsigned W        = 28,
  parameter int unsigned K        = 3,
  parameter int unsigned COUT     = 32,
  parameter int unsigned OUT      = 256,
  parameter int unsigned N        = 16,
  parameter int unsigned P        = 2,
  parameter int unsigned T        = 8,
  parameter int unsigned EV_DEPTH = 16,
  parameter int unsigned CHUNK_ROWS = 0,  // CONV output rows per chunk, 0 = whole map
  parameter logic signed [31:0] BETA = pulse_pkg::BETA_0_15,
  localparam int unsigned M      = IS_FC ? pulse_pkg::cdiv(OUT, N) : 1,
  localparam int unsigned G      = IS_FC ? 1 : pulse_pkg::cdiv(COUT, N),
  localparam int unsigned OH     = IS_FC ? 1 : H - K + 1,
  localparam int unsigned OW     = IS_FC ? M : W - K + 1,
  localparam int unsigned CR     = (IS_FC || CHUNK_ROWS == 0 || CHUNK_ROWS >= OH) ? OH : CHUNK_ROWS,
  localparam int unsigned NM     = CR * OW,
  localparam int unsigned NW     = IS_FC ? CIN * H * W * M : G * CIN * K * K,
  localparam int unsigned NB     = IS_FC ? M : G,
  localparam int unsigned OC     = IS_FC ? N : COUT,
  localparam int unsigned PH     = OH / P,
  localparam int unsigned PW     = OW / P,
  localparam int unsigned IWORDS = T * CIN * H,
  localparam int unsigned OWORDS = T * OC * PH,
  localparam int unsigned IAW    = pulse_pkg::aw(IWORDS),
  localparam int unsigned OAW    = pulse_pkg::aw(OWORDS),
  localparam int unsigned NCW    = pulse_pkg::aw(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             done,
  output logic             busy,
  // input spike RAM read port
  output logic             in_re,
  output logic [IAW-1:0]   in_raddr,
  input  logic [W-1:0]     in_rdata,
  // output spike RAM write port
  output logic             out_we,
  output logic [OAW-1:0]   out_waddr,
  output logic [PW-1:0]    out_wdata,
  // configuration
  input  logic             cfg_w_we,
  input  logic             cfg_b_we,
  input  logic [NCW-1:0]   cfg_nc,
  input  logic [31:0]      cfg_addr,
  input  logic [31:0]      cfg_data,
  // performance counters
  output logic [31:0]      perf_cycles,
  output logic [31:0]      perf_events,
  output logic [31:0]      perf_stalls,
  output logic [31:0]      perf_spikes
);
  import pulse_pkg::*;

  localparam int unsigned NAW = aw(NM);
  localparam int unsigned WAW = aw(NW);
  localparam int unsigned BAW = aw(NB);
  localparam int unsigned ORW = aw(OH);
  localparam int unsigned OCW = aw(OW);
  localparam int unsigned TAG_W = ORW + OCW;

  nc_op_e           op;
  logic [NAW-1:0]   naddr;
  logic [WAW-1:0]   waddr;
  logic [BAW-1:0]   baddr;
  logic [TAG_W-1:0] tag;
  logic [aw(G)-1:0] cur_g;
  logic [aw(T)-1:0] cur_t;
  logic             ev_fire, ev_stall;

  logic [N-1:0]     sp_valid, sp, nc_busy_v;
  logic [TAG_W-1:0] sp_tag [N];
  logic [N-1:0]     sp_masked;

  logic             mp_valid, mp_busy;
  logic [NCW-1:0]   mp_ch;
  logic [aw(PH)-1:0] mp_prow;
  logic [PW-1:0]    mp_bits;
  int unsigned      out_ch;

  ecu #(
    .IS_FC(IS_FC), .CIN(CIN), .H(H), .W(W), .K(K), .G(G), .M(M), .T(T), .P(P),
    .EV_DEPTH(EV_DEPTH), .CR(CR)
  ) u_ecu (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .done    (done),
    .busy    (busy),
    .rd_en   (in_re),
    .rd_addr (in_raddr),
    .rd_data (in_rdata),
    .nc_op   (op),
    .nc_naddr(naddr),
    .nc_waddr(waddr),
    .nc_baddr(baddr),
    .nc_tag  (tag),
    .nc_busy (|nc_busy_v),
    .mp_busy (mp_busy),
    .cur_g   (cur_g),
    .cur_cbase(),
    .cur_t   (cur_t),
    .ev_fire (ev_fire),
    .ev_stall(ev_stall)
  );

  for (genvar n = 0; n < N; n++) begin : g_nc
    neural_core #(
      .IS_FC(IS_FC), .NM(NM), .NW(NW), .NB(NB), .TAG_W(TAG_W), .BETA(BETA)
    ) u_nc (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_w_we  (cfg_w_we && cfg_nc == NCW'(n)),
      .cfg_w_addr(WAW'(cfg_addr)),
      .cfg_w_data(cfg_data),
      .cfg_b_we  (cfg_b_we && cfg_nc == NCW'(n)),
      .cfg_b_addr(BAW'(cfg_addr)),
      .cfg_b_data(cfg_data),
      .op        (op),
      .naddr     (naddr),
      .waddr     (waddr),
      .baddr     (baddr),
      .tag       (tag),
      .sp_valid  (sp_valid[n]),
      .sp        (sp[n]),
      .sp_tag    (sp_tag[n]),
      .busy      (nc_busy_v[n]),
      .fwd_hit   ()
    );
    // FC neurons past OUT (padding of the last core) never fire.
    assign sp_masked[n] = sp[n] &&
        (!IS_FC || (n * M + int'(sp_tag[0][OCW-1:0]) < OUT));
  end

  maxpool #(.N(N), .OH(OH), .OW(OW), .P(P)) u_mp (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (sp_valid[0]),
    .in_spk   (sp_masked),
    .in_row   (sp_tag[0][TAG_W-1:OCW]),
    .in_col   (sp_tag[0][OCW-1:0]),
    .out_valid(mp_valid),
    .out_ch   (mp_ch),
    .out_prow (mp_prow),
    .out_bits (mp_bits),
    .busy     (mp_busy)
  );

  assign out_ch    = IS_FC ? int'(mp_ch) : int'(cur_g) * N + int'(mp_ch);
  assign out_we    = mp_valid && (out_ch < OC);
  assign out_waddr = OAW'((int'(cur_t) * OC + out_ch) * PH + int'(mp_prow));
  assign out_wdata = mp_bits;

  // ---- performance counters ----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_cycles <= '0;
      perf_events <= '0;
      perf_stalls <= '0;
      perf_spikes <= '0;
    end else if (start && !busy) begin
      perf_cycles <= '0;
      perf_events <= '0;
      perf_stalls <= '0;
      perf_spikes <= '0;
    end else begin
      if (busy) perf_cycles <= perf_cycles + 1;
      if (ev_fire) perf_events <= perf_events + 1;
      if (ev_stall) perf_stalls <= perf_stalls + 1;
      if (sp_valid[0]) perf_spikes <= perf_spikes + 32'($countones(sp_masked));
    end
  end

endmodule
