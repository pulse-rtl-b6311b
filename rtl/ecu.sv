// ecu: Event Control Unit of a PULSE layer, the controller that runs the
// event-driven convolution loop for all neural cores at once.
//
// For each output-channel group g (the N cores take channels g*N+n) and
// each spatial chunk of CR output rows of that group, the controller
//   1. clears the membrane RAMs (NM = CR*OW cycles);
//   2. for each time step t, fetches every spike-train word of the input
//      (channel c, row r) that can reach the chunk (rows cbase to
//      cbase+CR+K-2) from the input spike RAM and hands it to the
//      priority encoder (penc). The encoder writes one event per set bit
//      into the Spike Events queue (spike_events), and the address
//      generator (addr_gen) expands each event into neuron/weight addresses
//      that are broadcast to the cores as NC_ACC operations. Fetching,
//      compression and accumulation run concurrently; a full queue stalls
//      the encoder, and an empty word costs one fetch cycle;
//   3. once every word of step t is fetched and all events have drained,
//      runs the activation phase: it broadcasts NC_ACT for every neuron in
//      row-major order, P rows at a time, and after each group of P rows
//      waits until the cores' pipelines and the max-pooling drain are idle.
// Then it moves to the next time step and, after T steps, to the next chunk
// and then the next group. With CR = OH (the default) there is one chunk.
// FC layers run the same loop with G = 1 and the M local neurons as one
// output row. done pulses for one cycle at the end.
//
// The loop order (channel group, time step, input channel, event,
// coefficient; then bias, threshold and leak per neuron) is Algorithm 1 of
// the paper, as are the overlap of compression with accumulation and the
// broadcast of addresses to all cores, and the spatial chunking of the
// output map (a core finishes all time steps of one chunk before moving to
// the next, so its membrane RAM needs only CR rows). The clear phase, the word layout,
// the fetch buffer and the per-P-rows activation wait are this design's
// own choices.
module ecu #(
  parameter bit          IS_FC    = 1'b0,
  parameter int unsigned CIN      = 1,
  parameter int unsigned H        = 28,
  parameter int unsigned W        = 28,
  parameter int unsigned K        = 3,
  parameter int unsigned G        = 2,
  parameter int unsigned M        = 1,
  parameter int unsigned T        = 8,
  parameter int unsigned P        = 2,
  parameter int unsigned EV_DEPTH = 16,
  parameter int unsigned CR       = IS_FC ? 1 : H - K + 1,  // output rows per chunk
  localparam int unsigned OH    = IS_FC ? 1 : H - K + 1,
  localparam int unsigned OW    = IS_FC ? M : W - K + 1,
  localparam int unsigned NM    = CR * OW,
  localparam int unsigned NW    = IS_FC ? CIN * H * W * M : G * CIN * K * K,
  localparam int unsigned NB    = IS_FC ? M : G,
  localparam int unsigned WORDS = T * CIN * H,
  localparam int unsigned RAW   = pulse_pkg::aw(WORDS),
  localparam int unsigned CW    = pulse_pkg::aw(CIN),
  localparam int unsigned RW    = pulse_pkg::aw(H),
  localparam int unsigned IW    = pulse_pkg::aw(W),
  localparam int unsigned GW    = pulse_pkg::aw(G),
  localparam int unsigned TW    = pulse_pkg::aw(T),
  localparam int unsigned NAW   = pulse_pkg::aw(NM),
  localparam int unsigned WAW   = pulse_pkg::aw(NW),
  localparam int unsigned BAW   = pulse_pkg::aw(NB),
  localparam int unsigned ORW   = pulse_pkg::aw(OH),
  localparam int unsigned OCW   = pulse_pkg::aw(OW),
  localparam int unsigned ARW   = pulse_pkg::aw(OH + 1),
  localparam int unsigned TAG_W = ORW + OCW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  output logic               busy,
  // input spike RAM read port (data one cycle after rd_en)
  output logic               rd_en,
  output logic [RAW-1:0]     rd_addr,
  input  logic [W-1:0]       rd_data,
  // broadcast to the neural cores
  output pulse_pkg::nc_op_e  nc_op,
  output logic [NAW-1:0]     nc_naddr,
  output logic [WAW-1:0]     nc_waddr,
  output logic [BAW-1:0]     nc_baddr,
  output logic [TAG_W-1:0]   nc_tag,
  input  logic               nc_busy,
  input  logic               mp_busy,
  // position in the loop
  output logic [GW-1:0]      cur_g,
  output logic [ORW-1:0]     cur_cbase,
  output logic [TW-1:0]      cur_t,
  // event statistics
  output logic               ev_fire,
  output logic               ev_stall
);
  import pulse_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_ACC, S_ACT, S_ACT_WAIT, S_DONE} state_e;
  state_e state;

  // ---- counters ----------------------------------------------------------
  logic [NAW-1:0] clr_n;
  logic [CW-1:0]  fc;      // fetch channel
  logic [RW-1:0]  fr;      // fetch row
  logic           fetch_done;
  logic [ARW-1:0] arow;    // counts to OH
  int unsigned    rlo, rhi, aend;
  logic [OCW-1:0] acol;

  // ---- fetch buffer -----------------------------------------------------
  logic           rd_pending;
  logic [CW+RW-1:0] rd_tag;
  logic           wb_valid;
  logic [W-1:0]   wb_data;
  logic [CW+RW-1:0] wb_tag;
  logic           src_valid;
  logic [W-1:0]   src_data;
  logic [CW+RW-1:0] src_tag;
  logic           consume, issue;

  // ---- encoder / queue / generator --------------------------------------
  logic           pe_ready, pe_ev_valid, pe_ev_ready, pe_idle;
  logic [IW-1:0]  pe_idx;
  logic [CW+RW-1:0] pe_tag;
  logic           q_pop_valid, q_pop_ready;
  logic [CW+RW+IW-1:0] q_pop_data;
  logic [pulse_pkg::aw(EV_DEPTH):0] q_count;
  logic           ag_valid, ag_busy;
  logic [NAW-1:0] ag_naddr;
  logic [WAW-1:0] ag_waddr;
  logic           acc_drained;

  assign src_valid = wb_valid || rd_pending;
  assign src_data  = wb_valid ? wb_data : rd_data;
  assign src_tag   = wb_valid ? wb_tag  : rd_tag;
  assign consume   = src_valid && pe_ready;
  assign issue     = (state == S_ACC) && !fetch_done &&
                     ((!wb_valid && !rd_pending) || consume);
  assign rd_en     = issue;
  assign rd_addr   = RAW'((int'(cur_t) * CIN + int'(fc)) * H + int'(fr));

  // Input rows that reach the current chunk, and the chunk's last row + 1.
  always_comb begin
    rlo  = IS_FC ? 0 : int'(cur_cbase);
    rhi  = (IS_FC || int'(cur_cbase) + CR + K - 2 > H - 1) ? H - 1 : int'(cur_cbase) + CR + K - 2;
    aend = (int'(cur_cbase) + CR > OH) ? OH : int'(cur_cbase) + CR;
  end

  if (!IS_FC && CR < OH && CR % P != 0) begin : g_bad_chunk
    $error("chunk rows CR must be a multiple of the pooling size P");
  end

  penc #(.W(W), .TAG_W(CW + RW)) u_penc (
    .clk     (clk),
    .rst_n   (rst_n),
    .in_valid(src_valid),
    .in_ready(pe_ready),
    .in_bits (src_data),
    .in_tag  (src_tag),
    .ev_valid(pe_ev_valid),
    .ev_ready(pe_ev_ready),
    .ev_idx  (pe_idx),
    .ev_tag  (pe_tag),
    .idle    (pe_idle)
  );

  spike_events #(.WIDTH(CW + RW + IW), .DEPTH(EV_DEPTH)) u_events (
    .clk       (clk),
    .rst_n     (rst_n),
    .push_valid(pe_ev_valid),
    .push_ready(pe_ev_ready),
    .push_data ({pe_tag, pe_idx}),
    .pop_valid (q_pop_valid),
    .pop_ready (q_pop_ready),
    .pop_data  (q_pop_data),
    .count     (q_count)
  );

  addr_gen #(.IS_FC(IS_FC), .CIN(CIN), .H(H), .W(W), .K(K), .G(G), .M(M), .CR(CR)) u_ag (
    .clk      (clk),
    .rst_n    (rst_n),
    .grp      (cur_g),
    .cbase    (cur_cbase),
    .ev_valid (q_pop_valid),
    .ev_ready (q_pop_ready),
    .ev_cin   (q_pop_data[RW+IW +: CW]),
    .ev_row   (q_pop_data[IW +: RW]),
    .ev_col   (q_pop_data[0 +: IW]),
    .out_valid(ag_valid),
    .out_naddr(ag_naddr),
    .out_waddr(ag_waddr),
    .busy     (ag_busy)
  );

  assign ev_fire  = pe_ev_valid && pe_ev_ready;
  assign ev_stall = pe_ev_valid && !pe_ev_ready;

  assign acc_drained = fetch_done && !rd_pending && !wb_valid && pe_idle &&
                       (q_count == '0) && !ag_busy && !nc_busy;

  // ---- broadcast --------------------------------------------------------
  always_comb begin
    nc_op    = NC_NOP;
    nc_naddr = '0;
    nc_waddr = '0;
    nc_baddr = '0;
    nc_tag   = {ORW'(arow), acol};
    unique case (state)
      S_CLR: begin
        nc_op    = NC_CLR;
        nc_naddr = clr_n;
      end
      S_ACC: begin
        nc_op    = ag_valid ? NC_ACC : NC_NOP;
        nc_naddr = ag_naddr;
        nc_waddr = ag_waddr;
      end
      S_ACT: begin
        nc_op    = NC_ACT;
        nc_naddr = NAW'((int'(arow) - int'(cur_cbase)) * OW + int'(acol));
        nc_baddr = IS_FC ? BAW'(acol) : BAW'(cur_g);
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  // ---- control ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      cur_g      <= '0;
      cur_cbase  <= '0;
      cur_t      <= '0;
      clr_n      <= '0;
      fc         <= '0;
      fr         <= '0;
      fetch_done <= 1'b0;
      arow       <= '0;
      acol       <= '0;
      rd_pending <= 1'b0;
      rd_tag     <= '0;
      wb_valid   <= 1'b0;
      wb_data    <= '0;
      wb_tag     <= '0;
    end else begin
      done <= 1'b0;

      // fetch buffer: a read returns next cycle; park it if not consumed
      if (rd_pending && !wb_valid && !consume) begin
        wb_valid <= 1'b1;
        wb_data  <= rd_data;
        wb_tag   <= rd_tag;
      end else if (wb_valid && consume) begin
        wb_valid <= 1'b0;
        if (rd_pending) begin  // the pending read moves up
          wb_valid <= 1'b1;
          wb_data  <= rd_data;
          wb_tag   <= rd_tag;
        end
      end
      rd_pending <= issue;
      if (issue) begin
        rd_tag <= {fc, fr};
        if (int'(fr) == rhi) begin
          fr <= RW'(rlo);
          if (int'(fc) == CIN - 1) fetch_done <= 1'b1;
          else fc <= fc + 1'b1;
        end else begin
          fr <= fr + 1'b1;
        end
      end

      unique case (state)
        S_IDLE: if (start) begin
          cur_g <= '0;
          cur_cbase <= '0;
          cur_t <= '0;
          clr_n <= '0;
          state <= S_CLR;
        end
        S_CLR: begin
          clr_n <= clr_n + 1'b1;
          if (int'(clr_n) == NM - 1) begin
            fc         <= '0;
            fr         <= RW'(rlo);
            fetch_done <= 1'b0;
            state      <= S_ACC;
          end
        end
        S_ACC: if (acc_drained) begin
          arow  <= ARW'(cur_cbase);
          acol  <= '0;
          state <= S_ACT;
        end
        S_ACT: begin
          if (int'(acol) == OW - 1) begin
            acol <= '0;
            arow <= arow + 1'b1;
            if ((int'(arow) % P == P - 1) || (int'(arow) == aend - 1)) state <= S_ACT_WAIT;
          end else begin
            acol <= acol + 1'b1;
          end
        end
        S_ACT_WAIT: if (!nc_busy && !mp_busy) begin
          if (int'(arow) == aend) begin
            if (int'(cur_t) == T - 1) begin
              cur_t <= '0;
              clr_n <= '0;
              if (aend < OH) begin            // next chunk of the same group
                cur_cbase <= ORW'(aend);
                state     <= S_CLR;
              end else if (int'(cur_g) == G - 1) begin
                state <= S_DONE;
              end else begin
                cur_g     <= cur_g + 1'b1;
                cur_cbase <= '0;
                state     <= S_CLR;
              end
            end else begin
              cur_t      <= cur_t + 1'b1;
              fc         <= '0;
              fr         <= RW'(rlo);
              fetch_done <= 1'b0;
              state      <= S_ACC;
            end
          end else begin
            state <= S_ACT;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
