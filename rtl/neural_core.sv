// neural_core: one Neural Core (NC) of a PULSE layer, a bank of leaky
// integrate-and-fire neurons for one output channel (CONV) or for M output
// neurons (FC).
//
// The core owns the membrane-potential RAM of its NM neurons, its weights
// (flip-flops for CONV; an UltraRAM-style store with two weights per 72-bit
// row for FC) and its biases. The controller broadcasts one operation per
// cycle to all cores; each core runs it on its own data:
//   NC_ACC  u[naddr] += w[waddr]                       (Accum routine)
//   NC_ACT  v = u[naddr] + b[baddr];  spike = v >= 1.0 (three-bit test);
//           if spike v -= 1.0;  u[naddr] = beta * v    (Activ routine)
//   NC_CLR  u[naddr] = 0
// Two-stage pipeline: in the issue cycle the membrane word and the weight
// are read; in the next cycle the result is written back and, for NC_ACT,
// sp_valid/sp/sp_tag give the spike. One neuron per cycle. When the
// operation in the issue stage reads the word the second stage is writing,
// the written value is forwarded, so back-to-back updates of one neuron
// are exact.
//
// Q3.29 arithmetic, the three-bit threshold test, subtraction of 1.0 and
// the order bias -> threshold -> leak follow the paper. The membrane adder
// wraps on overflow as a plain 32-bit adder would; the paper does not say
// otherwise. The forwarding path and the configuration write ports are this
// design's own.
module neural_core #(
  parameter bit          IS_FC = 1'b0,
  parameter int unsigned NM    = 676,
  parameter int unsigned NW    = 18,
  parameter int unsigned NB    = 2,
  parameter int unsigned TAG_W = 16,
  parameter logic signed [31:0] BETA = pulse_pkg::BETA_0_15,
  localparam int unsigned NAW  = pulse_pkg::aw(NM),
  localparam int unsigned WAW  = pulse_pkg::aw(NW),
  localparam int unsigned BAW  = pulse_pkg::aw(NB)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               cfg_w_we,
  input  logic [WAW-1:0]     cfg_w_addr,
  input  logic [31:0]        cfg_w_data,
  input  logic               cfg_b_we,
  input  logic [BAW-1:0]     cfg_b_addr,
  input  logic [31:0]        cfg_b_data,
  // broadcast operation from the controller
  input  pulse_pkg::nc_op_e  op,
  input  logic [NAW-1:0]     naddr,
  input  logic [WAW-1:0]     waddr,
  input  logic [BAW-1:0]     baddr,
  input  logic [TAG_W-1:0]   tag,
  // spike out (activation phase)
  output logic               sp_valid,
  output logic               sp,
  output logic [TAG_W-1:0]   sp_tag,
  output logic               busy,
  output logic               fwd_hit   // forwarding used this cycle
);
  import pulse_pkg::*;

  q3_29_t             mem [NM];
  q3_29_t             bias [NB];
  q3_29_t             rd_q, w_rd, fwd_q;
  logic               fwd_q_hit;
  nc_op_e             s1_op;
  logic [NAW-1:0]     s1_naddr;
  logic [BAW-1:0]     s1_baddr;
  logic [TAG_W-1:0]   s1_tag;

  // stage-2 results
  q3_29_t             base, v, v_rst, wr_data;
  logic               wr_en, fire;

  // ---- weights ----------------------------------------------------------
  if (IS_FC) begin : g_uram
    uram_weight #(.NW(NW)) u_w (
      .clk  (clk),
      .we   (cfg_w_we),
      .waddr(cfg_w_addr),
      .wdata(cfg_w_data),
      .re   (op == NC_ACC),
      .raddr(waddr),
      .rdata(w_rd)
    );
  end else begin : g_ff
    q3_29_t wreg [NW];
    q3_29_t w_q;
    always_ff @(posedge clk) begin
      if (cfg_w_we) wreg[cfg_w_addr] <= cfg_w_data;
      if (op == NC_ACC) w_q <= wreg[waddr];
    end
    assign w_rd = w_q;
  end

  always_ff @(posedge clk) begin
    if (cfg_b_we) bias[cfg_b_addr] <= cfg_b_data;
  end

  // ---- stage 1: read ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_op     <= NC_NOP;
      s1_naddr  <= '0;
      s1_baddr  <= '0;
      s1_tag    <= '0;
      fwd_q_hit <= 1'b0;
      fwd_q     <= '0;
    end else begin
      s1_op     <= op;
      s1_naddr  <= naddr;
      s1_baddr  <= baddr;
      s1_tag    <= tag;
      fwd_q_hit <= wr_en && (s1_naddr == naddr);
      fwd_q     <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (op == NC_ACC || op == NC_ACT) rd_q <= mem[naddr];
  end

  // ---- stage 2: compute and write back ----------------------------------
  always_comb begin
    base    = fwd_q_hit ? fwd_q : rd_q;
    v       = base + bias[s1_baddr];
    fire    = fires(v);
    v_rst   = fire ? v - Q_ONE : v;
    wr_en   = (s1_op != NC_NOP);
    unique case (s1_op)
      NC_ACC:  wr_data = base + w_rd;
      NC_ACT:  wr_data = leak(v_rst, BETA);
      default: wr_data = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[s1_naddr] <= wr_data;
  end

  assign sp_valid = (s1_op == NC_ACT);
  assign sp       = sp_valid && fire;
  assign sp_tag   = s1_tag;
  assign busy     = (s1_op != NC_NOP);
  assign fwd_hit  = fwd_q_hit && (s1_op == NC_ACC || s1_op == NC_ACT);

endmodule
