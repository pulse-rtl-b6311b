// addr_gen: address generation for the accumulation phase.
//
// Each spike event (input channel cin, row, col) is expanded into the list
// of post-synaptic neurons it touches, one neuron per cycle, together with
// the address of the weight to add. In CONV mode the generator walks the
// K x K filter coefficients (kr outer, kc inner): coefficient (kr,kc) adds
// w[g][cin][kr][kc] to output neuron (row-kr, col-kc), a valid (unpadded)
// correlation, so a spike at (row,col) touches the neurons from
// (row-K+1, col-K+1) to (row,col). Coefficients whose neuron falls outside
// the OH x OW output map, or outside the current chunk of CR output rows
// starting at row cbase, still take their cycle but are not issued. The
// neuron address is relative to the chunk: (orow-cbase)*OW + ocol. In FC
// mode the generator walks the M output neurons held by each neural core;
// the weight of input i = (cin*H + row)*W + col for local neuron j is at
// i*M + j.
//
// Interface: events valid/ready in; out_valid with neuron and weight
// address out, registered (one cycle after the coefficient is stepped).
// grp is the output-channel group and cbase the first output row of the
// chunk the controller is working on; both are stable during accumulation. busy is high while an event is being
// expanded or an output is pending. Fully pipelined: one coefficient per
// cycle, events back to back with no bubble.
module addr_gen #(
  parameter bit          IS_FC = 1'b0,
  parameter int unsigned CIN   = 1,
  parameter int unsigned H     = 28,
  parameter int unsigned W     = 28,
  parameter int unsigned K     = 3,
  parameter int unsigned G     = 2,
  parameter int unsigned M     = 1,
  parameter int unsigned CR    = IS_FC ? 1 : H - K + 1,  // output rows per chunk
  localparam int unsigned OH   = IS_FC ? 1 : H - K + 1,
  localparam int unsigned OW   = IS_FC ? M : W - K + 1,
  localparam int unsigned NM   = CR * OW,
  localparam int unsigned NW   = IS_FC ? CIN * H * W * M : G * CIN * K * K,
  localparam int unsigned STEPS = IS_FC ? M : K * K,
  localparam int unsigned CW   = pulse_pkg::aw(CIN),
  localparam int unsigned RW   = pulse_pkg::aw(H),
  localparam int unsigned IW   = pulse_pkg::aw(W),
  localparam int unsigned GW   = pulse_pkg::aw(G),
  localparam int unsigned NAW  = pulse_pkg::aw(NM),
  localparam int unsigned WAW  = pulse_pkg::aw(NW),
  localparam int unsigned SW   = pulse_pkg::aw(STEPS),
  localparam int unsigned ORW  = pulse_pkg::aw(OH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [GW-1:0]  grp,
  input  logic [ORW-1:0] cbase,
  input  logic           ev_valid,
  output logic           ev_ready,
  input  logic [CW-1:0]  ev_cin,
  input  logic [RW-1:0]  ev_row,
  input  logic [IW-1:0]  ev_col,
  output logic           out_valid,
  output logic [NAW-1:0] out_naddr,
  output logic [WAW-1:0] out_waddr,
  output logic           busy
);

  logic          act;          // an event is being expanded
  logic [CW-1:0] cin_q;
  logic [RW-1:0] row_q;
  logic [IW-1:0] col_q;
  logic [SW-1:0] step;         // coefficient (CONV) or local neuron (FC)
  logic          last;

  int unsigned kr, kc, orow, ocol, na, wa;
  logic        in_map;

  assign last     = (step == SW'(STEPS - 1));
  assign ev_ready = !act || last;
  assign busy     = act || out_valid;

  always_comb begin
    kr = IS_FC ? 0 : int'(step) / K;
    kc = IS_FC ? 0 : int'(step) % K;
    orow = int'(row_q) - kr;
    ocol = int'(col_q) - kc;
    if (IS_FC) begin
      in_map = 1'b1;
      na = int'(step);
      wa = ((int'(cin_q) * H + int'(row_q)) * W + int'(col_q)) * M + int'(step);
    end else begin
      in_map = (int'(row_q) >= kr) && (orow < OH) && (int'(col_q) >= kc) && (ocol < OW)
               && (orow >= int'(cbase)) && (orow < int'(cbase) + CR);
      na = (orow - int'(cbase)) * OW + ocol;
      wa = ((int'(grp) * CIN + int'(cin_q)) * K + kr) * K + kc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act       <= 1'b0;
      step      <= '0;
      cin_q     <= '0;
      row_q     <= '0;
      col_q     <= '0;
      out_valid <= 1'b0;
      out_naddr <= '0;
      out_waddr <= '0;
    end else begin
      out_valid <= act && in_map;
      out_naddr <= NAW'(na);
      out_waddr <= WAW'(wa);
      if (ev_valid && ev_ready) begin
        act   <= 1'b1;
        step  <= '0;
        cin_q <= ev_cin;
        row_q <= ev_row;
        col_q <= ev_col;
      end else if (act) begin
        if (last) act <= 1'b0;
        else      step <= step + 1'b1;
      end
    end
  end

endmodule
