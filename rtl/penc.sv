// penc: priority-encoder routine that compresses a spike train into events.
//
// A loaded W-bit spike train is kept in a register. Every cycle the encoder
// presents the index of the lowest set bit as an event, and when the event
// is taken the bit-reset step clears that bit in the register, so the next
// cycle finds the next set bit. A train with k set bits thus yields k events
// in k cycles; an all-zero train costs no event cycle at all. A new train is
// accepted (in_ready) in the same cycle the last event of the current one is
// taken, so trains stream back to back. A TAG (row and channel of the train)
// travels with the train and is returned with every event.
//
// Interface: valid/ready on both sides. idle is high when no bit is left.
// From the paper: one address per cycle from an n-bit train, and the bit
// reset of the previous cycle's version of the train. Choosing the lowest
// index as "first" is this design's choice.
module penc #(
  parameter int unsigned W     = 28,
  parameter int unsigned TAG_W = 8,
  localparam int unsigned IW   = pulse_pkg::aw(W)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [W-1:0]     in_bits,
  input  logic [TAG_W-1:0] in_tag,
  output logic             ev_valid,
  input  logic             ev_ready,
  output logic [IW-1:0]    ev_idx,
  output logic [TAG_W-1:0] ev_tag,
  output logic             idle
);

  logic [W-1:0]     vec;
  logic [TAG_W-1:0] tag;
  logic [W-1:0]     remaining;

  always_comb begin
    ev_idx = '0;
    for (int i = W - 1; i >= 0; i--)
      if (vec[i]) ev_idx = IW'(i);
  end

  assign ev_valid  = |vec;
  assign ev_tag    = tag;
  // Bit reset: clear the bit whose address was just emitted.
  assign remaining = (ev_valid && ev_ready) ? (vec & (vec - W'(1))) : vec;
  assign in_ready  = (remaining == '0);
  assign idle      = (vec == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec <= '0;
      tag <= '0;
    end else if (in_valid && in_ready) begin
      vec <= in_bits;
      tag <= in_tag;
    end else begin
      vec <= remaining;
    end
  end

endmodule
