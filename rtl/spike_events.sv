// spike_events: the Spike Events register array between the priority
// encoder and address generation.
//
// A first-in first-out queue of DEPTH registers. Because it decouples the
// two routines, the encoder can compress the next spike trains while the
// address generator still expands earlier events, which is how the
// compression and accumulation phases overlap. When the queue is full the
// encoder stalls (push_ready low). push and pop use valid/ready; a push and
// a pop may happen in the same cycle. The paper gives the register array and
// the overlap; making it a FIFO and its depth are this design's choices.
module spike_events #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = pulse_pkg::aw(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [WIDTH-1:0] push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [WIDTH-1:0] pop_data,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] regs [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign push_ready = (count < (AW+1)'(DEPTH));
  assign pop_valid  = (count != '0);
  assign pop_data   = regs[rp];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  always_ff @(posedge clk) begin
    if (do_push) regs[wp] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
