// maxpool: max pooling of binary output feature maps, and the writer of
// the layer's output spike trains.
//
// On binary maps, max pooling over a P x P window is an OR of the window.
// The neural cores of a layer fire in lockstep, so each cycle of the
// activation phase brings N spike bits (one per core, i.e. per output
// channel) for the same neuron position (in_row, in_col), scanned row by
// row. Each bit is ORed into a row buffer of PW = OW/P bits per channel at
// column in_col/P. When the last neuron of the P-th row of a window row has
// arrived, the N pooled rows are moved to a drain buffer and written out
// one per cycle (out_valid, out_ch, out_prow, out_bits) while the row
// buffers start over. Rows and columns beyond PH*P and PW*P (the floor of
// the division) are dropped. busy is high while the drain runs; the next
// window row must not complete before it ends. P = 1 gives no pooling:
// every row is passed on as it is. The OR-window is the paper's; the row
// buffers and the drain order are this design's choices.
module maxpool #(
  parameter int unsigned N  = 16,
  parameter int unsigned OH = 26,
  parameter int unsigned OW = 26,
  parameter int unsigned P  = 2,
  localparam int unsigned PH = OH / P,
  localparam int unsigned PW = OW / P,
  localparam int unsigned RW = pulse_pkg::aw(OH),
  localparam int unsigned CW = pulse_pkg::aw(OW),
  localparam int unsigned NW = pulse_pkg::aw(N),
  localparam int unsigned PRW = pulse_pkg::aw(PH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [N-1:0]   in_spk,
  input  logic [RW-1:0]  in_row,
  input  logic [CW-1:0]  in_col,
  output logic           out_valid,
  output logic [NW-1:0]  out_ch,
  output logic [PRW-1:0] out_prow,
  output logic [PW-1:0]  out_bits,
  output logic           busy
);

  logic [PW-1:0] rowbuf   [N];
  logic [PW-1:0] drainbuf [N];
  logic [NW-1:0] didx;
  logic [PW-1:0] nxt      [N];
  logic          complete;
  int unsigned   pc;

  always_comb begin
    pc = int'(in_col) / P;
    complete = in_valid && (int'(in_col) == OW - 1) && (int'(in_row) % P == P - 1)
               && (int'(in_row) / P < PH);
    for (int n = 0; n < N; n++) begin
      nxt[n] = rowbuf[n];
      if (pc < PW && in_spk[n]) nxt[n][pc] = 1'b1;
    end
  end

  assign busy      = out_valid;
  assign out_ch    = didx;
  assign out_bits  = drainbuf[didx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) begin
        rowbuf[n]   <= '0;
        drainbuf[n] <= '0;
      end
      didx      <= '0;
      out_valid <= 1'b0;
      out_prow  <= '0;
    end else begin
      if (out_valid) begin
        if (didx == NW'(N - 1)) out_valid <= 1'b0;
        else didx <= didx + 1'b1;
      end
      if (in_valid && int'(in_row) / P < PH) begin
        for (int n = 0; n < N; n++) begin
          if (complete) begin
            drainbuf[n] <= nxt[n];
            rowbuf[n]   <= '0;
          end else begin
            rowbuf[n]   <= nxt[n];
          end
        end
      end
      if (complete) begin
        out_valid <= 1'b1;
        didx      <= '0;
        out_prow  <= PRW'(int'(in_row) / P);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) complete |-> !out_valid || didx == NW'(N - 1));

endmodule
