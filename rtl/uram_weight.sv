// uram_weight: FC weight store laid out like an UltraRAM tile.
//
// The FPGA's UltraRAM rows are 72 bits wide, so two 32-bit weights of
// neighbouring FC neurons share one row: weight a lives in row a/2, in bits
// [31:0] when a is even and [63:32] when a is odd. Bits [71:64] are not used.
// Reads are synchronous: rdata is the weight addressed in the previous cycle
// (held while re is low). The write port writes one 32-bit half of a row,
// leaving the other half alone. The 72-bit row and the pairing are from the
// paper; the bit positions inside the row are this design's choice. Written
// as an array so that synthesis maps it onto whatever RAM the target offers.
module uram_weight #(
  parameter int unsigned NW = 25600,
  localparam int unsigned ROWS = pulse_pkg::cdiv(NW, 2),
  localparam int unsigned AW = pulse_pkg::aw(NW),
  localparam int unsigned RAW = pulse_pkg::aw(ROWS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);

  logic [71:0] mem [ROWS];
  logic [71:0] row_q;
  logic        half_q;

  always_ff @(posedge clk) begin
    if (we) begin
      if (waddr[0]) mem[RAW'(waddr >> 1)][63:32] <= wdata;
      else          mem[RAW'(waddr >> 1)][31:0]  <= wdata;
    end
    if (re) begin
      row_q  <= mem[RAW'(raddr >> 1)];
      half_q <= raddr[0];
    end
  end

  assign rdata = half_q ? row_q[63:32] : row_q[31:0];

endmodule
