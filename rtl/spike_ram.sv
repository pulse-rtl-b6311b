// spike_ram: spike-train memory between layers (the "Spike Trains" RAM).
//
// One word holds one row of one binary feature map at one time step: bit c
// is the spike of the neuron in column c. A layer reads word
// (t*C + c)*H + r for time step t, channel c and row r. The memory is a
// simple dual-port block RAM: one synchronous write port and one read port
// whose data appear the cycle after the read is issued (rdata holds its
// value while re is low). The word layout and the port arrangement are
// choices of this design; the paper only names the RAM.
module spike_ram #(
  parameter int unsigned WIDTH = 28,
  parameter int unsigned DEPTH = 224,
  localparam int unsigned AW = pulse_pkg::aw(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
