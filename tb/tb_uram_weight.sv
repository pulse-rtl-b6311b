// tb_uram_weight: writes all weights in random order, reads them back in
// random order and checks value and one-cycle read latency. Also checks
// that two neighbouring weights share one 72-bit row, the even one in bits
// [31:0] and the odd one in bits [63:32].
module tb_uram_weight;
  localparam int NW = 37;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [NW];
  int checks = 0, failures = 0;

  uram_weight #(.NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[NW];
    for (int i = 0; i < NW; i++) order[i] = i;
    order.shuffle();
    repeat (2) @(posedge clk);
    foreach (order[k]) begin
      @(negedge clk);
      we = 1; waddr = 6'(order[k]); wdata = $urandom; model[order[k]] = wdata;
    end
    @(negedge clk); we = 0;
    order.shuffle();
    foreach (order[k]) begin
      @(negedge clk); re = 1; raddr = 6'(order[k]);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[order[k]]) begin
        failures++; $display("w%0d got %h want %h", order[k], rdata, model[order[k]]);
      end
    end
    for (int r = 0; r < NW / 2; r++) begin
      checks++;
      if (dut.mem[r][31:0] !== model[2*r] || dut.mem[r][63:32] !== model[2*r+1]) begin
        failures++; $display("row %0d packing wrong", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
