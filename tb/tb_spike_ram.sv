// tb_spike_ram: writes random words to random addresses, then reads every
// written address back and checks the data arrive one cycle after the read.
module tb_spike_ram;
  localparam int WIDTH = 13, DEPTH = 40;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  spike_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      automatic logic [WIDTH-1:0] d = WIDTH'($urandom);
      @(negedge clk); we = 1; waddr = 6'(a); wdata = d;
      model[a] = d; written[a] = 1;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      if (!written[a]) continue;
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("addr %0d: got %h want %h", a, rdata, model[a]);
      end
      // data hold while re is low
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
