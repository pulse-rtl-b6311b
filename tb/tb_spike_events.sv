// tb_spike_events: random pushes and pops against a queue model. Checks
// order and data of every popped entry, that count tracks the occupancy,
// and that a full queue refuses pushes.
module tb_spike_events;
  localparam int WIDTH = 12, DEPTH = 5;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  logic push_valid = 0, push_ready, pop_valid, pop_ready = 0;
  logic [WIDTH-1:0] push_data = 0, pop_data;
  logic [3:0] count;
  int checks = 0, failures = 0, full_seen = 0;
  logic [WIDTH-1:0] model[$];

  spike_events #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != model.size()) begin failures++; $display("count %0d model %0d", count, model.size()); end
    if ((model.size() == DEPTH) == push_ready) begin failures++; $display("push_ready wrong"); end
    if (model.size() == DEPTH) full_seen++;
    if (pop_valid && pop_ready) begin
      checks++;
      if (pop_data !== model[0]) begin failures++; $display("pop %h want %h", pop_data, model[0]); end
      void'(model.pop_front());
    end
    if (push_valid && push_ready) model.push_back(push_data);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      push_valid = ($urandom_range(9) < ((i / 500) % 2 ? 3 : 7));
      push_data  = WIDTH'($urandom);
      pop_ready  = ($urandom_range(9) < ((i / 500) % 2 ? 7 : 3));
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("queue never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
