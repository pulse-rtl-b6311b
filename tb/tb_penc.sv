// tb_penc: streams random spike trains (including empty ones) through the
// priority encoder with random back-pressure. Checks that the events of
// each train are its set bits in ascending order with the train's tag,
// that no event is lost or added, and that with no back-pressure a train of
// k set bits takes exactly k cycles (one event per cycle).
module tb_penc;
  localparam int W = 20, TAG_W = 6;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  logic in_valid = 0, in_ready;
  logic [W-1:0] in_bits = 0;
  logic [TAG_W-1:0] in_tag = 0;
  logic ev_valid, ev_ready = 0, idle;
  logic [4:0] ev_idx;
  logic [TAG_W-1:0] ev_tag;
  int checks = 0, failures = 0;
  int exp_idx[$], exp_tag[$];
  bit backpressure = 1;

  penc #(.W(W), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer
  always @(posedge clk) begin
    if (rst_n && ev_valid && ev_ready) begin
      checks++;
      if (exp_idx.size() == 0) begin
        failures++; $display("unexpected event %0d", ev_idx);
      end else begin
        automatic int ei = exp_idx.pop_front();
        automatic int et = exp_tag.pop_front();
        if (int'(ev_idx) != ei || int'(ev_tag) != et) begin
          failures++;
          $display("event got idx %0d tag %0d, want %0d %0d", ev_idx, ev_tag, ei, et);
        end
      end
    end
  end
  always @(negedge clk) ev_ready = backpressure ? ($urandom_range(3) != 0) : 1'b1;

  task automatic send(input logic [W-1:0] b, input int tag);
    @(negedge clk);
    in_valid = 1; in_bits = b; in_tag = TAG_W'(tag);
    for (int i = 0; i < W; i++) if (b[i]) begin exp_idx.push_back(i); exp_tag.push_back(tag); end
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [W-1:0] b;
      b = W'($urandom) & W'($urandom);
      if (n % 7 == 0) b = '0;
      send(b, n % 64);
    end
    wait (idle && exp_idx.size() == 0);
    // rate: k set bits drain in k cycles without back-pressure
    backpressure = 0;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 20; n++) begin
      logic [W-1:0] b;
      int k, cyc;
      b = W'($urandom) | 1;
      k = $countones(b);
      @(negedge clk);
      in_valid = 1; in_bits = b; in_tag = TAG_W'(n);
      for (int i = 0; i < W; i++) if (b[i]) begin exp_idx.push_back(i); exp_tag.push_back(n); end
      @(negedge clk); in_valid = 0;
      cyc = 0;
      while (!idle) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != k) begin failures++; $display("rate: %0d bits took %0d cycles", k, cyc); end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_idx.size() != 0) begin failures++; $display("%0d events missing", exp_idx.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
