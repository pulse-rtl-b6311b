// tb_addr_gen: random spike events into a CONV and an FC address
// generator. The expected neuron and weight addresses are worked out here
// from the convolution geometry (a spike at (r,c) with coefficient (kr,kc)
// reaches output neuron (r-kr, c-kc) when it exists and lies in the current
// chunk of CR output rows; the CONV instance is run with chunks at rows 0
// and 2). Checks every issued
// address pair in order, and that each event takes exactly K*K (CONV) or
// M (FC) cycles with events back to back.
module tb_addr_gen;
  localparam int CIN = 2, H = 5, W = 6, K = 3, G = 2, M = 4;
  localparam int OH = H - K + 1, OW = W - K + 1, CR = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  // CONV instance
  logic       c_ev_valid = 0, c_ev_ready, c_out_valid, c_busy;
  logic [0:0] c_cin = 0, grp = 0;
  logic [2:0] c_row = 0, c_col = 0;
  logic [1:0] cbase = 0;
  logic [2:0] c_naddr;
  logic [5:0] c_waddr;
  // FC instance
  logic       f_ev_valid = 0, f_ev_ready, f_out_valid, f_busy;
  logic [0:0] f_cin = 0;
  logic [2:0] f_row = 0, f_col = 0;
  logic [1:0] f_naddr;
  logic [5:0] f_waddr;

  addr_gen #(.IS_FC(0), .CIN(CIN), .H(H), .W(W), .K(K), .G(G), .M(1), .CR(CR)) dut_c (
    .clk, .rst_n, .grp, .cbase, .ev_valid(c_ev_valid), .ev_ready(c_ev_ready), .ev_cin(c_cin),
    .ev_row(c_row), .ev_col(c_col), .out_valid(c_out_valid), .out_naddr(c_naddr),
    .out_waddr(c_waddr), .busy(c_busy));
  addr_gen #(.IS_FC(1), .CIN(CIN), .H(2), .W(3), .K(1), .G(1), .M(M)) dut_f (
    .clk, .rst_n, .grp(1'b0), .cbase(1'b0), .ev_valid(f_ev_valid), .ev_ready(f_ev_ready), .ev_cin(f_cin),
    .ev_row(f_row[0:0]), .ev_col(f_col[1:0]), .out_valid(f_out_valid), .out_naddr(f_naddr),
    .out_waddr(f_waddr), .busy(f_busy));

  always #5 clk = ~clk;

  int exp_n[$], exp_w[$];
  int fexp_n[$], fexp_w[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (c_out_valid) begin
      checks++;
      if (exp_n.size() == 0) begin failures++; $display("extra conv output"); end
      else begin
        automatic int en = exp_n.pop_front(), ew = exp_w.pop_front();
        if (int'(c_naddr) != en || int'(c_waddr) != ew) begin
          failures++; $display("conv got n%0d w%0d want n%0d w%0d", c_naddr, c_waddr, en, ew);
        end
      end
    end
    if (f_out_valid) begin
      checks++;
      if (fexp_n.size() == 0) begin failures++; $display("extra fc output"); end
      else begin
        automatic int en = fexp_n.pop_front(), ew = fexp_w.pop_front();
        if (int'(f_naddr) != en || int'(f_waddr) != ew) begin
          failures++; $display("fc got n%0d w%0d want n%0d w%0d", f_naddr, f_waddr, en, ew);
        end
      end
    end
  end

  initial begin
    int nev, cyc;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // CONV: 40 events back to back, group 1, 20 in each chunk
    grp = 1;
    nev = 20;
    for (int half = 0; half < 2; half++) begin
    cbase = 2'(2 * half);
    cyc = 0;
    for (int e = 0; e < nev; e++) begin
      automatic int ci = $urandom_range(CIN - 1), r = $urandom_range(H - 1), c = $urandom_range(W - 1);
      for (int kr = 0; kr < K; kr++)
        for (int kc = 0; kc < K; kc++)
          if (r - kr >= int'(cbase) && r - kr < OH && r - kr < int'(cbase) + CR
              && c - kc >= 0 && c - kc < OW) begin
            exp_n.push_back((r - kr - int'(cbase)) * OW + (c - kc));
            exp_w.push_back(((1 * CIN + ci) * K + kr) * K + kc);
          end
      c_ev_valid = 1; c_cin = 1'(ci); c_row = 3'(r); c_col = 3'(c);
      @(posedge clk);
      while (!c_ev_ready) begin @(posedge clk); cyc++; end
      cyc++;
      @(negedge clk);
    end
    c_ev_valid = 0;
    checks++;
    // first acceptance is immediate, then K*K cycles per event
    if (cyc != (nev - 1) * K * K + 1) begin
      failures++; $display("conv cycles %0d want %0d", cyc, (nev - 1) * K * K + 1);
    end
    while (c_busy) @(negedge clk);
    end
    checks++;
    if (exp_n.size() != 0) begin failures++; $display("conv missing %0d", exp_n.size()); end

    // FC: 20 events
    for (int e = 0; e < 20; e++) begin
      automatic int ci = $urandom_range(CIN - 1), r = $urandom_range(1), c = $urandom_range(2);
      for (int j = 0; j < M; j++) begin
        fexp_n.push_back(j);
        fexp_w.push_back(((ci * 2 + r) * 3 + c) * M + j);
      end
      f_ev_valid = 1; f_cin = 1'(ci); f_row = 3'(r); f_col = 3'(c);
      @(posedge clk);
      while (!f_ev_ready) @(posedge clk);
      @(negedge clk);
    end
    f_ev_valid = 0;
    while (f_busy) @(negedge clk);
    checks++;
    if (fexp_n.size() != 0) begin failures++; $display("fc missing %0d", fexp_n.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
