// tb_ecu: runs the controller of a small CONV layer (2 input channels,
// 4x5 maps, 3x3 filters, 2 channel groups, 2 time steps) against a spike
// RAM modelled here, with the neural cores replaced by a one-cycle busy
// flag. The complete stream of broadcast operations is compared with the
// stream Algorithm 1 prescribes: per group a clear of every neuron; per
// time step the accumulations of every spike in (channel, row, column)
// order, coefficients row-major; then one activation per neuron in
// row-major order with the group's bias. Also checks RAM addresses, the
// done pulse, and the event count.
module tb_ecu;
  import pulse_pkg::*;
  localparam int CIN = 2, H = 4, W = 5, K = 3, G = 2, T = 2, P = 1;
  localparam int OH = H - K + 1, OW = W - K + 1, NM = OH * OW;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic start = 0, done, busy, rd_en, nc_busy = 0, mp_busy = 0, ev_fire, ev_stall;
  logic [4:0] rd_addr;
  logic [W-1:0] rd_data;
  nc_op_e op;
  logic [2:0] naddr;
  logic [5:0] waddr;
  logic [0:0] baddr, cur_g, cur_t;
  logic [2:0] tag;

  ecu #(.IS_FC(0), .CIN(CIN), .H(H), .W(W), .K(K), .G(G), .M(1), .T(T), .P(P), .EV_DEPTH(2)) dut (
    .clk, .rst_n, .start, .done, .busy, .rd_en, .rd_addr, .rd_data,
    .nc_op(op), .nc_naddr(naddr), .nc_waddr(waddr), .nc_baddr(baddr), .nc_tag(tag),
    .nc_busy, .mp_busy, .cur_g, .cur_t, .ev_fire, .ev_stall);

  logic [W-1:0] ram [T * CIN * H];
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= ram[rd_addr];
    nc_busy <= (op != NC_NOP);
  end

  int checks = 0, failures = 0, events = 0, nspk = 0, dones = 0;
  int e_op[$], e_n[$], e_w[$], e_b[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_fire) events++;
    if (done) dones++;
    if (rd_en && int'(rd_addr) >= T * CIN * H) begin failures++; $display("read past the RAM"); end
    if (op != NC_NOP) begin
      checks++;
      if (e_op.size() == 0) begin failures++; $display("extra op %s", op.name()); end
      else begin
        automatic int xo = e_op.pop_front(), xn = e_n.pop_front(), xw = e_w.pop_front(), xb = e_b.pop_front();
        if (int'(op) != xo || int'(naddr) != xn ||
            (xo == int'(NC_ACC) && int'(waddr) != xw) || (xo == int'(NC_ACT) && int'(baddr) != xb)) begin
          failures++;
          $display("got %s n%0d w%0d b%0d, want op%0d n%0d w%0d b%0d", op.name(), naddr, waddr, baddr, xo, xn, xw, xb);
        end
      end
    end
  end

  task automatic expect_op(input nc_op_e o, input int n, input int w, input int b);
    e_op.push_back(int'(o)); e_n.push_back(n); e_w.push_back(w); e_b.push_back(b);
  endtask

  initial begin
    foreach (ram[a]) begin
      ram[a] = W'($urandom) & W'($urandom);
      if (a == 3) ram[a] = '0;
      nspk += $countones(ram[a]);
    end
    for (int g = 0; g < G; g++) begin
      for (int n = 0; n < NM; n++) expect_op(NC_CLR, n, 0, 0);
      for (int t = 0; t < T; t++) begin
        for (int c = 0; c < CIN; c++)
          for (int r = 0; r < H; r++)
            for (int x = 0; x < W; x++)
              if (ram[(t * CIN + c) * H + r][x])
                for (int kr = 0; kr < K; kr++)
                  for (int kc = 0; kc < K; kc++)
                    if (r - kr >= 0 && r - kr < OH && x - kc >= 0 && x - kc < OW)
                      expect_op(NC_ACC, (r - kr) * OW + (x - kc), ((g * CIN + c) * K + kr) * K + kc, 0);
        for (int n = 0; n < NM; n++) expect_op(NC_ACT, n, 0, g);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (3) @(negedge clk);
    checks++;
    if (e_op.size() != 0) begin failures++; $display("%0d ops missing", e_op.size()); end
    checks++;
    if (events != G * nspk) begin failures++; $display("events %0d want %0d", events, G * nspk); end
    checks++;
    if (dones != 1 || busy) begin failures++; $display("done pulses %0d busy %0d", dones, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
