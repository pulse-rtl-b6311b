// tb_maxpool: feeds random binary maps of N channels, neuron by neuron in
// row-major order, into the pooling unit for P = 2 (with an odd map size,
// so the last row and column are dropped) and for P = 1. The expected
// pooled rows are the OR over each P x P window, computed here; every
// written row must match and come out in channel order, one per cycle.
module tb_maxpool;
  localparam int N = 3, OH = 5, OW = 7;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  logic in_valid = 0;
  logic [N-1:0] in_spk = 0;
  logic [2:0] in_row = 0, in_col = 0;
  logic [1:0] ov [2], och [2];
  logic [2:0] oprow [2];
  logic [6:0] obits [2];
  logic [1:0] busy;
  logic [1:0] ovalid;

  maxpool #(.N(N), .OH(OH), .OW(OW), .P(2)) dut2 (
    .clk, .rst_n, .in_valid, .in_spk, .in_row, .in_col,
    .out_valid(ovalid[0]), .out_ch(och[0]), .out_prow(oprow[0][0:0]), .out_bits(obits[0][2:0]),
    .busy(busy[0]));
  maxpool #(.N(N), .OH(OH), .OW(OW), .P(1)) dut1 (
    .clk, .rst_n, .in_valid, .in_spk, .in_row, .in_col,
    .out_valid(ovalid[1]), .out_ch(och[1]), .out_prow(oprow[1]), .out_bits(obits[1]),
    .busy(busy[1]));

  always #5 clk = ~clk;

  bit mapv [N][OH][OW];
  int exp_ch [2][$], exp_row [2][$], exp_bits [2][$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 2; d++) if (ovalid[d]) begin
      automatic int pw = d == 0 ? 3 : 7;
      checks++;
      if (exp_ch[d].size() == 0) begin failures++; $display("dut%0d extra output", d); end
      else begin
        automatic int c = exp_ch[d].pop_front(), r = exp_row[d].pop_front(), b = exp_bits[d].pop_front();
        automatic int got = d == 0 ? int'(obits[0][2:0]) : int'(obits[1]);
        automatic int grow = d == 0 ? int'(oprow[0][0:0]) : int'(oprow[1]);
        if (int'(och[d]) != c || grow != r || got != b) begin
          failures++; $display("dut%0d got ch%0d row%0d %b want ch%0d row%0d %b", d, och[d], grow, got, c, r, b);
        end
        if (pw < 0) failures++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 10; frame++) begin
      foreach (mapv[c, r, x]) mapv[c][r][x] = ($urandom_range(3) == 0);
      // expected P = 2: rows 0..1, cols 0..2 of the pooled map
      for (int pr = 0; pr < OH / 2; pr++)
        for (int c = 0; c < N; c++) begin
          automatic int b = 0;
          for (int pc = 0; pc < OW / 2; pc++)
            for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
              if (mapv[c][2*pr+dy][2*pc+dx]) b |= (1 << pc);
          exp_ch[0].push_back(c); exp_row[0].push_back(pr); exp_bits[0].push_back(b);
        end
      for (int r = 0; r < OH; r++)
        for (int c = 0; c < N; c++) begin
          automatic int b = 0;
          for (int x = 0; x < OW; x++) if (mapv[c][r][x]) b |= (1 << x);
          exp_ch[1].push_back(c); exp_row[1].push_back(r); exp_bits[1].push_back(b);
        end
      for (int r = 0; r < OH; r++) begin
        for (int x = 0; x < OW; x++) begin
          @(negedge clk);
          in_valid = 1; in_row = 3'(r); in_col = 3'(x);
          for (int c = 0; c < N; c++) in_spk[c] = mapv[c][r][x];
        end
        @(negedge clk); in_valid = 0;
        while (busy != 0) @(negedge clk);
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_ch[0].size() != 0 || exp_ch[1].size() != 0) begin failures++; $display("rows missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
