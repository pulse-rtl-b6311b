// tb_neural_core: drives random accumulate / activate / clear operations,
// one per cycle, into a CONV core (flip-flop weights) and an FC core
// (UltraRAM-style weights) and checks them against a model of the LIF
// neuron written here: u += w; v = u + b; spike if v >= 1.0; v -= 1.0 on a
// spike; u = (v * beta) >> 29. Spikes must appear exactly one cycle after
// the activation is issued. Back-to-back updates of one neuron (which need
// the forwarding path) are made often and counted.
module tb_neural_core;
  import pulse_pkg::*;
  localparam int NM = 8, NW = 10, NB = 3;
  localparam logic signed [31:0] BETA = 32'sh04CC_CCCD;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  int checks = 0, failures = 0, fwd_cnt = 0, spike_cnt = 0;

  logic        w_we = 0, b_we = 0;
  logic [3:0]  w_addr = 0;
  logic [1:0]  b_addr = 0, baddr = 0;
  logic [31:0] cfg_data = 0;
  nc_op_e      op = NC_NOP;
  logic [2:0]  naddr = 0;
  logic [3:0]  waddr = 0;
  logic [4:0]  tag = 0;
  logic [1:0]  sp_valid, sp, busy, fwd;
  logic [4:0]  sp_tag [2];

  for (genvar f = 0; f < 2; f++) begin : g_dut
    neural_core #(.IS_FC(f[0]), .NM(NM), .NW(NW), .NB(NB), .TAG_W(5), .BETA(BETA)) dut (
      .clk, .rst_n, .cfg_w_we(w_we), .cfg_w_addr(w_addr), .cfg_w_data(cfg_data),
      .cfg_b_we(b_we), .cfg_b_addr(b_addr), .cfg_b_data(cfg_data),
      .op, .naddr, .waddr, .baddr, .tag,
      .sp_valid(sp_valid[f]), .sp(sp[f]), .sp_tag(sp_tag[f]), .busy(busy[f]), .fwd_hit(fwd[f]));
  end

  always #5 clk = ~clk;

  int u [NM];
  int wt [NW];
  int bs [NB];
  // expected spike one cycle after issue
  bit exp_v = 0, exp_s = 0; int exp_tag = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outputs are compared mid-cycle, after the issuing edge
  always @(negedge clk) if (rst_n) begin
    if (fwd[0]) fwd_cnt++;
    for (int f = 0; f < 2; f++) begin
      if (sp_valid[f] != exp_v) begin failures++; $display("core %0d sp_valid %0d want %0d", f, sp_valid[f], exp_v); end
      if (exp_v) begin
        checks++;
        if (sp[f] != exp_s || int'(sp_tag[f]) != exp_tag) begin
          failures++; $display("core %0d spike %0d tag %0d want %0d %0d", f, sp[f], sp_tag[f], exp_s, exp_tag);
        end
      end
    end
  end

  // model of one operation; sets the expected spike of the next cycle
  task automatic issue(input nc_op_e o, input int n, input int wa, input int ba, input int tg);
    @(negedge clk);
    op = o; naddr = 3'(n); waddr = 4'(wa); baddr = 2'(ba); tag = 5'(tg);
    @(posedge clk);
    exp_v = 0; exp_s = 0; exp_tag = tg;
    case (o)
      NC_CLR: u[n] = 0;
      NC_ACC: u[n] = u[n] + wt[wa];
      NC_ACT: begin
        int v; longint p;
        v = u[n] + bs[ba];
        exp_v = 1;
        exp_s = (v >= 32'sh2000_0000);
        if (exp_s) begin v = v - 32'sh2000_0000; spike_cnt++; end
        p = longint'(v) * longint'(BETA);
        u[n] = int'(p >>> 29);
      end
      default: ;
    endcase
  endtask

  task automatic compare_mem();
    for (int n = 0; n < NM; n++) begin
      checks++;
      if (g_dut[0].dut.mem[n] !== u[n] || g_dut[1].dut.mem[n] !== u[n]) begin
        failures++;
        $display("mem[%0d] conv %h fc %h want %h", n, g_dut[0].dut.mem[n], g_dut[1].dut.mem[n], u[n]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configuration
    for (int a = 0; a < NW; a++) begin
      @(negedge clk); w_we = 1; w_addr = 4'(a);
      cfg_data = $signed($urandom_range(32'h2000_0000)) - 32'sh0C00_0000;  // about -0.375 .. 0.625
      wt[a] = cfg_data;
    end
    @(negedge clk); w_we = 0;
    for (int a = 0; a < NB; a++) begin
      @(negedge clk); b_we = 1; b_addr = 2'(a);
      cfg_data = $signed($urandom_range(32'h0800_0000)) - 32'sh0400_0000;
      bs[a] = cfg_data;
    end
    @(negedge clk); b_we = 0;
    for (int n = 0; n < NM; n++) issue(NC_CLR, n, 0, 0, 0);
    for (int round = 0; round < 40; round++) begin
      automatic int last_n = 0;
      for (int k = 0; k < 30; k++) begin
        automatic int n = ($urandom_range(2) == 0) ? last_n : $urandom_range(NM - 1);
        issue(NC_ACC, n, $urandom_range(NW - 1), 0, 0);
        last_n = n;
      end
      for (int n = 0; n < NM; n++) issue(NC_ACT, n, 0, $urandom_range(NB - 1), n + 8);
      if (round == 20) for (int n = 0; n < NM; n++) issue(NC_CLR, n, 0, 0, 0);
      @(negedge clk); op = NC_NOP;
      @(posedge clk); exp_v = 0;
      @(negedge clk);
      compare_mem();
    end
    checks++;
    if (fwd_cnt == 0) begin failures++; $display("forwarding never used"); end
    checks++;
    if (spike_cnt == 0) begin failures++; $display("no spike"); end
    $display("forwarding %0d, spikes %0d", fwd_cnt, spike_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
