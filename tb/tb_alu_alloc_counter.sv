// tb_alu_alloc_counter: self-checking test of the counter-based EM-aware
// allocator ("option 1").
//
// A reference counter runs beside the block; every cycle the leading unit
// must be counter mod N and the k grants must be the k units that follow it
// cyclically. A reduced 4-bit counter instance checks the wrap to zero
// (2^4 = 16 is not a multiple of 3, so the leading unit jumps from 0 to 0
// across the wrap). With k = 1 each cycle all three units get equal use.
module tb_alu_alloc_counter;
  localparam int N  = 3;
  localparam int KW = $clog2(N + 1);
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic [KW-1:0] k;
  logic [N-1:0]  grant, grant_s;
  logic [IW-1:0] slot_alu [N], slot_s [N];
  logic [IW-1:0] lead, lead_s;
  int checks = 0, failures = 0;

  alu_alloc_counter #(.N_ALU(N)) dut (.clk, .rst_n, .k, .grant, .slot_alu, .lead);
  alu_alloc_counter #(.N_ALU(N), .CNT_W(4)) dut_s (.clk, .rst_n, .k, .grant(grant_s), .slot_alu(slot_s), .lead(lead_s));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    longint cnt;
    int cnt_s, kk, exp_lead, exp_g, exp_lead_s;
    int use_cnt [N];
    k = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    cnt = 0; cnt_s = 0;
    foreach (use_cnt[i]) use_cnt[i] = 0;
    for (int c = 0; c < 9000; c++) begin
      kk = (c < 3000) ? 1 : $urandom_range(0, N);
      k = KW'(kk);
      #1;
      exp_lead   = int'(cnt % N);
      exp_lead_s = cnt_s % N;
      exp_g = 0;
      for (int j = 0; j < kk; j++) exp_g |= 1 << ((exp_lead + j) % N);
      check(lead == IW'(exp_lead), "lead");
      check(grant == N'(exp_g), $sformatf("grant k=%0d got %b exp %b", kk, grant, exp_g[N-1:0]));
      for (int j = 0; j < kk; j++) check(slot_alu[j] == IW'((exp_lead + j) % N), "slot");
      check(lead_s == IW'(exp_lead_s), $sformatf("wrap lead got %0d exp %0d", lead_s, exp_lead_s));
      if (c < 3000) for (int i = 0; i < N; i++) if (grant[i]) use_cnt[i]++;
      @(posedge clk); #1;
      cnt++;
      cnt_s = (cnt_s + 1) % 16;
    end
    for (int i = 0; i < N; i++) check(use_cnt[i] == 1000, $sformatf("k=1 spread unit %0d used %0d", i, use_cnt[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
