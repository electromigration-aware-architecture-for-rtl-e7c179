// tb_alu_alloc_em: self-checking test of the one-bit-per-unit EM-aware
// allocator (Algorithm 1) with three ALUs.
//
// 1. Replays the worked example of the design (k = 0, 2, 2, 3) and checks
//    grants, slot order, Ex_counter bits and the global bit cycle by cycle.
// 2. Drives 20000 cycles of random k and compares every output with a
//    reference model written with plain integer sets.
// 3. Checks the point of the scheme: per-unit use counts never differ by
//    more than one, and with k = 1 every cycle each ALU gets one third of
//    the work (a fixed-priority scheduler would give it all to ALU 0).
module tb_alu_alloc_em;
  localparam int N = 3;
  localparam int KW = $clog2(N + 1);
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic [KW-1:0] k;
  logic [N-1:0]  grant, ex_counter;
  logic [IW-1:0] slot_alu [N];
  logic          global_counter;
  int checks = 0, failures = 0;

  alu_alloc_em #(.N_ALU(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference model state
  int ref_ex [N];
  int ref_g;
  int use_cnt [N];

  task automatic ref_step(input int kk, output int exp_grant, output int exp_slot [N]);
    int m [$], o [$], q [$];
    exp_grant = 0;
    foreach (exp_slot[i]) exp_slot[i] = 0;
    for (int i = 0; i < N; i++) if (ref_ex[i] == ref_g) m.push_back(i); else o.push_back(i);
    if (kk < m.size()) begin
      for (int j = 0; j < kk; j++) q.push_back(m[j]);
    end else begin
      q = m;
      for (int j = 0; j < kk - m.size(); j++) q.push_back(o[j]);
      ref_g = 1 - ref_g;
    end
    foreach (q[j]) begin
      exp_grant |= (1 << q[j]);
      exp_slot[j] = q[j];
      ref_ex[q[j]] = 1 - ref_ex[q[j]];
      use_cnt[q[j]]++;
    end
  endtask

  task automatic step_and_check(input int kk);
    int eg, es [N];
    k = KW'(kk);
    #1;
    ref_step(kk, eg, es);
    check(grant == N'(eg), $sformatf("grant k=%0d got %b exp %b", kk, grant, eg[N-1:0]));
    for (int j = 0; j < kk; j++) check(slot_alu[j] == IW'(es[j]), $sformatf("slot %0d", j));
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) check(ex_counter[i] == ref_ex[i][0], $sformatf("ex[%0d]", i));
    check(global_counter == ref_g[0], "global");
  endtask

  initial begin
    int mx, mn;
    k = '0;
    foreach (ref_ex[i]) begin ref_ex[i] = 0; use_cnt[i] = 0; end
    ref_g = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    #1;
    // worked example: cycle, issued, Ex_counter[2:0], global, selected
    k = 0; #1; check(grant == 3'b000, "ex0 none"); @(posedge clk); #1;
    check(ex_counter == 3'b000 && global_counter == 0, "ex0 state");
    k = 2; #1; check(grant == 3'b011 && slot_alu[0] == 0 && slot_alu[1] == 1, "ex1 grant 0,1");
    @(posedge clk); #1; check(ex_counter == 3'b011 && global_counter == 0, "ex1 state 0,1,1 / 0");
    k = 2; #1; check(grant == 3'b101 && slot_alu[0] == 2 && slot_alu[1] == 0, "ex2 grant 2,0");
    @(posedge clk); #1; check(ex_counter == 3'b110 && global_counter == 1, "ex2 state 1,1,0 / 1");
    k = 3; #1; check(grant == 3'b111 && slot_alu[0] == 1 && slot_alu[1] == 2 && slot_alu[2] == 0, "ex3 grant 1,2,0");
    @(posedge clk); #1; check(ex_counter == 3'b001 && global_counter == 0, "ex3 state 0,0,1 / 0");

    // random run against the reference model
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    foreach (ref_ex[i]) begin ref_ex[i] = 0; use_cnt[i] = 0; end
    ref_g = 0;
    for (int c = 0; c < 20000; c++) begin
      step_and_check($urandom_range(0, N));
      mx = use_cnt[0]; mn = use_cnt[0];
      foreach (use_cnt[i]) begin if (use_cnt[i] > mx) mx = use_cnt[i]; if (use_cnt[i] < mn) mn = use_cnt[i]; end
      if (mx - mn > 1) begin failures++; $display("FAIL spread %0d", mx - mn); end
    end
    checks++;

    // one instruction per cycle: uniform spread
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    foreach (ref_ex[i]) begin ref_ex[i] = 0; use_cnt[i] = 0; end
    ref_g = 0;
    for (int c = 0; c < 300; c++) step_and_check(1);
    for (int i = 0; i < N; i++) check(use_cnt[i] == 100, $sformatf("k=1 spread unit %0d used %0d", i, use_cnt[i]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
