// tb_em_regfile: self-checking test of the rotating register file.
//
// A 34-entry, 64-bit instance (32 GPRs plus flags and stack pointer) is
// driven with random writes, reads and rotate pulses, including writes in
// the rotation cycle. A plain architectural array serves as reference: every
// read must return the last value written to that architectural register,
// whatever the rotation. The physical placement is checked directly: the
// value of architectural register a must sit in physical register
// (a + rot) mod 34, and rot must advance by one in the cycle after each
// pulse. A final phase writes only architectural register 0 (the hot
// register) and checks that, across 34 rotations, its writes land on all 34
// physical registers rather than on one.
module tb_em_regfile;
  localparam int N  = 34;
  localparam int W  = 64;
  localparam int AW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic rotate, we;
  logic [AW-1:0] raddr [2], waddr, rot;
  logic [W-1:0]  rdata [2], wdata;
  int checks = 0, failures = 0;

  em_regfile #(.N_REGS(N), .DATA_W(W), .N_RD(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [W-1:0] ref_rf [N];
  int ref_rot;
  bit hot_seen [N];

  initial begin
    int hot_cnt;
    rotate = 0; we = 0; waddr = '0; wdata = '0; raddr[0] = '0; raddr[1] = '0;
    foreach (ref_rf[i]) ref_rf[i] = '0;
    ref_rot = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      rotate   = ($urandom_range(0, 9) == 0);
      we       = ($urandom_range(0, 1) == 1);
      waddr    = AW'($urandom_range(0, N - 1));
      wdata    = {$urandom, $urandom};
      raddr[0] = AW'($urandom_range(0, N - 1));
      raddr[1] = AW'($urandom_range(0, N - 1));
      #1;
      check(rot == AW'(ref_rot), "rot value");
      check(rdata[0] == ref_rf[raddr[0]], $sformatf("read port 0 arch %0d", raddr[0]));
      check(rdata[1] == ref_rf[raddr[1]], $sformatf("read port 1 arch %0d", raddr[1]));
      @(posedge clk);
      if (we) ref_rf[waddr] = wdata;
      if (rotate) ref_rot = (ref_rot + 1) % N;
      #1;
      for (int a = 0; a < N; a++)
        check(dut.regs[(a + ref_rot) % N] == ref_rf[a], $sformatf("placement arch %0d", a));
    end
    // hot register: only architectural register 0 is written
    foreach (hot_seen[i]) hot_seen[i] = 0;
    for (int c = 0; c < N * 20; c++) begin
      rotate = ((c % 20) == 19);
      we     = 1;
      waddr  = '0;
      wdata  = W'(c);
      #1;
      hot_seen[(0 + ref_rot) % N] = 1;
      @(posedge clk);
      ref_rf[0] = wdata;
      if (rotate) ref_rot = (ref_rot + 1) % N;
      #1;
      check(dut.regs[ref_rot] == ref_rf[0], "hot register placement");
    end
    hot_cnt = 0;
    foreach (hot_seen[i]) hot_cnt += hot_seen[i];
    check(hot_cnt == N, $sformatf("hot register spread over %0d physical registers", hot_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
