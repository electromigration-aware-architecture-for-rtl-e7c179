// tb_em_hotspot: skewed-write workload with rotation off and on.
//
// Two instances of the top receive identical traffic; one has em_enable low
// (fixed mappings, a conventional design), the other high. The traffic
// imitates the hotspots that motivate the scheme: integer register writes
// concentrated on a few architectural registers (geometric distribution,
// register 0 the hottest), cache fills concentrated on a few indexes, and
// one ALU instruction per cycle most of the time. The test counts writes per
// *physical* register and fills per *physical* cache set, using each
// instance's rotator, and ALU use per unit against a fixed-priority
// scheduler that always tries ALU 0 first (computed here).
//
// Metric: the busiest element sets the EM budget, so the figure of merit is
// max_fixed / max_rotating - 1 (the lifetime gain for the same sign-off).
// The test requires a gain above 100% for the register file and for the
// L1-D, and for the ALUs with one instruction per cycle the busiest ALU's
// share must fall from all the work to one third (+/- 1).
module tb_em_hotspot;
  import em_pkg::*;

  localparam int NI = N_GPR + N_INT_EXTRA, NF = N_FPR;
  localparam int IAW = $clog2(NI), FAW = $clog2(NF);
  localparam int SETS = 64, CYCLES = 200000;

  logic clk = 0, rst_n = 0;
  logic en [2];
  logic [1:0] alu_k;
  logic [2:0] alu_grant [2];
  logic [1:0] alu_slot [2][3];
  logic [IAW-1:0] int_raddr [2], int_waddr;
  logic [GPR_W-1:0] int_rdata [2][2], int_wdata;
  logic int_we;
  logic [FAW-1:0] fp_raddr [2];
  logic [FPR_W-1:0] fp_rdata [2][2];
  line_req_t  l1d_req, idle_req;
  line_fill_t l1d_fill, idle_fill;
  line_resp_t resp [2][4];
  tlb_resp_t  tresp [2];
  rot_pulse_t rp [2];
  int checks = 0, failures = 0;

  assign idle_req = '0;
  assign idle_fill = '0;

  for (genvar d = 0; d < 2; d++) begin : g_dut
    em_aware_core_top #(
      .RF_PERIOD(1000), .CACHE_PERIOD(500), .L1D_SETS_P(SETS), .L1D_WAYS_P(8),
      .L1I_SETS_P(4), .L1I_WAYS_P(2), .L2_SETS_P(4), .L2_WAYS_P(2),
      .L3_SETS_P(4), .L3_WAYS_P(2), .DTLB_SETS_P(4), .DTLB_WAYS_P(2)
    ) u (
      .clk, .rst_n, .em_enable(en[d]), .cr3_write(1'b0), .iret(1'b0), .tlb_flush(1'b0),
      .sleep_wakeup(1'b0), .alu_k, .alu_grant(alu_grant[d]), .alu_slot(alu_slot[d]),
      .int_raddr, .int_rdata(int_rdata[d]), .int_we, .int_waddr, .int_wdata,
      .fp_raddr, .fp_rdata(fp_rdata[d]), .fp_we(1'b0), .fp_waddr('0), .fp_wdata('0),
      .l1d_req, .l1d_fill, .l1d_resp(resp[d][0]),
      .l1i_req(idle_req), .l1i_fill(idle_fill), .l1i_resp(resp[d][1]),
      .l2_req(idle_req), .l2_fill(idle_fill), .l2_resp(resp[d][2]),
      .l3_req(idle_req), .l3_fill(idle_fill), .l3_resp(resp[d][3]),
      .dtlb_req('0), .dtlb_fill('0), .dtlb_resp(tresp[d]), .rot_pulse(rp[d])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (CYCLES + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int geom(input int n);  // 0 most likely, halving each step
    int r;
    r = 0;
    while (r < n - 1 && $urandom_range(0, 1) == 1) r++;
    return r;
  endfunction


  initial begin
    int rf_w [2][NI], set_f [2][SETS], alu_u [2][3];
    int mx [2], kk, hot, tagv;
    int rot_rf [2], rot_c [2];
    for (int d = 0; d < 2; d++) begin
      for (int i = 0; i < NI; i++) rf_w[d][i] = 0;
      for (int i = 0; i < SETS; i++) set_f[d][i] = 0;
      for (int i = 0; i < 3; i++) alu_u[d][i] = 0;
    end
    en[0] = 0; en[1] = 1;
    alu_k = '0; int_we = 0; int_waddr = '0; int_wdata = '0;
    for (int p = 0; p < 2; p++) begin int_raddr[p] = '0; fp_raddr[p] = '0; end
    l1d_req = '0; l1d_fill = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int c = 0; c < CYCLES; c++) begin
      kk = ($urandom_range(0, 9) < 8) ? 1 : $urandom_range(0, 3);
      alu_k = 2'(kk);
      int_we = 1; int_waddr = IAW'(geom(NI)); int_wdata = {$urandom, $urandom};
      l1d_fill = '0; l1d_req = '0;
      hot = geom(SETS); tagv = $urandom_range(0, 1023);
      if ($urandom_range(0, 1) == 1) begin
        l1d_fill.valid = 1;
        l1d_fill.addr  = (PADDR_W'(tagv) << 12) | (PADDR_W'(hot) << 6);
      end else begin
        l1d_req.valid = 1;
        l1d_req.addr  = (PADDR_W'(tagv) << 12) | (PADDR_W'(hot) << 6);
      end
      #1;
      rot_rf[0] = int'(g_dut[0].u.u_int_rf.rot); rot_rf[1] = int'(g_dut[1].u.u_int_rf.rot);
      rot_c[0]  = int'(g_dut[0].u.u_l1d.rot);    rot_c[1]  = int'(g_dut[1].u.u_l1d.rot);
      for (int d = 0; d < 2; d++) begin
        rf_w[d][(int'(int_waddr) + rot_rf[d]) % NI]++;
        if (l1d_fill.valid) set_f[d][(int'(l1d_fill.addr[6 +: 6]) + rot_c[d]) % SETS]++;
      end
      for (int i = 0; i < kk; i++) alu_u[0][i]++;            // fixed priority: ALU 0 first
      for (int i = 0; i < 3; i++) if (alu_grant[1][i]) alu_u[1][i]++;
      check($countones(alu_grant[1]) == kk, "grant count");
      @(posedge clk); #1;
    end
    check(g_dut[0].u.u_int_rf.rot == '0 && g_dut[0].u.u_l1d.rot == '0, "fixed instance never rotated");
    for (int d = 0; d < 2; d++) begin mx[d] = 0; for (int i = 0; i < NI; i++) if (rf_w[d][i] > mx[d]) mx[d] = rf_w[d][i]; end
    $display("int RF: busiest physical register %0d writes fixed, %0d rotating, gain %0d%%",
             mx[0], mx[1], (100 * mx[0]) / mx[1] - 100);
    check(mx[0] > 2 * mx[1], "register-file gain above 100%");
    for (int d = 0; d < 2; d++) begin mx[d] = 0; for (int i = 0; i < SETS; i++) if (set_f[d][i] > mx[d]) mx[d] = set_f[d][i]; end
    $display("L1-D: busiest physical set %0d fills fixed, %0d rotating, gain %0d%%",
             mx[0], mx[1], (100 * mx[0]) / mx[1] - 100);
    check(mx[0] > 2 * mx[1], "L1-D gain above 100%");
    for (int d = 0; d < 2; d++) begin mx[d] = 0; for (int i = 0; i < 3; i++) if (alu_u[d][i] > mx[d]) mx[d] = alu_u[d][i]; end
    $display("ALUs: busiest ALU %0d uses fixed priority, %0d Algorithm 1, gain %0d%%",
             mx[0], mx[1], (100 * mx[0]) / mx[1] - 100);
    check(mx[1] - (alu_u[1][0] + alu_u[1][1] + alu_u[1][2]) / 3 <= 1, "Algorithm 1 busiest ALU at one third");
    check(mx[0] > mx[1], "ALU gain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
