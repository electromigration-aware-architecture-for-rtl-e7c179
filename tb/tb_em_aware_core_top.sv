// tb_em_aware_core_top: end-to-end test of the EM-aware core structures at
// reduced sizes (short rotation periods, small caches), so that every
// rotation source fires many times within a short run.
//
// Each cycle the test drives random ALU demand, register-file traffic on both
// files, loads/stores/fills on L1-D, L1-I, L2 and L3, lookups/fills on the
// D-TLB, and rare system events (CR3 write, return from interrupt, TLB flush,
// wake-up from sleep); for one stretch em_enable is low. Independent models
// predict every output: Algorithm 1 for the grants, architectural arrays for
// the register files, a write-through backing store for the caches, a fixed
// page-table function for the TLB, and one event counter per rotate trigger
// for rot_pulse. After every rotation the rotated structure must be empty
// (caches) or have its values moved one place with the mapping (register
// files). A second instance uses the counter-based ALU allocator.
//
// Mechanism counters (each must fire at least once): both branches of
// Algorithm 1, periodic register-file rotation, rotation on CR3 write and on
// return from interrupt, periodic rotation of each cache and the TLB, TLB
// flush rotation, wake-up rotation of L2/L3, events ignored while rotation
// is disabled, cache hits, store hits, and evictions.
module tb_em_aware_core_top;
  import em_pkg::*;

  localparam int RF_P = 50, C_P = 40;
  localparam int NI = N_GPR + N_INT_EXTRA, NF = N_FPR;
  localparam int IAW = $clog2(NI), FAW = $clog2(NF);
  localparam int NC = 4;  // caches: 0 L1D, 1 L1I, 2 L2, 3 L3
  localparam int CYCLES = 20000;

  logic clk = 0, rst_n = 0;
  logic em_enable, cr3_write, iret, tlb_flush, sleep_wakeup;
  logic [1:0] alu_k;
  logic [2:0] alu_grant, alu_grant_c;
  logic [1:0] alu_slot [3], alu_slot_c [3];
  logic [IAW-1:0] int_raddr [2], int_waddr;
  logic [GPR_W-1:0] int_rdata [2], int_wdata, int_rdata_c [2];
  logic int_we, fp_we;
  logic [FAW-1:0] fp_raddr [2], fp_waddr;
  logic [FPR_W-1:0] fp_rdata [2], fp_wdata, fp_rdata_c [2];
  line_req_t  creq  [NC];
  line_fill_t cfill [NC];
  line_resp_t cresp [NC], cresp_c [NC];
  tlb_req_t  dtlb_req;
  tlb_fill_t dtlb_fill;
  tlb_resp_t dtlb_resp, dtlb_resp_c;
  rot_pulse_t rot_pulse, rot_pulse_c;
  int checks = 0, failures = 0;

  em_aware_core_top #(
    .RF_PERIOD(RF_P), .CACHE_PERIOD(C_P),
    .L1D_SETS_P(8), .L1D_WAYS_P(2), .L1I_SETS_P(8), .L1I_WAYS_P(2),
    .L2_SETS_P(16), .L2_WAYS_P(2), .L3_SETS_P(32), .L3_WAYS_P(4),
    .DTLB_SETS_P(4), .DTLB_WAYS_P(2)
  ) dut (
    .clk, .rst_n, .em_enable, .cr3_write, .iret, .tlb_flush, .sleep_wakeup,
    .alu_k, .alu_grant, .alu_slot,
    .int_raddr, .int_rdata, .int_we, .int_waddr, .int_wdata,
    .fp_raddr, .fp_rdata, .fp_we, .fp_waddr, .fp_wdata,
    .l1d_req(creq[0]), .l1d_fill(cfill[0]), .l1d_resp(cresp[0]),
    .l1i_req(creq[1]), .l1i_fill(cfill[1]), .l1i_resp(cresp[1]),
    .l2_req(creq[2]),  .l2_fill(cfill[2]),  .l2_resp(cresp[2]),
    .l3_req(creq[3]),  .l3_fill(cfill[3]),  .l3_resp(cresp[3]),
    .dtlb_req, .dtlb_fill, .dtlb_resp, .rot_pulse
  );

  // same structures with the counter-based ALU allocator
  em_aware_core_top #(
    .ALU_ALLOC(ALLOC_COUNTER), .RF_PERIOD(RF_P), .CACHE_PERIOD(C_P),
    .L1D_SETS_P(8), .L1D_WAYS_P(2), .L1I_SETS_P(8), .L1I_WAYS_P(2),
    .L2_SETS_P(16), .L2_WAYS_P(2), .L3_SETS_P(32), .L3_WAYS_P(4),
    .DTLB_SETS_P(4), .DTLB_WAYS_P(2)
  ) dut_c (
    .clk, .rst_n, .em_enable, .cr3_write, .iret, .tlb_flush, .sleep_wakeup,
    .alu_k, .alu_grant(alu_grant_c), .alu_slot(alu_slot_c),
    .int_raddr, .int_rdata(int_rdata_c), .int_we, .int_waddr, .int_wdata,
    .fp_raddr, .fp_rdata(fp_rdata_c), .fp_we, .fp_waddr, .fp_wdata,
    .l1d_req(creq[0]), .l1d_fill(cfill[0]), .l1d_resp(cresp_c[0]),
    .l1i_req(creq[1]), .l1i_fill(cfill[1]), .l1i_resp(cresp_c[1]),
    .l2_req(creq[2]),  .l2_fill(cfill[2]),  .l2_resp(cresp_c[2]),
    .l3_req(creq[3]),  .l3_fill(cfill[3]),  .l3_resp(cresp_c[3]),
    .dtlb_req, .dtlb_fill, .dtlb_resp(dtlb_resp_c), .rot_pulse(rot_pulse_c)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------------------- models
  int ref_ex [3], ref_g;
  int use_em [3], use_c [3];
  logic [GPR_W-1:0] ref_int [NI];
  logic [FPR_W-1:0] ref_fp [NF];
  int int_rot, fp_rot;
  logic [LINE_W-1:0] mem [NC][bit [PADDR_W-7:0]];

  function automatic logic [LINE_W-1:0] mem_rd(input int c, input logic [PADDR_W-1:0] a);
    if (mem[c].exists(a[PADDR_W-1:6])) return mem[c][a[PADDR_W-1:6]];
    return {8{64'(a[PADDR_W-1:6]) * 64'h9E37_79B9_7F4A_7C15 + 64'(c)}};
  endfunction

  function automatic logic [PPN_W-1:0] page_table(input logic [VADDR_W-1:0] va);
    return PPN_W'(va[VADDR_W-1:12] * 36'h5_DEEC_E66D + 36'hB);
  endfunction

  function automatic logic [FPR_W-1:0] rnd512();
    logic [FPR_W-1:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // Algorithm 1 reference; returns expected grant and updates state
  function automatic int alg1(input int kk, output bit branch_all);
    int m [$], o [$], q [$], g;
    for (int i = 0; i < 3; i++) if (ref_ex[i] == ref_g) m.push_back(i); else o.push_back(i);
    branch_all = (kk >= m.size());
    if (!branch_all) for (int j = 0; j < kk; j++) q.push_back(m[j]);
    else begin
      q = m;
      for (int j = 0; j < kk - m.size(); j++) q.push_back(o[j]);
      ref_g = 1 - ref_g;
    end
    g = 0;
    foreach (q[j]) begin g |= 1 << q[j]; ref_ex[q[j]] = 1 - ref_ex[q[j]]; use_em[q[j]]++; end
    return g;
  endfunction

  // trigger models: 0 rf, 1 dtlb, 2 l1d, 3 l1i, 4 l2, 5 l3
  int trig_cnt [6];
  localparam int PER [6] = '{RF_P, C_P, C_P, C_P, C_P, C_P};

  // any valid line per way, mirrored from the per-way valid vectors
  logic [1:0] v_l1d, v_l1i, v_l2, v_dtlb;
  logic [3:0] v_l3;
  for (genvar w = 0; w < 2; w++) begin : g_v2
    assign v_l1d[w]  = |dut.u_l1d.g_way[w].valid_q;
    assign v_l1i[w]  = |dut.u_l1i.g_way[w].valid_q;
    assign v_l2[w]   = |dut.u_l2.g_way[w].valid_q;
    assign v_dtlb[w] = |dut.u_dtlb.g_way[w].valid_q;
  end
  for (genvar w = 0; w < 4; w++) begin : g_v4
    assign v_l3[w] = |dut.u_l3.g_way[w].valid_q;
  end

  // mechanism counters
  int n_alg_subset, n_alg_all, n_rf_periodic, n_rf_cr3, n_rf_iret;
  int n_periodic [6], n_tlb_flush_rot, n_wake_rot, n_frozen_events;
  int n_hits [NC], n_store_hits, n_evictions, n_tlb_hits;

  function automatic logic [5:0] pulses_of(input rot_pulse_t p);
    return {p.l3, p.l2, p.l1i, p.l1d, p.dtlb, p.rf};
  endfunction

  initial begin
    logic [5:0] exp_p, ext_ev, cnt_ev, got_p, prev_p;
    bit branch_all;
    int kk, eg, mx, mn;
    logic [PADDR_W-1:0] a;
    logic [LINE_W-1:0] nd, mask;
    logic [LINE_BYTES-1:0] be;
    logic [VADDR_W-1:0] va;

    em_enable = 1; cr3_write = 0; iret = 0; tlb_flush = 0; sleep_wakeup = 0;
    alu_k = '0; int_we = 0; fp_we = 0; int_waddr = '0; fp_waddr = '0;
    int_wdata = '0; fp_wdata = '0;
    for (int p = 0; p < 2; p++) begin int_raddr[p] = '0; fp_raddr[p] = '0; end
    for (int c = 0; c < NC; c++) begin creq[c] = '0; cfill[c] = '0; end
    dtlb_req = '0; dtlb_fill = '0;
    foreach (ref_ex[i]) begin ref_ex[i] = 0; use_em[i] = 0; use_c[i] = 0; end
    ref_g = 0;
    foreach (ref_int[i]) ref_int[i] = '0;
    foreach (ref_fp[i]) ref_fp[i] = '0;
    int_rot = 0; fp_rot = 0;
    foreach (trig_cnt[i]) begin trig_cnt[i] = 0; n_periodic[i] = 0; end
    n_alg_subset = 0; n_alg_all = 0; n_rf_periodic = 0; n_rf_cr3 = 0; n_rf_iret = 0;
    n_tlb_flush_rot = 0; n_wake_rot = 0; n_frozen_events = 0;
    foreach (n_hits[i]) n_hits[i] = 0;
    n_store_hits = 0; n_evictions = 0; n_tlb_hits = 0;
    prev_p = '0;

    repeat (2) @(posedge clk); #1;
    rst_n = 1;

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      // ---------------- stimulus
      em_enable    = !(cyc >= 12000 && cyc < 13000);
      cr3_write    = ($urandom_range(0, 499) == 0);
      iret         = ($urandom_range(0, 699) == 0);
      tlb_flush    = ($urandom_range(0, 599) == 0);
      sleep_wakeup = ($urandom_range(0, 899) == 0);
      kk = $urandom_range(0, 3);
      alu_k = 2'(kk);
      int_we = $urandom_range(0, 1); int_waddr = IAW'($urandom_range(0, NI - 1));
      int_wdata = {$urandom, $urandom};
      fp_we = $urandom_range(0, 1); fp_waddr = FAW'($urandom_range(0, NF - 1));
      fp_wdata = rnd512();
      for (int p = 0; p < 2; p++) begin
        int_raddr[p] = IAW'($urandom_range(0, NI - 1));
        fp_raddr[p]  = FAW'($urandom_range(0, NF - 1));
      end
      for (int c = 0; c < NC; c++) begin
        creq[c] = '0; cfill[c] = '0;
        a = PADDR_W'($urandom_range(0, 3 * (8 << c) - 1)) << 6;
        case ($urandom_range(0, 3))
          0: begin cfill[c].valid = 1; cfill[c].addr = a; cfill[c].data = mem_rd(c, a); end
          1: if (c != 1) begin
               creq[c].valid = 1; creq[c].addr = a; creq[c].write = 1;
               creq[c].wdata = rnd512(); creq[c].be = {$urandom, $urandom};
             end
          default: begin creq[c].valid = 1; creq[c].addr = a; end
        endcase
      end
      dtlb_req = '0; dtlb_fill = '0;
      va = VADDR_W'($urandom_range(0, 23)) << 12;
      if ($urandom_range(0, 2) == 0) begin
        dtlb_fill.valid = 1; dtlb_fill.vaddr = va; dtlb_fill.ppn = page_table(va);
      end else begin
        dtlb_req.valid = 1; dtlb_req.vaddr = va;
      end
      #1;

      // ---------------- combinational outputs
      eg = alg1(kk, branch_all);
      check(alu_grant == 3'(eg), $sformatf("Algorithm 1 grant k=%0d", kk));
      if (kk > 0) begin if (branch_all) n_alg_all++; else n_alg_subset++; end
      check($countones(alu_grant_c) == kk, "counter allocator grant count");
      for (int i = 0; i < 3; i++) if (alu_grant_c[i]) use_c[i]++;
      for (int p = 0; p < 2; p++) begin
        check(int_rdata[p] == ref_int[int_raddr[p]], "int RF read");
        check(fp_rdata[p] == ref_fp[fp_raddr[p]], "fp RF read");
      end
      for (int c = 0; c < NC; c++) begin
        if (cresp[c].hit) begin
          n_hits[c]++;
          check(cresp[c].data == mem_rd(c, creq[c].addr), $sformatf("cache %0d hit data", c));
          if (creq[c].write) n_store_hits++;
        end
        check(cresp_c[c].hit == cresp[c].hit && (!cresp[c].hit || cresp_c[c].data == cresp[c].data), "twin instance agrees");
      end
      if (dtlb_resp.hit) begin
        n_tlb_hits++;
        check(dtlb_resp.ppn == page_table(dtlb_req.vaddr), "TLB translation");
      end

      // ---------------- clock edge and model updates
      ext_ev = {sleep_wakeup, sleep_wakeup, 1'b0, 1'b0, tlb_flush, cr3_write || iret};
      cnt_ev = {creq[3].valid, creq[2].valid, creq[1].valid, creq[0].valid, dtlb_req.valid, 1'b1};
      exp_p = '0;
      for (int t = 0; t < 6; t++) begin
        if (!em_enable) begin
          trig_cnt[t] = 0;
          if (ext_ev[t]) n_frozen_events++;
        end else if (ext_ev[t]) begin
          exp_p[t] = 1; trig_cnt[t] = 0;
          if (t == 1) n_tlb_flush_rot++;
          if (t >= 4) n_wake_rot++;
          if (t == 0 && cr3_write) n_rf_cr3++;
          if (t == 0 && iret && !cr3_write) n_rf_iret++;
        end else if (cnt_ev[t]) begin
          if (trig_cnt[t] == PER[t] - 1) begin exp_p[t] = 1; trig_cnt[t] = 0; n_periodic[t]++; end
          else trig_cnt[t]++;
        end
      end
      // evictions: a fill into a full set with the line absent
      if (cfill[0].valid && !prev_p[2] && !dut.u_l1d.fill_found) n_evictions++;
      if (cfill[1].valid && !prev_p[3] && !dut.u_l1i.fill_found) n_evictions++;
      if (cfill[2].valid && !prev_p[4] && !dut.u_l2.fill_found)  n_evictions++;
      if (cfill[3].valid && !prev_p[5] && !dut.u_l3.fill_found)  n_evictions++;
      @(posedge clk); #1;
      if (int_we) ref_int[int_waddr] = int_wdata;
      if (fp_we) ref_fp[fp_waddr] = fp_wdata;
      for (int c = 0; c < NC; c++)
        if (creq[c].valid && creq[c].write) begin
          mask = '0;
          for (int b = 0; b < LINE_BYTES; b++) if (creq[c].be[b]) mask[b*8 +: 8] = 8'hFF;
          mem[c][creq[c].addr[PADDR_W-1:6]] = (mem_rd(c, creq[c].addr) & ~mask) | (creq[c].wdata & mask);
        end
      // rotations take effect at this edge if a pulse was out in the last cycle
      if (prev_p[0]) begin int_rot = (int_rot + 1) % NI; fp_rot = (fp_rot + 1) % NF; n_rf_periodic += 0; end
      check(int'(dut.u_int_rf.rot) == int_rot && int'(dut.u_fp_rf.rot) == fp_rot, "RF rotator position");
      for (int i = 0; i < NI; i += 5) check(dut.u_int_rf.regs[(i + int_rot) % NI] == ref_int[i], "int RF placement");
      if (prev_p[2]) check(v_l1d == '0, "L1-D invalidated on rotation");
      if (prev_p[3]) check(v_l1i == '0, "L1-I invalidated on rotation");
      if (prev_p[4]) check(v_l2 == '0, "L2 invalidated on rotation");
      if (prev_p[5]) check(v_l3 == '0, "L3 invalidated on rotation");
      if (prev_p[1]) check(v_dtlb == '0, "D-TLB invalidated on rotation");
      got_p = pulses_of(rot_pulse);
      check(got_p == exp_p, $sformatf("rot_pulse got %b exp %b", got_p, exp_p));
      check(pulses_of(rot_pulse_c) == exp_p, "twin rot_pulse");
      prev_p = got_p;
    end

    // ---------------- mechanism coverage and balance
    n_rf_periodic = n_periodic[0];
    check(n_alg_subset > 0, "Algorithm 1 subset branch");
    check(n_alg_all > 0, "Algorithm 1 global-flip branch");
    check(n_rf_periodic > 0, "periodic RF rotation");
    check(n_rf_cr3 > 0, "RF rotation on CR3 write");
    check(n_rf_iret > 0, "RF rotation on return from interrupt");
    for (int t = 1; t < 6; t++) check(n_periodic[t] > 0, $sformatf("periodic rotation of structure %0d", t));
    check(n_tlb_flush_rot > 0, "TLB-flush rotation");
    check(n_wake_rot > 0, "wake-up rotation of L2/L3");
    check(n_frozen_events > 0, "events ignored while rotation disabled");
    for (int c = 0; c < NC; c++) check(n_hits[c] > 0, $sformatf("hits in cache %0d", c));
    check(n_store_hits > 0, "store hits");
    check(n_evictions > 0, "evictions");
    check(n_tlb_hits > 0, "TLB hits");
    mx = use_em[0]; mn = use_em[0];
    foreach (use_em[i]) begin if (use_em[i] > mx) mx = use_em[i]; if (use_em[i] < mn) mn = use_em[i]; end
    check(mx - mn <= 1, "Algorithm 1 balance");
    $display("mechanisms: alg1 subset=%0d flip=%0d rf periodic=%0d cr3=%0d iret=%0d",
             n_alg_subset, n_alg_all, n_rf_periodic, n_rf_cr3, n_rf_iret);
    $display("mechanisms: periodic dtlb=%0d l1d=%0d l1i=%0d l2=%0d l3=%0d tlb-flush=%0d wake=%0d frozen=%0d",
             n_periodic[1], n_periodic[2], n_periodic[3], n_periodic[4], n_periodic[5],
             n_tlb_flush_rot, n_wake_rot, n_frozen_events);
    $display("mechanisms: hits l1d=%0d l1i=%0d l2=%0d l3=%0d store-hits=%0d evictions=%0d tlb-hits=%0d",
             n_hits[0], n_hits[1], n_hits[2], n_hits[3], n_store_hits, n_evictions, n_tlb_hits);
    $display("ALU use: Algorithm 1 %0d/%0d/%0d, counter %0d/%0d/%0d",
             use_em[0], use_em[1], use_em[2], use_c[0], use_c[1], use_c[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
