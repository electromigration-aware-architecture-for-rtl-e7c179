// tb_em_aware_core_top_full: one complete operation of the EM-aware core
// structures at their full default sizes (3 ALUs, 34-entry integer and
// 32-entry 512-bit FP register files, 32 KiB L1-D and L1-I, 256 KiB L2,
// 8 MiB L3, 64-entry D-TLB, 10M-event rotation periods).
//
// Sequence: the worked Algorithm 1 example on the ALU allocator; register
// writes and reads on both files, a CR3-write rotation with a write landing
// in the rotation cycle, and a return-from-interrupt rotation, after which
// every architectural register must still read back its value from its new
// physical place; a fill, a hit and a partial store in each cache; a wake-up
// from sleep that rotates and empties L2 and L3, after which the same line
// misses and its refill lands one physical set further on; a fill and a
// translation in the D-TLB, then a TLB flush that rotates and empties it.
module tb_em_aware_core_top_full;
  import em_pkg::*;

  localparam int NI = N_GPR + N_INT_EXTRA, NF = N_FPR;
  localparam int IAW = $clog2(NI), FAW = $clog2(NF);

  logic clk = 0, rst_n = 0;
  logic em_enable, cr3_write, iret, tlb_flush, sleep_wakeup;
  logic [1:0] alu_k;
  logic [2:0] alu_grant;
  logic [1:0] alu_slot [3];
  logic [IAW-1:0] int_raddr [2], int_waddr;
  logic [GPR_W-1:0] int_rdata [2], int_wdata;
  logic int_we, fp_we;
  logic [FAW-1:0] fp_raddr [2], fp_waddr;
  logic [FPR_W-1:0] fp_rdata [2], fp_wdata;
  line_req_t  l1d_req, l1i_req, l2_req, l3_req;
  line_fill_t l1d_fill, l1i_fill, l2_fill, l3_fill;
  line_resp_t l1d_resp, l1i_resp, l2_resp, l3_resp;
  tlb_req_t  dtlb_req;
  tlb_fill_t dtlb_fill;
  tlb_resp_t dtlb_resp;
  rot_pulse_t rot_pulse;
  int checks = 0, failures = 0;

  em_aware_core_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // per-way valid vectors of L2 and L3
  logic [L2_WAYS-1:0] v_l2;
  logic [L3_SETS-1:0] v_l3 [L3_WAYS];
  for (genvar w = 0; w < L2_WAYS; w++) begin : g_v2
    assign v_l2[w] = |dut.u_l2.g_way[w].valid_q;
  end
  for (genvar w = 0; w < L3_WAYS; w++) begin : g_v3
    assign v_l3[w] = dut.u_l3.g_way[w].valid_q;
  end

  task automatic idle();
    cr3_write = 0; iret = 0; tlb_flush = 0; sleep_wakeup = 0; alu_k = '0;
    int_we = 0; fp_we = 0;
    l1d_req = '0; l1i_req = '0; l2_req = '0; l3_req = '0;
    l1d_fill = '0; l1i_fill = '0; l2_fill = '0; l3_fill = '0;
    dtlb_req = '0; dtlb_fill = '0;
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  function automatic logic [GPR_W-1:0] ival(input int a, input int gen);
    return {32'(gen), 32'(a)} ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  function automatic logic [LINE_W-1:0] line_of(input logic [PADDR_W-1:0] a);
    return {8{64'(a) * 64'h9E37_79B9_7F4A_7C15}};
  endfunction

  task automatic check_int_rf(input int gen, input string what);
    for (int a = 0; a < NI; a++) begin
      int_raddr[0] = IAW'(a); int_raddr[1] = IAW'(NI - 1 - a);
      #1;
      check(int_rdata[0] == ival(a, gen) && int_rdata[1] == ival(NI - 1 - a, gen), what);
    end
  endtask

  // probe a line cache: returns hit, checks data when hit
  task automatic probe(input int c, input logic [PADDR_W-1:0] a, input logic [LINE_W-1:0] exp, output bit h);
    line_resp_t r;
    case (c)
      0: begin l1d_req.valid = 1; l1d_req.addr = a; end
      1: begin l1i_req.valid = 1; l1i_req.addr = a; end
      2: begin l2_req.valid = 1;  l2_req.addr = a;  end
      default: begin l3_req.valid = 1; l3_req.addr = a; end
    endcase
    #1;
    case (c) 0: r = l1d_resp; 1: r = l1i_resp; 2: r = l2_resp; default: r = l3_resp; endcase
    h = r.hit;
    if (h) check(r.data == exp, $sformatf("cache %0d data", c));
    tick(); idle();
  endtask

  task automatic fill(input int c, input logic [PADDR_W-1:0] a, input logic [LINE_W-1:0] d);
    case (c)
      0: begin l1d_fill.valid = 1; l1d_fill.addr = a; l1d_fill.data = d; end
      1: begin l1i_fill.valid = 1; l1i_fill.addr = a; l1i_fill.data = d; end
      2: begin l2_fill.valid = 1;  l2_fill.addr = a;  l2_fill.data = d;  end
      default: begin l3_fill.valid = 1; l3_fill.addr = a; l3_fill.data = d; end
    endcase
    tick(); idle();
  endtask

  initial begin
    bit h;
    logic [PADDR_W-1:0] a;
    logic [LINE_W-1:0] d, nd;
    logic [FPR_W-1:0] fv [4];
    int s;

    em_enable = 1;
    idle();
    int_waddr = '0; int_wdata = '0; fp_waddr = '0; fp_wdata = '0;
    for (int p = 0; p < 2; p++) begin int_raddr[p] = '0; fp_raddr[p] = '0; end
    repeat (2) @(posedge clk); #1;
    rst_n = 1;

    // ---- ALU allocation: worked example of Algorithm 1
    alu_k = 0; #1; check(alu_grant == 3'b000, "k=0 none"); tick();
    alu_k = 2; #1; check(alu_grant == 3'b011 && alu_slot[0] == 0 && alu_slot[1] == 1, "k=2 -> 0,1"); tick();
    alu_k = 2; #1; check(alu_grant == 3'b101 && alu_slot[0] == 2 && alu_slot[1] == 0, "k=2 -> 2,0"); tick();
    alu_k = 3; #1; check(alu_grant == 3'b111 && alu_slot[0] == 1 && alu_slot[1] == 2 && alu_slot[2] == 0, "k=3 -> 1,2,0"); tick();
    idle();

    // ---- integer register file: fill, rotate on CR3 write with a write in the same cycle
    for (int a2 = 0; a2 < NI; a2++) begin
      int_we = 1; int_waddr = IAW'(a2); int_wdata = ival(a2, 1); tick();
    end
    idle();
    check_int_rf(1, "int RF before rotation");
    cr3_write = 1; tick(); idle();                  // trigger pulse is registered
    check(rot_pulse.rf, "RF rotate pulse after CR3 write");
    int_we = 1; int_waddr = IAW'(0); int_wdata = ival(0, 2);   // lands in the rotation cycle
    tick(); idle();
    check(dut.u_int_rf.rot == IAW'(1), "int RF rotator advanced");
    check(dut.u_int_rf.regs[1] == ival(0, 2), "RAX now in physical register 1");
    for (int a2 = 1; a2 < NI; a2++) begin
      int_we = 1; int_waddr = IAW'(a2); int_wdata = ival(a2, 2); tick();
    end
    idle();
    check_int_rf(2, "int RF after CR3 rotation");
    iret = 1; tick(); idle(); tick();
    check(dut.u_int_rf.rot == IAW'(2), "int RF rotated on return from interrupt");
    check_int_rf(2, "int RF after iret rotation");

    // ---- FP register file
    for (int i = 0; i < 4; i++) begin
      for (int w = 0; w < 16; w++) fv[i][w*32 +: 32] = $urandom;
      fp_we = 1; fp_waddr = FAW'(i * 7); fp_wdata = fv[i]; tick();
    end
    idle();
    for (int i = 0; i < 4; i++) begin
      fp_raddr[0] = FAW'(i * 7); #1;
      check(fp_rdata[0] == fv[i], "FP RF read");
      check(dut.u_fp_rf.regs[(i * 7 + 2) % NF] == fv[i], "FP RF placement with rotation 2");
    end

    // ---- caches: fill, hit, store (L1-D), rotate on wake-up (L2, L3)
    for (int c = 0; c < 4; c++) begin
      a = PADDR_W'(48'h1234_5678_0040 + (c << 20));
      d = line_of(a);
      probe(c, a, d, h); check(!h, $sformatf("cache %0d cold miss", c));
      fill(c, a, d);
      probe(c, a, d, h); check(h, $sformatf("cache %0d hit after fill", c));
    end
    a = PADDR_W'(48'h1234_5678_0040);
    nd = '1;
    l1d_req.valid = 1; l1d_req.addr = a; l1d_req.write = 1; l1d_req.wdata = nd;
    l1d_req.be = 64'h0000_0000_0000_00F0;
    tick(); idle();
    d = line_of(a);
    d[32 +: 32] = '1;
    probe(0, a, d, h); check(h, "L1-D store hit kept");

    sleep_wakeup = 1; tick(); idle();
    check(rot_pulse.l2 && rot_pulse.l3 && !rot_pulse.l1d, "wake-up pulses L2 and L3 only");
    tick();
    h = 0;
    for (int w = 0; w < L3_WAYS; w++) if (v_l3[w] != '0) h = 1;
    check(v_l2 == '0 && !h, "L2/L3 invalidated");
    check(dut.u_l3.rot == 13'd1 && dut.u_l2.rot == 9'd1, "L2/L3 rotators advanced");
    a = PADDR_W'(48'h1234_5678_0040 + (3 << 20));
    probe(3, a, line_of(a), h); check(!h, "L3 miss after rotation");
    fill(3, a, line_of(a));
    s = (int'(a[6 +: 13]) + 1) % L3_SETS;
    h = 0;
    for (int w = 0; w < L3_WAYS; w++) if (v_l3[w][s]) h = 1;
    check(h, "L3 refill in rotated set index+1");
    probe(3, a, line_of(a), h); check(h, "L3 hit after refill");
    a = PADDR_W'(48'h1234_5678_0040);
    probe(0, a, d, h); check(h, "L1-D untouched by L2/L3 rotation");

    // ---- D-TLB
    dtlb_fill.valid = 1; dtlb_fill.vaddr = 48'h7FFF_1234_5000; dtlb_fill.ppn = 36'h0_ABCD_E123;
    tick(); idle();
    dtlb_req.valid = 1; dtlb_req.vaddr = 48'h7FFF_1234_5ABC; #1;
    check(dtlb_resp.hit && dtlb_resp.ppn == 36'h0_ABCD_E123, "TLB translation");
    tick(); idle();
    tlb_flush = 1; tick(); idle(); tick();
    check(dut.u_dtlb.rot == 4'd1, "D-TLB rotated on flush");
    dtlb_req.valid = 1; dtlb_req.vaddr = 48'h7FFF_1234_5ABC; #1;
    check(!dtlb_resp.hit, "TLB empty after flush rotation");
    tick(); idle();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
