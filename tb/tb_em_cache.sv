// tb_em_cache: self-checking test of the rotating set-associative cache.
//
// A 16-set, 4-way instance with 64-bit lines (8 byte enables) and 32-bit
// addresses runs against a write-through backing-store model:
//   * random fills, loads, partial stores and rotate pulses; every hit must
//     return the current backing-store contents of the line, and a line just
//     filled must hit in the next cycle;
//   * after a rotate pulse (or a flush) nothing hits, and rot has advanced;
//   * a filled line sits in physical set (index + rot) mod 16, checked
//     through the valid and tag arrays;
//   * 4 lines of one index all stay resident, a 5th evicts exactly one;
//   * a single hot index, filled between rotations, lands in all 16
//     physical sets over 16 rotations.
module tb_em_cache;
  localparam int SETS = 16, WAYS = 4, AW = 32, OFF = 6, LW = 64, BE = 8;
  localparam int IW = 4, TW = AW - OFF - IW;

  logic clk = 0, rst_n = 0;
  logic rotate, flush, req_valid, req_write, hit, fill_valid;
  logic [AW-1:0] req_addr, fill_addr;
  logic [LW-1:0] req_wdata, rdata, fill_data;
  logic [BE-1:0] req_be;
  logic [1:0]    hit_way;
  logic [IW-1:0] rot;
  int checks = 0, failures = 0;

  em_cache #(.SETS(SETS), .WAYS(WAYS), .ADDR_W(AW), .OFF_W(OFF), .LINE_W(LW), .BE_W(BE)) dut (.*);

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

  // mirrors of the per-way valid vectors and tag arrays
  logic [SETS-1:0] v_w [WAYS];
  logic [TW-1:0]   t_w [WAYS][SETS];
  for (genvar w = 0; w < WAYS; w++) begin : g_mirror
    assign v_w[w] = dut.g_way[w].valid_q;
    for (genvar s = 0; s < SETS; s++) begin : g_set
      assign t_w[w][s] = dut.g_way[w].tag_mem[s];
    end
  end

  function automatic bit all_invalid();
    for (int w = 0; w < WAYS; w++) if (v_w[w] != '0) return 0;
    return 1;
  endfunction

  logic [LW-1:0] mem [bit [AW-OFF-1:0]];   // backing store, by line address
  int ref_rot;

  function automatic logic [LW-1:0] mem_rd(input logic [AW-1:0] a);
    if (mem.exists(a[AW-1:OFF])) return mem[a[AW-1:OFF]];
    return LW'(a[AW-1:OFF]) * 64'h9E37_79B9_7F4A_7C15;
  endfunction

  function automatic logic [AW-1:0] rnd_addr(input int nlines);
    return AW'($urandom_range(0, nlines - 1)) << OFF;
  endfunction

  // is line a present in physical set (idx + rot)?
  function automatic bit placed(input logic [AW-1:0] a, input int r);
    int s;
    s = (int'(a[OFF +: IW]) + r) % SETS;
    for (int w = 0; w < WAYS; w++)
      if (v_w[w][s] && t_w[w][s] == a[AW-1 -: TW]) return 1;
    return 0;
  endfunction

  task automatic idle();
    rotate = 0; flush = 0; req_valid = 0; req_write = 0; fill_valid = 0; req_be = '0;
  endtask

  task automatic do_fill(input logic [AW-1:0] a);
    idle();
    fill_valid = 1; fill_addr = a; fill_data = mem_rd(a);
    @(posedge clk); #1;
    idle();
  endtask

  task automatic probe(input logic [AW-1:0] a, output bit h);
    idle();
    req_valid = 1; req_addr = a;
    #1;
    h = hit;
    if (hit) check(rdata == mem_rd(a), $sformatf("hit data %h", a));
    @(posedge clk); #1;
    idle();
  endtask

  initial begin
    int hits, n_res, sets_seen;
    bit h, seen [SETS];
    logic [AW-1:0] a, lines [WAYS+1];
    logic [LW-1:0] nd, mask;
    idle();
    req_addr = '0; fill_addr = '0; req_wdata = '0; fill_data = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1; #1;
    ref_rot = 0; hits = 0;

    // random traffic
    for (int c = 0; c < 6000; c++) begin
      a = rnd_addr(96);
      case ($urandom_range(0, 19))
        0: begin  // rotate
          rotate = 1;
          @(posedge clk); #1; idle();
          ref_rot = (ref_rot + 1) % SETS;
          check(rot == IW'(ref_rot), "rot advanced");
          check(all_invalid(), "all lines invalid after rotation");
        end
        1,2,3,4,5: begin  // fill, then it must hit and sit in the rotated set
          do_fill(a);
          check(placed(a, ref_rot), "fill placed in rotated set");
          probe(a, h);
          check(h, "hit after fill");
        end
        6,7,8,9: begin  // store: write-through to the backing store
          nd = {$urandom, $urandom};
          req_be = BE'($urandom);
          mask = '0;
          for (int b = 0; b < BE; b++) if (req_be[b]) mask[b*8 +: 8] = 8'hFF;
          req_valid = 1; req_write = 1; req_addr = a; req_wdata = nd;
          mem[a[AW-1:OFF]] = (mem_rd(a) & ~mask) | (nd & mask);
          @(posedge clk); #1; idle();
        end
        default: begin  // load
          probe(a, h);
          if (h) hits++;
        end
      endcase
    end
    check(hits > 100, $sformatf("load hits seen %0d", hits));

    // flush: nothing hits afterwards, rot unchanged
    flush = 1; @(posedge clk); #1; idle();
    check(all_invalid() && rot == IW'(ref_rot), "flush invalidates without rotating");

    // associativity: WAYS lines of one index stay, one more evicts exactly one
    for (int i = 0; i <= WAYS; i++) lines[i] = AW'((i * SETS + 5) << OFF);
    for (int i = 0; i < WAYS; i++) do_fill(lines[i]);
    n_res = 0;
    for (int i = 0; i < WAYS; i++) begin probe(lines[i], h); n_res += h; end
    check(n_res == WAYS, "all ways resident");
    do_fill(lines[WAYS]);
    n_res = 0;
    for (int i = 0; i <= WAYS; i++) begin probe(lines[i], h); n_res += h; end
    check(n_res == WAYS, $sformatf("exactly one eviction, resident %0d", n_res));

    // hot index: filled between rotations, it visits every physical set
    foreach (seen[i]) seen[i] = 0;
    a = AW'(3 << OFF);
    for (int r = 0; r < SETS; r++) begin
      do_fill(a);
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          if (v_w[w][s]) seen[s] = 1;
      rotate = 1; @(posedge clk); #1; idle();
      ref_rot = (ref_rot + 1) % SETS;
    end
    sets_seen = 0;
    foreach (seen[i]) sets_seen += seen[i];
    check(sets_seen == SETS, $sformatf("hot index spread over %0d sets", sets_seen));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
