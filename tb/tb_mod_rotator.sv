// tb_mod_rotator: self-checking test of the modulo rotator for a
// non-power-of-two modulus (34, the integer register file with flags and
// stack pointer) and a power-of-two one (64, the L1-D set count).
// Every cycle all ids are checked against (id + rot) mod N and (id + rot + 1)
// mod N, with rot predicted by counting rotate pulses.
module tb_mod_rotator;
  logic clk = 0, rst_n = 0;
  logic rotate;
  logic [5:0] id_a [2], phys_a [2], next_a [2], rot_a;
  logic [5:0] id_b [1], phys_b [1], next_b [1], rot_b;
  int checks = 0, failures = 0;

  mod_rotator #(.N(34), .N_PORTS(2)) dut_a (.clk, .rst_n, .rotate, .id(id_a), .phys(phys_a), .phys_next(next_a), .rot(rot_a));
  mod_rotator #(.N(64), .N_PORTS(1)) dut_b (.clk, .rst_n, .rotate, .id(id_b), .phys(phys_b), .phys_next(next_b), .rot(rot_b));

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
    int ra, rb;
    rotate = 0;
    id_a[0] = 0; id_a[1] = 0; id_b[0] = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    ra = 0; rb = 0;
    for (int c = 0; c < 10000; c++) begin
      rotate  = ($urandom_range(0, 3) == 0);
      id_a[0] = 6'($urandom_range(0, 33));
      id_a[1] = 6'($urandom_range(0, 33));
      id_b[0] = 6'($urandom_range(0, 63));
      #1;
      check(rot_a == 6'(ra) && rot_b == 6'(rb), "rot");
      for (int p = 0; p < 2; p++) begin
        check(phys_a[p] == 6'((id_a[p] + ra) % 34), "phys a");
        check(next_a[p] == 6'((id_a[p] + ra + 1) % 34), "next a");
      end
      check(phys_b[0] == 6'((id_b[0] + rb) % 64), "phys b");
      check(next_b[0] == 6'((id_b[0] + rb + 1) % 64), "next b");
      @(posedge clk); #1;
      if (rotate) begin ra = (ra + 1) % 34; rb = (rb + 1) % 64; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
