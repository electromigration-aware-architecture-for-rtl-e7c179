// mod_rotator: modulo counter plus modulo adders that turn an architectural
// location (register identifier or cache set index field) into a physical
// one. It is the "RF rotator" and the "cache rotator" of the design.
//
// The counter rot counts rotation triggers modulo N. Each of N_PORTS lookup
// ports returns phys = (id + rot) mod N. For a power-of-two N the modulo is
// the natural wrap of the adder; for any other N a single conditional
// subtraction is used (both operands are below N). phys_next gives the same
// sum with rot+1, the mapping that holds after a rotation in progress, which
// a register file needs for a write that lands in the rotation cycle.
//
// Timing: lookups are combinational; rot moves on the rising clock edge after
// rotate is high. Synchronous active-low reset sets rot to zero.
module mod_rotator #(
  parameter int unsigned N       = 32,
  parameter int unsigned N_PORTS = 1,
  localparam int unsigned W      = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rotate,
  input  logic [W-1:0] id        [N_PORTS],
  output logic [W-1:0] phys      [N_PORTS],
  output logic [W-1:0] phys_next [N_PORTS],
  output logic [W-1:0] rot
);

  function automatic logic [W-1:0] add_mod(input logic [W-1:0] a, input logic [W-1:0] b);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (W+1)'(N)) s = s - (W+1)'(N);
    return s[W-1:0];
  endfunction

  logic [W-1:0] rot_inc;

  assign rot_inc = add_mod(rot, W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n)      rot <= '0;
    else if (rotate) rot <= rot_inc;
  end

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      phys[p]      = add_mod(id[p], rot);
      phys_next[p] = add_mod(id[p], rot_inc);
    end
  end

endmodule
