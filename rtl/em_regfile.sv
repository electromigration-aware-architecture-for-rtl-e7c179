// em_regfile: register file whose architectural-to-physical mapping rotates
// so that heavily written architectural registers (RAX, flags, the stack
// pointer, ZMM0...) do not wear the same physical register for the life of
// the part.
//
// Physical register of architectural register a = (a + rot) mod N_REGS,
// where rot is the RF rotator (mod_rotator). Every physical register R[i]
// sits behind a 2-to-1 multiplexer that selects either the write port or its
// neighbour R[i-1] (R[0] takes R[N_REGS-1]). On a rotate pulse all registers
// load their neighbour at once and rot increments, so each value moves one
// place up together with its mapping and no architectural state changes.
// This structure follows the design; the number of read ports, the reset to
// zero and the handling of a write in the rotation cycle are choices of this
// implementation: a write in that cycle lands in the register the value will
// occupy after the shift, through that register's write-port input.
//
// Interface: N_RD combinational read ports (raddr -> rdata, same cycle) and
// one write port (we/waddr/wdata, written on the rising edge). Reads in the
// rotation cycle see the mapping before the shift. Architectural addresses
// at or above N_REGS are not allowed. Synchronous active-low reset.
module em_regfile #(
  parameter int unsigned N_REGS = em_pkg::N_GPR,
  parameter int unsigned DATA_W = em_pkg::GPR_W,
  parameter int unsigned N_RD   = em_pkg::RF_RD_PORTS,
  localparam int unsigned AW    = (N_REGS > 1) ? $clog2(N_REGS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rotate,
  input  logic [AW-1:0]     raddr [N_RD],
  output logic [DATA_W-1:0] rdata [N_RD],
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  output logic [AW-1:0]     rot
);

  logic [DATA_W-1:0] regs [N_REGS];
  logic [AW-1:0]     id        [N_RD+1];
  logic [AW-1:0]     phys      [N_RD+1];
  logic [AW-1:0]     phys_next [N_RD+1];
  logic [AW-1:0]     wphys;

  always_comb begin
    for (int p = 0; p < N_RD; p++) id[p] = raddr[p];
    id[N_RD] = waddr;
  end

  mod_rotator #(.N(N_REGS), .N_PORTS(N_RD + 1)) u_rotator (
    .clk, .rst_n, .rotate, .id, .phys, .phys_next, .rot
  );

  assign wphys = rotate ? phys_next[N_RD] : phys[N_RD];

  always_comb begin
    for (int p = 0; p < N_RD; p++) rdata[p] = regs[phys[p]];
  end

  // per-register 2:1 mux: write port or the neighbouring register
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REGS; i++) regs[i] <= '0;
    end else begin
      for (int i = 0; i < N_REGS; i++) begin
        if (we && (wphys == AW'(i)))  regs[i] <= wdata;
        else if (rotate)              regs[i] <= regs[(i + N_REGS - 1) % N_REGS];
      end
    end
  end

  a_waddr_range: assert property (@(posedge clk) disable iff (!rst_n) we |-> (int'(waddr) < N_REGS));

endmodule
