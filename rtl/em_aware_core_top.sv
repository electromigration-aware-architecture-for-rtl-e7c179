// em_aware_core_top: the EM-aware resource-allocation structures of one
// out-of-order core, wired together with their rotate triggers.
//
// Contents:
//   * ALU allocator for N_ALU single-cycle ALUs: Algorithm 1 (one bit per
//     ALU, the default) or the free-running-counter option, by ALU_ALLOC.
//   * Integer register file of N_GPR registers plus the flags and stack
//     pointer (architectural ids N_GPR and N_GPR+1), and a vector/FP register
//     file of N_FPR registers, both with rotated mapping (em_regfile).
//   * L1-D, L1-I, L2 and L3 caches and the D-TLB, each with rotated set
//     selection and invalidate-on-rotate (em_cache).
//   * Rotate triggers: the register files rotate every RF_PERIOD clock
//     cycles or on a CR3 write or a return from interrupt; the D-TLB every
//     CACHE_PERIOD D-TLB accesses or on a TLB flush; L1-D and L1-I every
//     CACHE_PERIOD accesses of their own; L2 and L3 every CACHE_PERIOD
//     accesses of their own or on a wake-up from sleep.
// The structures, their sizes and the trigger sources follow the design.
// The core around them (instruction window, ALUs, miss handling, CR3 and
// interrupt logic) is not part of this block: the ready-instruction count
// comes in on alu_k and the grants go out; refills come in on the fill
// ports; the events come in as one-cycle strobes. em_enable = 0 freezes all
// rotations (the mapping then behaves as a conventional fixed mapping).
// rot_pulse reports, one cycle wide, each rotation as it happens.
//
// Timing: all lookups and register reads are combinational in the request
// cycle; writes, fills, rotations and allocator state change on the rising
// edge. Synchronous active-low reset.
module em_aware_core_top
  import em_pkg::*;
#(
  parameter alu_alloc_e  ALU_ALLOC    = ALLOC_EM_BITS,
  parameter int unsigned N_ALU_P      = em_pkg::N_ALU,
  parameter int unsigned N_GPR_P      = em_pkg::N_GPR,
  parameter int unsigned N_FPR_P      = em_pkg::N_FPR,
  parameter int unsigned RF_PERIOD    = em_pkg::ROT_PERIOD,
  parameter int unsigned CACHE_PERIOD = em_pkg::ROT_PERIOD,
  parameter int unsigned L1D_SETS_P   = em_pkg::L1D_SETS,
  parameter int unsigned L1D_WAYS_P   = em_pkg::L1D_WAYS,
  parameter int unsigned L1I_SETS_P   = em_pkg::L1I_SETS,
  parameter int unsigned L1I_WAYS_P   = em_pkg::L1I_WAYS,
  parameter int unsigned L2_SETS_P    = em_pkg::L2_SETS,
  parameter int unsigned L2_WAYS_P    = em_pkg::L2_WAYS,
  parameter int unsigned L3_SETS_P    = em_pkg::L3_SETS,
  parameter int unsigned L3_WAYS_P    = em_pkg::L3_WAYS,
  parameter int unsigned DTLB_SETS_P  = em_pkg::DTLB_SETS,
  parameter int unsigned DTLB_WAYS_P  = em_pkg::DTLB_WAYS,
  localparam int unsigned KW     = $clog2(N_ALU_P + 1),
  localparam int unsigned AIW    = (N_ALU_P > 1) ? $clog2(N_ALU_P) : 1,
  localparam int unsigned N_INT  = N_GPR_P + N_INT_EXTRA,
  localparam int unsigned IAW    = $clog2(N_INT),
  localparam int unsigned FAW    = $clog2(N_FPR_P)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              em_enable,
  // system events that may trigger a rotation
  input  logic              cr3_write,
  input  logic              iret,
  input  logic              tlb_flush,
  input  logic              sleep_wakeup,
  // ALU allocation
  input  logic [KW-1:0]     alu_k,
  output logic [N_ALU_P-1:0] alu_grant,
  output logic [AIW-1:0]    alu_slot [N_ALU_P],
  // integer register file (GPRs, flags, stack pointer)
  input  logic [IAW-1:0]    int_raddr [RF_RD_PORTS],
  output logic [GPR_W-1:0]  int_rdata [RF_RD_PORTS],
  input  logic              int_we,
  input  logic [IAW-1:0]    int_waddr,
  input  logic [GPR_W-1:0]  int_wdata,
  // vector / FP register file
  input  logic [FAW-1:0]    fp_raddr [RF_RD_PORTS],
  output logic [FPR_W-1:0]  fp_rdata [RF_RD_PORTS],
  input  logic              fp_we,
  input  logic [FAW-1:0]    fp_waddr,
  input  logic [FPR_W-1:0]  fp_wdata,
  // caches
  input  line_req_t         l1d_req,  input line_fill_t l1d_fill,  output line_resp_t l1d_resp,
  input  line_req_t         l1i_req,  input line_fill_t l1i_fill,  output line_resp_t l1i_resp,
  input  line_req_t         l2_req,   input line_fill_t l2_fill,   output line_resp_t l2_resp,
  input  line_req_t         l3_req,   input line_fill_t l3_fill,   output line_resp_t l3_resp,
  // D-TLB
  input  tlb_req_t          dtlb_req, input tlb_fill_t  dtlb_fill, output tlb_resp_t  dtlb_resp,
  output rot_pulse_t        rot_pulse
);

  // ---------------------------------------------------------------- ALUs
  generate
    if (ALU_ALLOC == ALLOC_COUNTER) begin : g_alloc_counter
      logic [AIW-1:0] lead;
      alu_alloc_counter #(.N_ALU(N_ALU_P)) u_alloc (
        .clk, .rst_n, .k(alu_k), .grant(alu_grant), .slot_alu(alu_slot), .lead
      );
    end else begin : g_alloc_em
      logic [N_ALU_P-1:0] ex_counter;
      logic               global_counter;
      alu_alloc_em #(.N_ALU(N_ALU_P)) u_alloc (
        .clk, .rst_n, .k(alu_k), .grant(alu_grant), .slot_alu(alu_slot),
        .ex_counter, .global_counter
      );
    end
  endgenerate

  // ------------------------------------------------------ register files
  logic [IAW-1:0] int_rot;
  logic [FAW-1:0] fp_rot;

  rotate_trigger #(.PERIOD(RF_PERIOD)) u_rf_trig (
    .clk, .rst_n, .enable(em_enable), .count_en(1'b1),
    .ext_event(cr3_write || iret), .trigger(rot_pulse.rf)
  );

  em_regfile #(.N_REGS(N_INT), .DATA_W(GPR_W), .N_RD(RF_RD_PORTS)) u_int_rf (
    .clk, .rst_n, .rotate(rot_pulse.rf),
    .raddr(int_raddr), .rdata(int_rdata),
    .we(int_we), .waddr(int_waddr), .wdata(int_wdata), .rot(int_rot)
  );

  em_regfile #(.N_REGS(N_FPR_P), .DATA_W(FPR_W), .N_RD(RF_RD_PORTS)) u_fp_rf (
    .clk, .rst_n, .rotate(rot_pulse.rf),
    .raddr(fp_raddr), .rdata(fp_rdata),
    .we(fp_we), .waddr(fp_waddr), .wdata(fp_wdata), .rot(fp_rot)
  );

  // -------------------------------------------------------------- caches
  logic [$clog2(L1D_SETS_P)-1:0]  l1d_rot;
  logic [$clog2(L1I_SETS_P)-1:0]  l1i_rot;
  logic [$clog2(L2_SETS_P)-1:0]   l2_rot;
  logic [$clog2(L3_SETS_P)-1:0]   l3_rot;
  logic [$clog2(DTLB_SETS_P)-1:0] dtlb_rot;
  logic [$clog2(L1D_WAYS_P)-1:0]  l1d_way;
  logic [$clog2(L1I_WAYS_P)-1:0]  l1i_way;
  logic [$clog2(L2_WAYS_P)-1:0]   l2_way;
  logic [$clog2(L3_WAYS_P)-1:0]   l3_way;
  logic [$clog2(DTLB_WAYS_P)-1:0] dtlb_way;

  rotate_trigger #(.PERIOD(CACHE_PERIOD)) u_l1d_trig (
    .clk, .rst_n, .enable(em_enable), .count_en(l1d_req.valid),
    .ext_event(1'b0), .trigger(rot_pulse.l1d)
  );
  em_cache #(.SETS(L1D_SETS_P), .WAYS(L1D_WAYS_P)) u_l1d (
    .clk, .rst_n, .rotate(rot_pulse.l1d), .flush(1'b0),
    .req_valid(l1d_req.valid), .req_addr(l1d_req.addr), .req_write(l1d_req.write),
    .req_wdata(l1d_req.wdata), .req_be(l1d_req.be),
    .hit(l1d_resp.hit), .hit_way(l1d_way), .rdata(l1d_resp.data),
    .fill_valid(l1d_fill.valid), .fill_addr(l1d_fill.addr), .fill_data(l1d_fill.data),
    .rot(l1d_rot)
  );

  // the instruction cache is read-only: it is written only by line fills
  rotate_trigger #(.PERIOD(CACHE_PERIOD)) u_l1i_trig (
    .clk, .rst_n, .enable(em_enable), .count_en(l1i_req.valid),
    .ext_event(1'b0), .trigger(rot_pulse.l1i)
  );
  em_cache #(.SETS(L1I_SETS_P), .WAYS(L1I_WAYS_P)) u_l1i (
    .clk, .rst_n, .rotate(rot_pulse.l1i), .flush(1'b0),
    .req_valid(l1i_req.valid), .req_addr(l1i_req.addr), .req_write(1'b0),
    .req_wdata(l1i_req.wdata), .req_be(l1i_req.be),
    .hit(l1i_resp.hit), .hit_way(l1i_way), .rdata(l1i_resp.data),
    .fill_valid(l1i_fill.valid), .fill_addr(l1i_fill.addr), .fill_data(l1i_fill.data),
    .rot(l1i_rot)
  );

  rotate_trigger #(.PERIOD(CACHE_PERIOD)) u_l2_trig (
    .clk, .rst_n, .enable(em_enable), .count_en(l2_req.valid),
    .ext_event(sleep_wakeup), .trigger(rot_pulse.l2)
  );
  em_cache #(.SETS(L2_SETS_P), .WAYS(L2_WAYS_P)) u_l2 (
    .clk, .rst_n, .rotate(rot_pulse.l2), .flush(1'b0),
    .req_valid(l2_req.valid), .req_addr(l2_req.addr), .req_write(l2_req.write),
    .req_wdata(l2_req.wdata), .req_be(l2_req.be),
    .hit(l2_resp.hit), .hit_way(l2_way), .rdata(l2_resp.data),
    .fill_valid(l2_fill.valid), .fill_addr(l2_fill.addr), .fill_data(l2_fill.data),
    .rot(l2_rot)
  );

  rotate_trigger #(.PERIOD(CACHE_PERIOD)) u_l3_trig (
    .clk, .rst_n, .enable(em_enable), .count_en(l3_req.valid),
    .ext_event(sleep_wakeup), .trigger(rot_pulse.l3)
  );
  em_cache #(.SETS(L3_SETS_P), .WAYS(L3_WAYS_P)) u_l3 (
    .clk, .rst_n, .rotate(rot_pulse.l3), .flush(1'b0),
    .req_valid(l3_req.valid), .req_addr(l3_req.addr), .req_write(l3_req.write),
    .req_wdata(l3_req.wdata), .req_be(l3_req.be),
    .hit(l3_resp.hit), .hit_way(l3_way), .rdata(l3_resp.data),
    .fill_valid(l3_fill.valid), .fill_addr(l3_fill.addr), .fill_data(l3_fill.data),
    .rot(l3_rot)
  );

  // D-TLB: tag | set index | 4 KiB page offset; an entry holds a PPN. A TLB
  // flush by the system is itself a rotation point, so it rotates and
  // invalidates through the trigger.
  rotate_trigger #(.PERIOD(CACHE_PERIOD)) u_dtlb_trig (
    .clk, .rst_n, .enable(em_enable), .count_en(dtlb_req.valid),
    .ext_event(tlb_flush), .trigger(rot_pulse.dtlb)
  );
  em_cache #(.SETS(DTLB_SETS_P), .WAYS(DTLB_WAYS_P), .ADDR_W(VADDR_W),
             .OFF_W(PAGE_OFF_W), .LINE_W(PPN_W), .BE_W(1)) u_dtlb (
    .clk, .rst_n, .rotate(rot_pulse.dtlb), .flush(tlb_flush && !em_enable),
    .req_valid(dtlb_req.valid), .req_addr(dtlb_req.vaddr), .req_write(1'b0),
    .req_wdata('0), .req_be('0),
    .hit(dtlb_resp.hit), .hit_way(dtlb_way), .rdata(dtlb_resp.ppn),
    .fill_valid(dtlb_fill.valid), .fill_addr(dtlb_fill.vaddr), .fill_data(dtlb_fill.ppn),
    .rot(dtlb_rot)
  );

endmodule
