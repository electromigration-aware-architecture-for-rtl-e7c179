// em_cache: set-associative cache array with EM-aware set rotation. The same
// block serves as a TLB (entry = page translation instead of a data line).
//
// The address splits into tag | index | offset. The physical set is not the
// index field itself but (index + rot) mod SETS, where rot is the cache
// rotator (a mod_rotator; SETS is a power of two, so the modulo is the
// adder's wrap). A rotate pulse increments rot and invalidates every line in
// the same cycle, so no line is ever found under a stale mapping; over many
// rotations the lines of a hot index visit every physical set. The rotated
// set selection and the invalidate-on-rotate follow the design.
//
// Everything else is this implementation's choice, kept as simple as a
// working array allows: each way has its own tag array, data array and valid
// vector (as a way-sliced SRAM would); lookup is
// combinational (hit, hit_way and rdata in the request cycle); a write hit
// merges req_wdata into the line under req_be (BE_W equal chunks); a fill
// writes a whole line into an invalid way of the set or, if none, into the
// way named by a round-robin victim pointer shared by all sets. The array is
// write-through: it keeps no dirty bits, so invalidation never loses data.
// flush invalidates every line without rotating. A store or fill in the
// same cycle as rotate or flush is dropped with the invalidation.
//
// Timing: single-cycle flash invalidation; writes on the rising edge;
// synchronous active-low reset clears valid bits, rotator and victim pointer.
module em_cache #(
  parameter int unsigned SETS   = em_pkg::L1D_SETS,
  parameter int unsigned WAYS   = em_pkg::L1D_WAYS,
  parameter int unsigned ADDR_W = em_pkg::PADDR_W,
  parameter int unsigned OFF_W  = em_pkg::LINE_OFF_W,
  parameter int unsigned LINE_W = em_pkg::LINE_W,
  parameter int unsigned BE_W   = LINE_W / 8,
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W = ADDR_W - OFF_W - IDX_W,
  localparam int unsigned CH_W  = LINE_W / BE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rotate,
  input  logic              flush,
  // lookup / store port
  input  logic              req_valid,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic              req_write,
  input  logic [LINE_W-1:0] req_wdata,
  input  logic [BE_W-1:0]   req_be,
  output logic              hit,
  output logic [WAY_W-1:0]  hit_way,
  output logic [LINE_W-1:0] rdata,
  // line fill from the next level
  input  logic              fill_valid,
  input  logic [ADDR_W-1:0] fill_addr,
  input  logic [LINE_W-1:0] fill_data,
  output logic [IDX_W-1:0]  rot
);

  logic [WAY_W-1:0]  victim_q;

  logic [IDX_W-1:0]  id        [2];
  logic [IDX_W-1:0]  phys      [2];
  logic [IDX_W-1:0]  phys_next [2];
  logic [TAG_W-1:0]  req_tag, fill_tag;
  logic [IDX_W-1:0]  req_set, fill_set;

  assign req_tag  = req_addr [ADDR_W-1 -: TAG_W];
  assign fill_tag = fill_addr[ADDR_W-1 -: TAG_W];
  assign id[0]    = req_addr [OFF_W +: IDX_W];
  assign id[1]    = fill_addr[OFF_W +: IDX_W];

  mod_rotator #(.N(SETS), .N_PORTS(2)) u_rotator (
    .clk, .rst_n, .rotate, .id, .phys, .phys_next, .rot
  );

  assign req_set  = phys[0];
  assign fill_set = phys[1];

  logic invalidate_all, do_store, do_fill;
  logic [WAYS-1:0]   req_match, fill_match, fill_inval;
  logic [LINE_W-1:0] way_rdata [WAYS];
  logic [WAY_W-1:0]  fill_way;
  logic              fill_found;

  assign invalidate_all = rotate || flush;
  assign do_store       = hit && req_write && !invalidate_all;
  assign do_fill        = fill_valid && !invalidate_all;

  // one tag array, data array and valid vector per way, as in a way-sliced SRAM
  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [TAG_W-1:0]  tag_mem  [SETS];
    logic [LINE_W-1:0] data_mem [SETS];
    logic [SETS-1:0]   valid_q;

    assign req_match[w]  = valid_q[req_set]  && (tag_mem[req_set]  == req_tag);
    assign fill_match[w] = valid_q[fill_set] && (tag_mem[fill_set] == fill_tag);
    assign fill_inval[w] = !valid_q[fill_set];
    assign way_rdata[w]  = data_mem[req_set];

    // valid bits: flash clear on rotation or flush, set by a fill
    always_ff @(posedge clk) begin
      if (!rst_n || invalidate_all)                  valid_q <= '0;
      else if (do_fill && (fill_way == WAY_W'(w)))   valid_q[fill_set] <= 1'b1;
    end

    // tag and data (no reset: guarded by the valid bits)
    always_ff @(posedge clk) begin
      if (do_store && (hit_way == WAY_W'(w))) begin
        for (int b = 0; b < BE_W; b++)
          if (req_be[b]) data_mem[req_set][b*CH_W +: CH_W] <= req_wdata[b*CH_W +: CH_W];
      end
      if (do_fill && (fill_way == WAY_W'(w))) begin
        tag_mem[fill_set]  <= fill_tag;
        data_mem[fill_set] <= fill_data;
      end
    end
  end

  // lookup
  always_comb begin
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (req_match[w]) hit_way = WAY_W'(w);
    hit   = req_valid && (req_match != '0);
    rdata = way_rdata[hit_way];
  end

  // fill way: the matching way, else the lowest invalid way, else the victim
  always_comb begin
    fill_found = 1'b0;
    fill_way   = victim_q;
    for (int w = WAYS - 1; w >= 0; w--)
      if (fill_inval[w]) begin
        fill_way   = WAY_W'(w);
        fill_found = 1'b1;
      end
    for (int w = 0; w < WAYS; w++)
      if (fill_match[w]) begin
        fill_way   = WAY_W'(w);
        fill_found = 1'b1;
      end
  end

  // round-robin victim pointer, advanced when a fill evicts
  always_ff @(posedge clk) begin
    if (!rst_n)                       victim_q <= '0;
    else if (do_fill && !fill_found)  victim_q <= (victim_q == WAY_W'(WAYS - 1)) ? '0 : victim_q + 1'b1;
  end

  a_onehot_hit: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_match));

endmodule
