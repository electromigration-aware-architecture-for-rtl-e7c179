// alu_alloc_counter: EM-aware execution-unit allocation with a free-running
// counter ("option 1").
//
// A CNT_W-bit counter increments every clock cycle and wraps to zero when it
// runs out. The leading unit of a cycle is counter mod N_ALU; the k
// instructions issued in that cycle take units lead, lead+1, ... (mod N_ALU),
// so the starting point of the allocation moves every cycle and no unit is
// permanently favoured. The counter width and the modulo rule follow the
// design; the ordering of the slots after the leading unit is this
// implementation's choice.
//
// Interface: grant and slot_alu are combinational in k and the counter;
// slot_alu[j] is the unit of the j-th instruction, valid for j < k. A k above
// N_ALU is clamped. Synchronous active-low reset clears the counter.
module alu_alloc_counter #(
  parameter int unsigned N_ALU = em_pkg::N_ALU,
  parameter int unsigned CNT_W = em_pkg::ALU_CNT_W,
  localparam int unsigned KW   = $clog2(N_ALU + 1),
  localparam int unsigned IW   = (N_ALU > 1) ? $clog2(N_ALU) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KW-1:0]    k,
  output logic [N_ALU-1:0] grant,
  output logic [IW-1:0]    slot_alu [N_ALU],
  output logic [IW-1:0]    lead
);

  logic [CNT_W-1:0] cnt_q;
  logic [KW-1:0]    k_eff;

  always_ff @(posedge clk) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= cnt_q + 1'b1;  // wraps to zero when it expires
  end

  assign lead = IW'(cnt_q % CNT_W'(N_ALU));

  always_comb begin
    int unsigned u;
    k_eff = (k > KW'(N_ALU)) ? KW'(N_ALU) : k;
    grant = '0;
    for (int j = 0; j < N_ALU; j++) begin
      u = (int'(lead) + j) % N_ALU;
      slot_alu[j] = IW'(u);
      if (j < int'(k_eff)) grant[u] = 1'b1;
    end
  end

endmodule
