// alu_alloc_em: EM-aware execution-unit allocation with one state bit per
// unit (Algorithm 1 of the design, "option 2").
//
// Each cycle the scheduler asks for k units (0..N_ALU). Every unit carries an
// Ex_counter bit and the allocator one Global_counter bit. M is the set of
// units whose bit equals the global bit, i.e. the units that have been used
// less recently in the current round.
//   k <  |M| : the k lowest-numbered units of M are granted and their bits flip.
//   k >= |M| : all of M is granted, plus the k-|M| lowest-numbered units
//              outside M; every granted bit flips and the global bit flips.
// The lowest-index choice inside a set and the order of slot_alu (members of M
// first, then the others, each in ascending order) reproduce the worked
// example of the design (3 ALUs: k=2 -> 0,1; k=2 -> 2,0; k=3 -> 1,2,0).
// Where the prose says only the counters equal to the global counter are
// incremented in the second case, this block follows the algorithm listing
// and the example, which flip every granted unit.
//
// Interface: k is sampled with grant/slot_alu in the same cycle
// (combinational), the state bits update on the next rising clock edge.
// slot_alu[j] is the unit given to the j-th instruction, valid for j < k.
// A k above N_ALU is clamped to N_ALU. Synchronous active-low reset clears
// all bits, as the algorithm's initialisation does.
module alu_alloc_em #(
  parameter int unsigned N_ALU = em_pkg::N_ALU,
  localparam int unsigned KW   = $clog2(N_ALU + 1),
  localparam int unsigned IW   = (N_ALU > 1) ? $clog2(N_ALU) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [KW-1:0]        k,
  output logic [N_ALU-1:0]     grant,
  output logic [IW-1:0]        slot_alu [N_ALU],
  output logic [N_ALU-1:0]     ex_counter,
  output logic                 global_counter
);

  logic [N_ALU-1:0] ex_q, ex_d;
  logic             g_q, g_d;
  logic [N_ALU-1:0] m_set;
  logic [KW-1:0]    m_cnt, k_eff, need;

  always_comb begin
    k_eff = (k > KW'(N_ALU)) ? KW'(N_ALU) : k;
    m_set = ~(ex_q ^ {N_ALU{g_q}});
    m_cnt = '0;
    for (int i = 0; i < N_ALU; i++) m_cnt += KW'(m_set[i]);
  end

  always_comb begin
    int unsigned j;
    grant = '0;
    need  = '0;
    j     = 0;
    for (int s = 0; s < N_ALU; s++) slot_alu[s] = '0;
    g_d = g_q;
    if (k_eff < m_cnt) begin
      // Q subset of M, |Q| = k: take the lowest-numbered members of M
      for (int i = 0; i < N_ALU; i++) begin
        if (m_set[i] && (j < k_eff)) begin
          grant[i]    = 1'b1;
          slot_alu[j] = IW'(i);
          j++;
        end
      end
    end else begin
      // all of M, then k-|M| units from U\M, lowest-numbered first
      need = k_eff - m_cnt;
      for (int i = 0; i < N_ALU; i++) begin
        if (m_set[i]) begin
          grant[i]    = 1'b1;
          slot_alu[j] = IW'(i);
          j++;
        end
      end
      for (int i = 0; i < N_ALU; i++) begin
        if (!m_set[i] && (need != 0)) begin
          grant[i]    = 1'b1;
          slot_alu[j] = IW'(i);
          j++;
          need--;
        end
      end
      g_d = ~g_q;
    end
    ex_d = ex_q ^ grant;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ex_q <= '0;
      g_q  <= 1'b0;
    end else begin
      ex_q <= ex_d;
      g_q  <= g_d;
    end
  end

  assign ex_counter     = ex_q;
  assign global_counter = g_q;

  // the number of granted units always equals the request
  property p_grant_count;
    @(posedge clk) disable iff (!rst_n) $countones(grant) == int'(k_eff);
  endproperty
  a_grant_count: assert property (p_grant_count);

endmodule
