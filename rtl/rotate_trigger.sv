// rotate_trigger: pulse trigger that tells a rotator to move its mapping.
//
// The design rotates a structure's mapping either periodically or on an
// event that already disturbs the structure (a CR3 write or a return from
// interrupt for register files, a TLB flush, a wake-up from sleep for the
// large caches). This block counts qualifying events on count_en (tie it
// high to count clock cycles, or to the access strobe to count accesses)
// and raises trigger for one cycle after every PERIOD of them. An ext_event
// raises trigger at once and restarts the count; enable gates both sources.
// The restart on an external event and the one-cycle registered pulse are
// this implementation's choices.
//
// Timing: trigger is registered; it is high in the cycle after the
// PERIOD-th counted event or after ext_event. Synchronous active-low reset.
module rotate_trigger #(
  parameter int unsigned PERIOD = em_pkg::ROT_PERIOD,
  localparam int unsigned CW    = (PERIOD > 1) ? $clog2(PERIOD) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,
  input  logic count_en,
  input  logic ext_event,
  output logic trigger
);

  logic [CW-1:0] cnt_q;
  logic          wrap;

  assign wrap = count_en && (cnt_q == CW'(PERIOD - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      trigger <= 1'b0;
    end else begin
      trigger <= enable && (ext_event || wrap);
      if (!enable || ext_event || wrap) cnt_q <= '0;
      else if (count_en)                cnt_q <= cnt_q + 1'b1;
    end
  end

endmodule
