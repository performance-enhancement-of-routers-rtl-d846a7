// slot_availability_tracer: keeps account of the free slots of one UBS.
//
// Following the paper, the tracer is updated together with the UBS: it looks
// at the UBS `slot_free` vector (TYPE bits 00) and learns from the UBS when a
// flit leaves (`flit_out`). From these it
//   * picks the slot for the next arriving flit: the lowest-numbered free slot
//     (`alloc_slot`, valid when `has_free`; combinational);
//   * counts the free slots (`free_count`, registered);
//   * returns a credit to the upstream router, one `credit_out` pulse per
//     slot freed, one cycle after the read edge (the paper's "Grant" to the
//     neighbouring router, sent as a credit).
// The upstream router starts with NUM_SLOTS credits for this port, spends one
// per flit sent and gets one back per pulse, so it can never overfill the UBS.
// The lowest-free-slot choice and the one-pulse-per-slot credit form are this
// design's own; the paper gives the free-slot test and the credit role.
module slot_availability_tracer
  import noc_pkg::*;
#(
  parameter int SLOTS = noc_pkg::NUM_SLOTS,
  localparam int SW   = $clog2(SLOTS),
  localparam int CW   = $clog2(SLOTS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SLOTS-1:0] slot_free,   // from the UBS
  input  logic             flit_out,    // a flit leaves the UBS this edge
  output logic [SW-1:0]    alloc_slot,
  output logic             has_free,
  output logic [CW-1:0]    free_count,
  output logic             credit_out
);

  always_comb begin
    has_free   = 1'b0;
    alloc_slot = '0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (slot_free[s]) begin
        has_free   = 1'b1;
        alloc_slot = SW'(s);
      end
    end
  end

  logic [CW-1:0] count_now;
  always_comb begin
    count_now = '0;
    for (int s = 0; s < SLOTS; s++) count_now += CW'(slot_free[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      free_count <= CW'(SLOTS);
      credit_out <= 1'b0;
    end else begin
      free_count <= count_now;
      credit_out <= flit_out;
    end
  end

endmodule
