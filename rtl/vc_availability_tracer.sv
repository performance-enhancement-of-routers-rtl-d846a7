// vc_availability_tracer: which virtual channels of the downstream router
// behind one output port are free.
//
// One bit per downstream VC, 1 = in use. A VC becomes busy on the rising edge
// on which the token dispenser hands it to a packet (`alloc_en`, `alloc_vc`)
// and free again on the edge on which the downstream router reports that the
// packet's tail has left that VC (`rel_en`, `rel_vc`). The vector of free VCs
// is `vc_free` (registered). The paper places this tracer inside the VC
// allocator, which updates it after each allocation; the release report from
// the downstream router is this design's choice of how the tracer learns that
// a VC is empty again. Reset: all downstream VCs free.
module vc_availability_tracer
  import noc_pkg::*;
#(
  parameter int VCS  = noc_pkg::NUM_VCS,
  localparam int VW  = $clog2(VCS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           alloc_en,
  input  logic [VW-1:0]  alloc_vc,
  input  logic           rel_en,
  input  logic [VW-1:0]  rel_vc,
  output logic [VCS-1:0] vc_free
);

  logic [VCS-1:0] busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
    end else begin
      for (int v = 0; v < VCS; v++) begin
        if (alloc_en && alloc_vc == VW'(v))   busy[v] <= 1'b1;
        else if (rel_en && rel_vc == VW'(v))  busy[v] <= 1'b0;
      end
    end
  end

  assign vc_free = ~busy;

  a_alloc_free : assert property (@(posedge clk) disable iff (!rst_n)
                                   alloc_en |-> !busy[alloc_vc]);
  a_rel_busy   : assert property (@(posedge clk) disable iff (!rst_n)
                                   rel_en |-> busy[rel_vc]);

endmodule
