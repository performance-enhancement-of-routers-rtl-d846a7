// crossbar: the PORTS x PORTS switch of the router (5 x 5 by default).
//
// Each output port has a PORTS:1 multiplexer that selects the flit read from
// the UBS of input `sel[o]`. The switch allocator sets `sel`, `valid` and the
// downstream VC number `vc_in` one cycle ahead, in registers aligned with the
// UBS read data, so the crossbar itself is combinational and the flits it
// forwards leave the router in the same cycle (`out_valid`, `out_vc`,
// `out_flit`). At most one output selects a given input: the switch allocator
// grants each input once per cycle. A plain square crossbar, one multiplexer
// per output, is this design's choice; the paper only names the module.
module crossbar
  import noc_pkg::*;
#(
  parameter int PORTS  = noc_pkg::NUM_PORTS,
  parameter int FLIT_W = noc_pkg::FLIT_WIDTH,
  parameter int VCS    = noc_pkg::NUM_VCS,
  localparam int PW    = $clog2(PORTS),
  localparam int VW    = $clog2(VCS)
) (
  input  logic [FLIT_W-1:0] in_flit   [PORTS],
  input  logic              valid     [PORTS],
  input  logic [PW-1:0]     sel       [PORTS],
  input  logic [VW-1:0]     vc_in     [PORTS],
  output logic              out_valid [PORTS],
  output logic [VW-1:0]     out_vc    [PORTS],
  output logic [FLIT_W-1:0] out_flit  [PORTS]
);

  always_comb begin
    for (int o = 0; o < PORTS; o++) begin
      out_valid[o] = valid[o];
      out_vc[o]    = vc_in[o];
      out_flit[o]  = '0;
      for (int i = 0; i < PORTS; i++)
        if (sel[o] == PW'(i)) out_flit[o] = in_flit[i];
    end
  end

endmodule
