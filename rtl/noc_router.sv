// noc_router: five-port network-on-chip router with dynamic virtual-channel
// allocation from a unified buffer per input port.
//
// Each input port stores its flits in a UBS of 16 shared slots; any number of
// virtual channels (up to 16) can share those slots, so a busy port can give
// all of its buffering to a few VCs or spread it over many. A VC control table
// per port keeps, for each VC, the slots of its flits in arrival order. The
// tables, the downstream-VC availability tracers and the token dispensers are
// held and updated inside the VC allocator, and the switch allocator gets the
// updated tables from it: the control units are spread over the allocators as
// clocked logic rather than built as a separate combinational block.
//
// Pipeline of a packet (rising edges counted from the edge that stores the
// header, t):
//   edge t    header written to a free UBS slot; routing unit result and slot
//             number written to the VC control table (RC in parallel with BW)
//   cycle t+1 VC allocation; edge t+1 makes the VC active
//   cycle t+2 switch allocation; edge t+2 reads the UBS slot
//   cycle t+3 crossbar traversal; the header is on the output link
// A header therefore leaves three cycles after it arrived and the following
// flits of a packet stream at one flit per cycle behind it.
//
// Link protocol, per port p (this design's choice; the paper gives the credit
// role of the slot availability tracer and the VC numbers of the table):
//   in_valid/in_vc/in_flit    flit from the upstream router, tagged with the
//                             VC the upstream router's token dispenser chose
//   up_credit                 one pulse per UBS slot freed (to upstream)
//   up_rel_valid/up_rel_vc    a VC of this port is free again (to upstream)
//   out_valid/out_vc/out_flit flit to the downstream router
//   ds_credit                 one pulse per slot freed downstream
//   ds_rel_valid/ds_rel_vc    a downstream VC is free again
// The upstream side must keep to these credits: it may send a flit only with
// a credit in hand, open a VC only when it was released, and send the flits
// of one packet on one VC. Port 0 is the local core; 1..4 are N, E, S, W.
// `cur_x`/`cur_y` are the router's mesh coordinates for XY routing.
// Observation outputs count nothing themselves; they expose the allocator
// decisions (VA grants, credit stalls, free slot counts) for testbenches.
module noc_router
  import noc_pkg::*;
#(
  parameter int PORTS  = noc_pkg::NUM_PORTS,
  parameter int SLOTS  = noc_pkg::NUM_SLOTS,
  parameter int VCS    = noc_pkg::NUM_VCS,
  parameter int FLIT_W = noc_pkg::FLIT_WIDTH,
  parameter int DEPTH  = noc_pkg::PKT_FLITS,
  localparam int VW    = $clog2(VCS),
  localparam int SW    = $clog2(SLOTS),
  localparam int PW    = $clog2(PORTS),
  localparam int FCW   = $clog2(SLOTS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  // input links
  input  logic               in_valid     [PORTS],
  input  logic [VW-1:0]      in_vc        [PORTS],
  input  logic [FLIT_W-1:0]  in_flit      [PORTS],
  output logic               up_credit    [PORTS],
  output logic               up_rel_valid [PORTS],
  output logic [VW-1:0]      up_rel_vc    [PORTS],
  output logic [FCW-1:0]     up_free_slots[PORTS],
  // output links
  output logic               out_valid    [PORTS],
  output logic [VW-1:0]      out_vc       [PORTS],
  output logic [FLIT_W-1:0]  out_flit     [PORTS],
  input  logic               ds_credit    [PORTS],
  input  logic               ds_rel_valid [PORTS],
  input  logic [VW-1:0]      ds_rel_vc    [PORTS],
  // observation
  output logic               obs_va_valid [PORTS],
  output logic               obs_credit_stall [PORTS]
);

  // ---------------- input ports: UBS, slot tracer, routing unit ----------------
  logic [SW-1:0]     alloc_slot [PORTS];
  logic              has_free   [PORTS];
  logic [SLOTS-1:0]  slot_free  [PORTS];
  logic              rd_en      [PORTS];
  logic [SW-1:0]     rd_slot    [PORTS];
  logic [FLIT_W-1:0] rd_flit    [PORTS];
  logic              rd_valid   [PORTS];
  port_e             route      [PORTS];
  flit_type_e        in_type    [PORTS];

  for (genvar p = 0; p < PORTS; p++) begin : g_in
    ubs #(.FLIT_W(FLIT_W), .SLOTS(SLOTS)) u_ubs (
      .clk, .rst_n,
      .wr_en    (in_valid[p]),
      .wr_slot  (alloc_slot[p]),
      .wr_flit  (in_flit[p]),
      .rd_en    (rd_en[p]),
      .rd_slot  (rd_slot[p]),
      .rd_flit  (rd_flit[p]),
      .rd_valid (rd_valid[p]),
      .slot_free(slot_free[p])
    );
    slot_availability_tracer #(.SLOTS(SLOTS)) u_slots (
      .clk, .rst_n,
      .slot_free (slot_free[p]),
      .flit_out  (rd_en[p]),
      .alloc_slot(alloc_slot[p]),
      .has_free  (has_free[p]),
      .free_count(up_free_slots[p]),
      .credit_out(up_credit[p])
    );
    routing_unit #(.FLIT_W(FLIT_W)) u_rc (
      .cur_x, .cur_y,
      .header  (in_flit[p]),
      .out_port(route[p])
    );
    assign in_type[p] = flit_type_e'(in_flit[p][1:0]);

    a_room : assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid[p] |-> has_free[p]);
  end

  // ---------------- VC allocator with the control units ----------------
  vc_state_e     tbl_state     [PORTS][VCS];
  port_e         tbl_route     [PORTS][VCS];
  logic [VW-1:0] tbl_out_vc    [PORTS][VCS];
  logic [$clog2(DEPTH+1)-1:0] tbl_count [PORTS][VCS];
  logic [SW-1:0] tbl_head_slot [PORTS][VCS];
  flit_type_e    tbl_head_type [PORTS][VCS];
  logic          dep_en [PORTS];
  logic [VW-1:0] dep_vc [PORTS];
  logic [PW-1:0] va_in     [PORTS];
  logic [VW-1:0] va_in_vc  [PORTS];
  logic [VW-1:0] va_out_vc [PORTS];

  vc_allocator #(.PORTS(PORTS), .VCS(VCS), .SLOTS(SLOTS), .DEPTH(DEPTH)) u_va (
    .clk, .rst_n,
    .arr_en       (in_valid),
    .arr_vc       (in_vc),
    .arr_slot     (alloc_slot),
    .arr_type     (in_type),
    .arr_route    (route),
    .dep_en       (dep_en),
    .dep_vc       (dep_vc),
    .ds_rel_en    (ds_rel_valid),
    .ds_rel_vc    (ds_rel_vc),
    .tbl_state    (tbl_state),
    .tbl_route    (tbl_route),
    .tbl_out_vc   (tbl_out_vc),
    .tbl_count    (tbl_count),
    .tbl_head_slot(tbl_head_slot),
    .tbl_head_type(tbl_head_type),
    .us_rel_en    (up_rel_valid),
    .us_rel_vc    (up_rel_vc),
    .va_valid     (obs_va_valid),
    .va_in        (va_in),
    .va_in_vc     (va_in_vc),
    .va_out_vc    (va_out_vc)
  );

  // ---------------- switch allocator ----------------
  logic          xb_valid [PORTS];
  logic [PW-1:0] xb_sel   [PORTS];
  logic [VW-1:0] xb_vc    [PORTS];
  logic [$clog2(SLOTS+1)-1:0] credits [PORTS];

  switch_allocator #(.PORTS(PORTS), .VCS(VCS), .SLOTS(SLOTS), .DEPTH(DEPTH),
                     .DS_SLOTS(SLOTS)) u_sa (
    .clk, .rst_n,
    .tbl_state    (tbl_state),
    .tbl_route    (tbl_route),
    .tbl_out_vc   (tbl_out_vc),
    .tbl_count    (tbl_count),
    .tbl_head_slot(tbl_head_slot),
    .credit_in    (ds_credit),
    .dep_en       (dep_en),
    .dep_vc       (dep_vc),
    .rd_en        (rd_en),
    .rd_slot      (rd_slot),
    .xb_valid     (xb_valid),
    .xb_sel       (xb_sel),
    .xb_vc        (xb_vc),
    .credits      (credits),
    .credit_stall (obs_credit_stall)
  );

  // ---------------- crossbar ----------------
  crossbar #(.PORTS(PORTS), .FLIT_W(FLIT_W), .VCS(VCS)) u_xbar (
    .in_flit  (rd_flit),
    .valid    (xb_valid),
    .sel      (xb_sel),
    .vc_in    (xb_vc),
    .out_valid(out_valid),
    .out_vc   (out_vc),
    .out_flit (out_flit)
  );

  for (genvar o = 0; o < PORTS; o++) begin : g_chk
    a_xb_data : assert property (@(posedge clk) disable iff (!rst_n)
                                 xb_valid[o] |-> rd_valid[xb_sel[o]]);
  end

endmodule
