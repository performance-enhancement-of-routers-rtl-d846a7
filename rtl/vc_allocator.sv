// vc_allocator: the virtual-channel allocator (VA) of the router, which in
// this architecture also owns the VC control units.
//
// The paper's main point is where the control units live: instead of a
// separate combinational control block that both allocators talk to, the VC
// allocator holds the VC control tables (one per input port), the VC
// availability tracers (one per output port) and the token dispensers, and
// updates them itself on its own clock edge. The switch allocator reads the
// updated tables from the VA and returns only its departures.
//
// Allocation is separable, in two stages, with the arbiter counts of the paper:
//   stage 1: for every (input port, output port) pair a 16:1 arbiter picks one
//            of the input's VCs whose header waits for a VC towards that output
//            (5 x 5 = 25 arbiters of 16:1);
//   stage 2: for every output port a 5:1 arbiter picks one input port among
//            the stage-1 winners, provided the port's token dispenser has a
//            free downstream VC (5 arbiters of 5:1).
// The stage-2 winner receives the token (a downstream VC number); on the same
// rising edge its table entry turns active and the tracer marks the VC busy.
// Up to one allocation per output port per cycle. A stage-1 arbiter moves its
// mask only when its winner also wins stage 2.
//
// Interface (arrays indexed by port, then VC):
//   arr_*            flit arrivals from the input ports (slot, VC, TYPE, route)
//   dep_en/dep_vc    departures granted by the switch allocator
//   ds_rel_*         downstream VC releases, per output port
//   tbl_*            table contents for the switch allocator
//   us_rel_*         this router's VCs released, per input port, to upstream
//   va_valid/va_*    the allocations made this cycle (for observation)
// Timing: a header written on edge t is routed on that edge, may win VA in
// the next cycle and is active after edge t+1.
module vc_allocator
  import noc_pkg::*;
#(
  parameter int PORTS = noc_pkg::NUM_PORTS,
  parameter int VCS   = noc_pkg::NUM_VCS,
  parameter int SLOTS = noc_pkg::NUM_SLOTS,
  parameter int DEPTH = noc_pkg::PKT_FLITS,
  localparam int VW   = $clog2(VCS),
  localparam int SW   = $clog2(SLOTS),
  localparam int PW   = $clog2(PORTS),
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // arrivals
  input  logic          arr_en    [PORTS],
  input  logic [VW-1:0] arr_vc    [PORTS],
  input  logic [SW-1:0] arr_slot  [PORTS],
  input  flit_type_e    arr_type  [PORTS],
  input  port_e         arr_route [PORTS],
  // departures from the switch allocator
  input  logic          dep_en    [PORTS],
  input  logic [VW-1:0] dep_vc    [PORTS],
  // downstream VC releases, per output port
  input  logic          ds_rel_en [PORTS],
  input  logic [VW-1:0] ds_rel_vc [PORTS],
  // table contents towards the switch allocator
  output vc_state_e     tbl_state     [PORTS][VCS],
  output port_e         tbl_route     [PORTS][VCS],
  output logic [VW-1:0] tbl_out_vc    [PORTS][VCS],
  output logic [CW-1:0] tbl_count     [PORTS][VCS],
  output logic [SW-1:0] tbl_head_slot [PORTS][VCS],
  output flit_type_e    tbl_head_type [PORTS][VCS],
  // this router's input VCs released, per input port
  output logic          us_rel_en [PORTS],
  output logic [VW-1:0] us_rel_vc [PORTS],
  // allocations of this cycle, per output port
  output logic          va_valid  [PORTS],
  output logic [PW-1:0] va_in     [PORTS],
  output logic [VW-1:0] va_in_vc  [PORTS],
  output logic [VW-1:0] va_out_vc [PORTS]
);

  // ---------------- control units held by the VA ----------------
  logic [VCS-1:0] grant_vec [PORTS];
  logic [VW-1:0]  grant_ovc [PORTS][VCS];
  logic [VCS-1:0] vc_free   [PORTS];
  logic [VW-1:0]  token     [PORTS];
  logic           token_ok  [PORTS];
  logic           take      [PORTS];
  logic           td_alloc_en [PORTS];
  logic [VW-1:0]  td_alloc_vc [PORTS];

  for (genvar i = 0; i < PORTS; i++) begin : g_table
    vc_control_table #(.VCS(VCS), .SLOTS(SLOTS), .DEPTH(DEPTH)) u_table (
      .clk, .rst_n,
      .arr_en   (arr_en[i]),
      .arr_vc   (arr_vc[i]),
      .arr_slot (arr_slot[i]),
      .arr_type (arr_type[i]),
      .arr_route(arr_route[i]),
      .va_grant (grant_vec[i]),
      .va_out_vc(grant_ovc[i]),
      .dep_en   (dep_en[i]),
      .dep_vc   (dep_vc[i]),
      .state    (tbl_state[i]),
      .route    (tbl_route[i]),
      .out_vc   (tbl_out_vc[i]),
      .count    (tbl_count[i]),
      .head_slot(tbl_head_slot[i]),
      .head_type(tbl_head_type[i]),
      .rel_valid(us_rel_en[i]),
      .rel_vc   (us_rel_vc[i])
    );
  end

  for (genvar o = 0; o < PORTS; o++) begin : g_out
    vc_availability_tracer #(.VCS(VCS)) u_tracer (
      .clk, .rst_n,
      .alloc_en(td_alloc_en[o]),
      .alloc_vc(td_alloc_vc[o]),
      .rel_en  (ds_rel_en[o]),
      .rel_vc  (ds_rel_vc[o]),
      .vc_free (vc_free[o])
    );
    token_dispenser #(.VCS(VCS)) u_dispenser (
      .clk, .rst_n,
      .vc_free    (vc_free[o]),
      .take       (take[o]),
      .token      (token[o]),
      .token_valid(token_ok[o]),
      .alloc_en   (td_alloc_en[o]),
      .alloc_vc   (td_alloc_vc[o])
    );
  end

  // ---------------- stage 1: 25 arbiters of 16:1 ----------------
  logic [VCS-1:0] s1_req [PORTS][PORTS];   // [input][output]
  logic [VW-1:0]  s1_idx [PORTS][PORTS];
  logic           s1_ok  [PORTS][PORTS];
  logic           s1_adv [PORTS][PORTS];

  always_comb begin
    for (int i = 0; i < PORTS; i++)
      for (int o = 0; o < PORTS; o++)
        for (int v = 0; v < VCS; v++)
          s1_req[i][o][v] = (tbl_state[i][v] == VC_WAIT_VA) && (int'(tbl_route[i][v]) == o);
  end

  for (genvar i = 0; i < PORTS; i++) begin : g_s1_in
    for (genvar o = 0; o < PORTS; o++) begin : g_s1_out
      logic [VCS-1:0] gnt_unused;
      rr_arbiter #(.N(VCS)) u_arb (
        .clk, .rst_n,
        .req      (s1_req[i][o]),
        .advance  (s1_adv[i][o]),
        .gnt      (gnt_unused),
        .gnt_idx  (s1_idx[i][o]),
        .gnt_valid(s1_ok[i][o])
      );
    end
  end

  // ---------------- stage 2: 5 arbiters of 5:1 ----------------
  logic [PORTS-1:0] s2_req [PORTS];
  logic [PW-1:0]    s2_idx [PORTS];
  logic             s2_ok  [PORTS];

  always_comb begin
    for (int o = 0; o < PORTS; o++)
      for (int i = 0; i < PORTS; i++)
        s2_req[o][i] = s1_ok[i][o] && token_ok[o];
  end

  for (genvar o = 0; o < PORTS; o++) begin : g_s2
    logic [PORTS-1:0] gnt_unused;
    rr_arbiter #(.N(PORTS)) u_arb (
      .clk, .rst_n,
      .req      (s2_req[o]),
      .advance  (1'b1),
      .gnt      (gnt_unused),
      .gnt_idx  (s2_idx[o]),
      .gnt_valid(s2_ok[o])
    );
  end

  // ---------------- results: table and tracer updates ----------------
  always_comb begin
    for (int i = 0; i < PORTS; i++) begin
      grant_vec[i] = '0;
      for (int v = 0; v < VCS; v++) grant_ovc[i][v] = '0;
      for (int o = 0; o < PORTS; o++) s1_adv[i][o] = 1'b0;
    end
    for (int o = 0; o < PORTS; o++) begin
      take[o]      = s2_ok[o];
      va_valid[o]  = s2_ok[o];
      va_in[o]     = s2_idx[o];
      va_in_vc[o]  = s1_idx[s2_idx[o]][o];
      va_out_vc[o] = token[o];
      if (s2_ok[o]) begin
        s1_adv[s2_idx[o]][o]                    = 1'b1;
        grant_vec[s2_idx[o]][s1_idx[s2_idx[o]][o]] = 1'b1;
        grant_ovc[s2_idx[o]][s1_idx[s2_idx[o]][o]] = token[o];
      end
    end
  end

endmodule
