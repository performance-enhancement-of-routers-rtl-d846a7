// switch_allocator: the switch allocator (SA) of the router.
//
// Two separable stages with the paper's arbiter counts:
//   stage 1: per input port a 16:1 arbiter picks one of the port's VCs that is
//            active (holds a downstream VC), has a flit at its departing-flit
//            pointer, and whose output port still has a credit (5 arbiters);
//   stage 2: per output port a 5:1 arbiter picks one input among the stage-1
//            winners that want that output (5 arbiters).
// For each winner, on the same rising edge, the SA
//   * tells the input's UBS to read the head slot (`rd_en`, `rd_slot`; the
//     flit appears at the UBS output in the next cycle);
//   * returns the departure to the VC allocator (`dep_en`, `dep_vc`), which
//     moves the departing pointer in the control table and, for a tail, frees
//     the VC;
//   * spends one credit of the output port and registers the crossbar setting
//     (`xb_valid`, `xb_sel`) and the downstream VC number (`xb_vc`) for the
//     traversal cycle, aligned with the UBS read data.
// Credits: one counter per output port holds the free UBS slots of the
// downstream router, starts at DS_SLOTS, loses one per flit sent and gains one
// per `credit_in` pulse. The credit form of flow control is this design's
// choice; the paper says the slot availability tracer is sent to the
// neighbours as a credit. A stage-1 arbiter moves its mask only when its
// winner also wins stage 2.
module switch_allocator
  import noc_pkg::*;
#(
  parameter int PORTS    = noc_pkg::NUM_PORTS,
  parameter int VCS      = noc_pkg::NUM_VCS,
  parameter int SLOTS    = noc_pkg::NUM_SLOTS,
  parameter int DEPTH    = noc_pkg::PKT_FLITS,
  parameter int DS_SLOTS = noc_pkg::NUM_SLOTS,
  localparam int VW      = $clog2(VCS),
  localparam int SW      = $clog2(SLOTS),
  localparam int PW      = $clog2(PORTS),
  localparam int CW      = $clog2(DEPTH + 1),
  localparam int KW      = $clog2(DS_SLOTS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // control table contents from the VC allocator
  input  vc_state_e     tbl_state     [PORTS][VCS],
  input  port_e         tbl_route     [PORTS][VCS],
  input  logic [VW-1:0] tbl_out_vc    [PORTS][VCS],
  input  logic [CW-1:0] tbl_count     [PORTS][VCS],
  input  logic [SW-1:0] tbl_head_slot [PORTS][VCS],
  // credits from the downstream routers, per output port
  input  logic          credit_in [PORTS],
  // per input port: departure and UBS read
  output logic          dep_en  [PORTS],
  output logic [VW-1:0] dep_vc  [PORTS],
  output logic          rd_en   [PORTS],
  output logic [SW-1:0] rd_slot [PORTS],
  // per output port: crossbar setting for the next cycle
  output logic          xb_valid [PORTS],
  output logic [PW-1:0] xb_sel   [PORTS],
  output logic [VW-1:0] xb_vc    [PORTS],
  // observation: credits left and stalls for lack of credit
  output logic [KW-1:0] credits      [PORTS],
  output logic          credit_stall [PORTS]
);

  // ---------------- stage 1: one 16:1 arbiter per input ----------------
  logic [VCS-1:0] s1_req [PORTS];
  logic [VW-1:0]  s1_idx [PORTS];
  logic           s1_ok  [PORTS];
  logic           s1_adv [PORTS];
  port_e          s1_out [PORTS];

  always_comb begin
    for (int o = 0; o < PORTS; o++) credit_stall[o] = 1'b0;
    for (int i = 0; i < PORTS; i++) begin
      for (int v = 0; v < VCS; v++) begin
        logic ready;
        ready = (tbl_state[i][v] == VC_ACTIVE) && (tbl_count[i][v] != '0);
        s1_req[i][v] = ready && (credits[tbl_route[i][v]] != '0);
        if (ready && credits[tbl_route[i][v]] == '0) credit_stall[tbl_route[i][v]] = 1'b1;
      end
    end
  end

  for (genvar i = 0; i < PORTS; i++) begin : g_s1
    logic [VCS-1:0] gnt_unused;
    rr_arbiter #(.N(VCS)) u_arb (
      .clk, .rst_n,
      .req      (s1_req[i]),
      .advance  (s1_adv[i]),
      .gnt      (gnt_unused),
      .gnt_idx  (s1_idx[i]),
      .gnt_valid(s1_ok[i])
    );
    assign s1_out[i] = tbl_route[i][s1_idx[i]];
  end

  // ---------------- stage 2: one 5:1 arbiter per output ----------------
  logic [PORTS-1:0] s2_req [PORTS];
  logic [PW-1:0]    s2_idx [PORTS];
  logic             s2_ok  [PORTS];

  always_comb begin
    for (int o = 0; o < PORTS; o++)
      for (int i = 0; i < PORTS; i++)
        s2_req[o][i] = s1_ok[i] && (int'(s1_out[i]) == o);
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

  // ---------------- grants ----------------
  always_comb begin
    for (int i = 0; i < PORTS; i++) begin
      dep_en[i]  = 1'b0;
      s1_adv[i]  = 1'b0;
      dep_vc[i]  = s1_idx[i];
      rd_en[i]   = 1'b0;
      rd_slot[i] = tbl_head_slot[i][s1_idx[i]];
    end
    for (int o = 0; o < PORTS; o++) begin
      if (s2_ok[o]) begin
        dep_en[s2_idx[o]] = 1'b1;
        s1_adv[s2_idx[o]] = 1'b1;
        rd_en[s2_idx[o]]  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < PORTS; o++) begin
        xb_valid[o] <= 1'b0;
        xb_sel[o]   <= '0;
        xb_vc[o]    <= '0;
        credits[o]  <= KW'(DS_SLOTS);
      end
    end else begin
      for (int o = 0; o < PORTS; o++) begin
        xb_valid[o] <= s2_ok[o];
        xb_sel[o]   <= s2_idx[o];
        xb_vc[o]    <= tbl_out_vc[s2_idx[o]][s1_idx[s2_idx[o]]];
        credits[o]  <= credits[o] - KW'(s2_ok[o]) + KW'(credit_in[o]);
      end
    end
  end

  for (genvar o = 0; o < PORTS; o++) begin : g_chk
    a_credit_ovf : assert property (@(posedge clk) disable iff (!rst_n)
                     credit_in[o] |-> int'(credits[o]) < DS_SLOTS || s2_ok[o]);
  end

endmodule
