// tb_switch_allocator: test of the two-stage switch allocator (5 ports,
// 16 VCs, 16 downstream slots per output).
//
// The control-table inputs are driven from a table model kept here: VCs are
// activated with random routes, downstream VCs and flit counts, and each
// granted departure removes one flit on the edge, as the VC allocator would.
// Downstream credits come back after random delays. Checked every cycle:
// a grant only goes to an active VC with flits; at most one grant per input
// and one per output; the UBS read names the VC's head slot; a grant never
// exceeds the credits of its output (a model credit counter must match the
// SA's own); the crossbar setting and downstream VC appear on the next cycle
// for exactly the granted input; whenever some VC is ready with credit, at
// least one grant is made (no idle cycle with work); and, directed, a single
// ready VC is granted in the same cycle, and an output with zero credits is
// reported as stalled and not granted.
module tb_switch_allocator;
  import noc_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VCS, S = NUM_SLOTS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  vc_state_e tbl_state [P][V]; port_e tbl_route [P][V];
  logic [3:0] tbl_out_vc [P][V], tbl_head_slot [P][V];
  logic [2:0] tbl_count [P][V];
  logic credit_in [P];
  logic dep_en [P], rd_en [P], xb_valid [P], credit_stall [P];
  logic [3:0] dep_vc [P], rd_slot [P], xb_vc [P];
  logic [2:0] xb_sel [P];
  logic [4:0] credits [P];

  switch_allocator dut (.clk, .rst_n, .tbl_state, .tbl_route, .tbl_out_vc, .tbl_count,
    .tbl_head_slot, .credit_in, .dep_en, .dep_vc, .rd_en, .rd_slot, .xb_valid, .xb_sel,
    .xb_vc, .credits, .credit_stall);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d: %s", cycle, what); end
  endtask

  int m_cred [P];
  int owed [P][$];          // cycles at which credits come back
  bit exp_xb [P]; int exp_sel [P], exp_vc [P];
  int grants = 0, stalls = 0;
  bit g_en [P]; int g_vc [P];   // decisions sampled before the edge

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < P; i++) begin
      credit_in[i] = 0; m_cred[i] = S; exp_xb[i] = 0;
      for (int v = 0; v < V; v++) begin
        tbl_state[i][v] = VC_IDLE; tbl_route[i][v] = PORT_LOCAL; tbl_out_vc[i][v] = 0;
        tbl_head_slot[i][v] = 0; tbl_count[i][v] = 0;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // directed: one ready VC, granted in the same cycle
    tbl_state[2][11] = VC_ACTIVE; tbl_route[2][11] = PORT_WEST; tbl_count[2][11] = 1;
    tbl_head_slot[2][11] = 4'd9; tbl_out_vc[2][11] = 4'd6;
    #1;
    chk(dep_en[2] && dep_vc[2] == 4'd11 && rd_en[2] && rd_slot[2] == 4'd9, "lone VC not granted at once");
    @(negedge clk);
    chk(xb_valid[4] && xb_sel[4] == 3'd2 && xb_vc[4] == 4'd6, "crossbar setting one cycle later");
    chk(int'(credits[4]) == S - 1, "credit spent");
    tbl_count[2][11] = 0; tbl_state[2][11] = VC_IDLE;
    m_cred[4] = S - 1;
    owed[4].push_back(cycle + 3);
    exp_xb[4] = 1; exp_sel[4] = 2; exp_vc[4] = 6;   // still shown in this cycle

    for (int t = 0; t < 30000; t++) begin
      bit any_ready, any_grant;
      bit in_used [P], out_used [P];
      // ---- random table changes before the cycle's decisions
      for (int n = 0; n < 3; n++) begin
        int i, v; i = $urandom % P; v = $urandom % V;
        if (tbl_state[i][v] == VC_IDLE) begin
          tbl_state[i][v] = VC_ACTIVE; tbl_route[i][v] = port_e'($urandom % 5);
          tbl_count[i][v] = 3'(1 + $urandom % 4); tbl_out_vc[i][v] = 4'($urandom);
          tbl_head_slot[i][v] = 4'($urandom);
        end
      end
      for (int o = 0; o < P; o++) begin
        credit_in[o] = 0;
        if (owed[o].size() > 0 && owed[o][0] <= cycle && ($urandom % 100) < ((t / 3000) % 2 ? 20 : 100)) begin
          void'(owed[o].pop_front()); credit_in[o] = 1;
        end
      end
      #1;
      // ---- checks of this cycle's decisions
      for (int o = 0; o < P; o++) begin
        chk(int'(credits[o]) == m_cred[o], $sformatf("credit count of output %0d", o));
        chk(xb_valid[o] == exp_xb[o], "crossbar valid");
        if (exp_xb[o]) chk(int'(xb_sel[o]) == exp_sel[o] && int'(xb_vc[o]) == exp_vc[o], "crossbar select / VC");
        out_used[o] = 0;
      end
      any_ready = 0; any_grant = 0;
      for (int i = 0; i < P; i++) begin
        for (int v = 0; v < V; v++)
          if (tbl_state[i][v] == VC_ACTIVE && tbl_count[i][v] != 0 && m_cred[tbl_route[i][v]] > 0) any_ready = 1;
        in_used[i] = 0;
        chk(dep_en[i] == rd_en[i], "departure and UBS read differ");
        if (dep_en[i]) begin
          int v, o; v = int'(dep_vc[i]); o = int'(tbl_route[i][v]);
          any_grant = 1;
          chk(tbl_state[i][v] == VC_ACTIVE && tbl_count[i][v] != 0, "grant to a VC without flits");
          chk(rd_slot[i] == tbl_head_slot[i][v], "read slot is not the head slot");
          chk(m_cred[o] > 0, "grant without credit");
          chk(!out_used[o], "two grants for one output");
          out_used[o] = 1;
        end
      end
      for (int o = 0; o < P; o++) begin
        bit want; want = 0;
        for (int i = 0; i < P; i++) for (int v = 0; v < V; v++)
          if (tbl_state[i][v] == VC_ACTIVE && tbl_count[i][v] != 0 && int'(tbl_route[i][v]) == o) want = 1;
        chk(credit_stall[o] == (want && m_cred[o] == 0), "credit stall flag");
        if (credit_stall[o]) stalls++;
      end
      chk(!any_ready || any_grant, "ready work but no grant");
      for (int i = 0; i < P; i++) begin g_en[i] = dep_en[i]; g_vc[i] = int'(dep_vc[i]); end
      // ---- edge (the model follows 1 ns later, after the SA's registers)
      @(posedge clk);
      #1;
      for (int o = 0; o < P; o++) begin exp_xb[o] = 0; if (credit_in[o]) m_cred[o]++; end
      for (int i = 0; i < P; i++) if (g_en[i]) begin
        int v, o; v = g_vc[i]; o = int'(tbl_route[i][v]);
        m_cred[o]--; owed[o].push_back(cycle + 2 + $urandom % 10);
        exp_xb[o] = 1; exp_sel[o] = i; exp_vc[o] = int'(tbl_out_vc[i][v]);
        tbl_count[i][v]--;
        if (tbl_count[i][v] == 0) tbl_state[i][v] = VC_IDLE;
        grants++;
      end
      @(negedge clk);
    end
    $display("grants %0d stalls %0d", grants, stalls);
    chk(grants > 10000 && stalls > 0, "too few grants or no stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
