// tb_vc_control_table: random, protocol-respecting traffic into one VC
// control table (16 VCs, 4 entries each). Each cycle may bring a flit arrival
// (a header on an idle VC, else the next flit of the VC's packet), several VC
// allocations for waiting VCs, and a departure from an active VC with flits,
// all at once and sometimes on the same VC. A model kept here (a queue of
// slot/TYPE entries per VC plus state, route and downstream VC) must match
// every output after every edge; the release pulse must come exactly one
// cycle after a tail departs, naming its VC.
module tb_vc_control_table;
  import noc_pkg::*;
  localparam int V = NUM_VCS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic arr_en = 0, dep_en = 0, rel_valid;
  logic [3:0] arr_vc = 0, arr_slot = 0, dep_vc = 0, rel_vc;
  flit_type_e arr_type = FLIT_HEADER;
  port_e arr_route = PORT_LOCAL;
  logic [V-1:0] va_grant = '0;
  logic [3:0] va_out_vc [V];
  vc_state_e state [V];
  port_e route [V];
  logic [3:0] out_vc [V], head_slot [V];
  logic [2:0] count [V];
  flit_type_e head_type [V];

  vc_control_table dut (.clk, .rst_n, .arr_en, .arr_vc, .arr_slot, .arr_type, .arr_route,
                        .va_grant, .va_out_vc, .dep_en, .dep_vc, .state, .route, .out_vc,
                        .count, .head_slot, .head_type, .rel_valid, .rel_vc);

  vc_state_e m_state [V];
  int m_route [V], m_ovc [V], m_sent [V];
  int m_q [V][$];            // {type, slot} as type*16 + slot
  bit exp_rel; int exp_rel_vc;
  int n_tail_dep = 0, n_same_vc = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < V; v++) begin m_state[v] = VC_IDLE; m_sent[v] = 0; va_out_vc[v] = 0; end
    exp_rel = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      // ---- compare
      chk(rel_valid == exp_rel, "rel_valid");
      if (exp_rel) chk(int'(rel_vc) == exp_rel_vc, "rel_vc");
      for (int v = 0; v < V; v++) begin
        chk(state[v] == m_state[v], $sformatf("state of VC %0d", v));
        chk(int'(count[v]) == m_q[v].size(), $sformatf("count of VC %0d", v));
        if (m_state[v] != VC_IDLE) chk(int'(route[v]) == m_route[v], "route");
        if (m_state[v] == VC_ACTIVE) chk(int'(out_vc[v]) == m_ovc[v], "out_vc");
        if (m_q[v].size() > 0) begin
          chk(int'(head_slot[v]) == m_q[v][0] % 16, $sformatf("head slot of VC %0d", v));
          chk(int'(head_type[v]) == m_q[v][0] / 16, $sformatf("head type of VC %0d", v));
        end
      end
      // ---- stimulus
      arr_en = 0; dep_en = 0; va_grant = '0;
      if ($urandom % 100 < 70) begin
        int v; v = $urandom % V;
        if (m_state[v] == VC_IDLE) begin
          arr_en = 1; arr_vc = 4'(v); arr_type = FLIT_HEADER; arr_route = port_e'($urandom % 5);
        end else if (m_sent[v] < PKT_FLITS) begin
          arr_en = 1; arr_vc = 4'(v);
          arr_type = (m_sent[v] == PKT_FLITS - 1) ? FLIT_TAIL : FLIT_BODY;
        end
        arr_slot = 4'($urandom);
      end
      for (int v = 0; v < V; v++)
        if (m_state[v] == VC_WAIT_VA && $urandom % 3 == 0) begin
          va_grant[v] = 1'b1; va_out_vc[v] = 4'($urandom);
        end
      if ($urandom % 100 < 60) begin
        int v0; v0 = $urandom % V;
        for (int j = 0; j < V; j++) begin
          int v; v = (v0 + j) % V;
          if (!dep_en && m_state[v] == VC_ACTIVE && m_q[v].size() > 0) begin dep_en = 1; dep_vc = 4'(v); end
        end
      end
      if (arr_en && dep_en && arr_vc == dep_vc) n_same_vc++;
      @(posedge clk);
      // ---- model update
      exp_rel = 0;
      if (dep_en) begin
        int e; e = m_q[dep_vc].pop_front();
        if (e / 16 == int'(FLIT_TAIL)) begin
          m_state[dep_vc] = VC_IDLE; m_sent[dep_vc] = 0;
          exp_rel = 1; exp_rel_vc = int'(dep_vc); n_tail_dep++;
        end
      end
      for (int v = 0; v < V; v++)
        if (va_grant[v]) begin m_state[v] = VC_ACTIVE; m_ovc[v] = int'(va_out_vc[v]); end
      if (arr_en) begin
        m_q[arr_vc].push_back(int'(arr_type) * 16 + int'(arr_slot));
        m_sent[arr_vc]++;
        if (arr_type == FLIT_HEADER) begin m_state[arr_vc] = VC_WAIT_VA; m_route[arr_vc] = int'(arr_route); end
      end
    end
    chk(n_tail_dep > 100 && n_same_vc > 10, "tail departures or same-VC arrival/departure too rare");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
