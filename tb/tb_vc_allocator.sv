// tb_vc_allocator: test of the VC allocator with its tables, tracers and
// token dispensers (5 ports, 16 VCs).
//
// Directed part, exact cycles: one header towards East is granted in the
// cycle after it is stored and gets downstream VC 0; three headers from three
// inputs towards one output in the same cycle are granted in three successive
// cycles, one per cycle, inputs in ascending order, with downstream VCs 0, 1, 2.
// Random part: headers arrive on idle VCs of all inputs with random routes,
// the rest of each packet follows, departures empty active VCs and the
// downstream side releases busy VCs after random delays. Checked every cycle
// against a model kept here: a grant goes only to a waiting VC of that route,
// gives a downstream VC that is free, never one already held, at most one per
// output; the granted VC reads active with that downstream VC on the next
// cycle; each tail departure gives a release pulse to upstream on the next
// cycle; every header is granted within 2000 cycles. Some phases release
// downstream VCs slowly, so that all 16 VCs of an output are taken while
// headers wait; this must happen.
module tb_vc_allocator;
  import noc_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VCS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic arr_en [P]; logic [3:0] arr_vc [P], arr_slot [P];
  flit_type_e arr_type [P]; port_e arr_route [P];
  logic dep_en [P]; logic [3:0] dep_vc [P];
  logic ds_rel_en [P]; logic [3:0] ds_rel_vc [P];
  vc_state_e tbl_state [P][V]; port_e tbl_route [P][V];
  logic [3:0] tbl_out_vc [P][V], tbl_head_slot [P][V];
  logic [2:0] tbl_count [P][V];
  logic us_rel_en [P]; logic [3:0] us_rel_vc [P];
  logic va_valid [P]; logic [2:0] va_in [P]; logic [3:0] va_in_vc [P], va_out_vc [P];

  vc_allocator dut (.clk, .rst_n, .arr_en, .arr_vc, .arr_slot, .arr_type, .arr_route,
    .dep_en, .dep_vc, .ds_rel_en, .ds_rel_vc, .tbl_state, .tbl_route, .tbl_out_vc,
    .tbl_count, .tbl_head_slot, .us_rel_en, .us_rel_vc, .va_valid, .va_in,
    .va_in_vc, .va_out_vc);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d: %s", cycle, what); end
  endtask

  // model
  int  m_state [P][V];      // 0 idle, 1 waiting, 2 active
  int  m_route [P][V], m_sent [P][V], m_cnt [P][V], m_wait_since [P][V];
  bit  ds_busy [P][V];
  int  rel_due [P][V];      // cycle at which the downstream releases, -1 none
  bit  exp_usrel [P]; int exp_usrel_vc [P];
  int  grants = 0, n_exhaust = 0;
  bit  slow_rel = 0;
  bit  g_ok [P]; int g_in [P], g_vc [P], g_ovc [P];   // grants sampled before the edge

  task automatic idle_inputs();
    for (int i = 0; i < P; i++) begin
      arr_en[i] = 0; dep_en[i] = 0; ds_rel_en[i] = 0;
      arr_vc[i] = 0; arr_slot[i] = 0; arr_type[i] = FLIT_HEADER; arr_route[i] = PORT_LOCAL;
      dep_vc[i] = 0; ds_rel_vc[i] = 0;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle_inputs();
    for (int i = 0; i < P; i++) for (int v = 0; v < V; v++) begin
      m_state[i][v] = 0; m_sent[i][v] = 0; m_cnt[i][v] = 0; ds_busy[i][v] = 0; rel_due[i][v] = -1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- directed 1: lone header, input 1 VC 7 -> East
    @(negedge clk);
    arr_en[1] = 1; arr_vc[1] = 7; arr_type[1] = FLIT_HEADER; arr_route[1] = PORT_EAST;
    @(negedge clk);
    idle_inputs();
    chk(tbl_state[1][7] == VC_WAIT_VA, "header not waiting after store");
    chk(va_valid[2] && va_in[2] == 3'd1 && va_in_vc[2] == 4'd7 && va_out_vc[2] == 4'd0,
        "lone header not granted VC 0 in the next cycle");
    @(negedge clk);
    chk(tbl_state[1][7] == VC_ACTIVE && tbl_out_vc[1][7] == 4'd0, "table not active with VC 0");
    // ---- directed 2: inputs 0, 3, 4 -> South in one cycle
    arr_en[0] = 1; arr_vc[0] = 2; arr_route[0] = PORT_SOUTH; arr_type[0] = FLIT_HEADER;
    arr_en[3] = 1; arr_vc[3] = 9; arr_route[3] = PORT_SOUTH; arr_type[3] = FLIT_HEADER;
    arr_en[4] = 1; arr_vc[4] = 1; arr_route[4] = PORT_SOUTH; arr_type[4] = FLIT_HEADER;
    @(negedge clk);
    idle_inputs();
    for (int k = 0; k < 3; k++) begin
      int ei; ei = (k == 0) ? 0 : (k == 1) ? 3 : 4;
      chk(va_valid[3] && int'(va_in[3]) == ei && int'(va_out_vc[3]) == k,
          $sformatf("contention step %0d: input %0d VC %0d", k, va_in[3], va_out_vc[3]));
      @(negedge clk);
    end
    chk(!va_valid[3], "extra grant on South");

    // ---- reset to a clean state for the random part
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1; @(negedge clk);

    // ---- random part
    for (int t = 0; t < 30000; t++) begin
      bit stop_new;
      stop_new = t > 28000;
      slow_rel = (t / 5000) % 2 == 1;   // phases where downstream VCs run out
      for (int o = 0; o < P; o++) begin
        bit all_busy, waiting;
        all_busy = 1; waiting = 0;
        for (int v = 0; v < V; v++) if (!ds_busy[o][v]) all_busy = 0;
        for (int i = 0; i < P; i++) for (int v = 0; v < V; v++) if (m_state[i][v] == 1 && m_route[i][v] == o) waiting = 1;
        if (all_busy && waiting) n_exhaust++;
      end
      // compare outputs of this cycle (after the last edge)
      for (int i = 0; i < P; i++) begin
        chk(us_rel_en[i] == exp_usrel[i], "upstream release pulse");
        if (exp_usrel[i]) chk(int'(us_rel_vc[i]) == exp_usrel_vc[i], "upstream release VC");
        for (int v = 0; v < V; v++) begin
          chk(int'(tbl_state[i][v]) == m_state[i][v], $sformatf("state in %0d VC %0d", i, v));
          if (m_state[i][v] == 1) chk(cycle - m_wait_since[i][v] < 2000, "header starved");
        end
      end
      // grants of this cycle
      for (int o = 0; o < P; o++) if (va_valid[o]) begin
        int i, v, ov;
        i = int'(va_in[o]); v = int'(va_in_vc[o]); ov = int'(va_out_vc[o]);
        chk(m_state[i][v] == 1 && m_route[i][v] == o, "grant to a VC not waiting for this output");
        chk(!ds_busy[o][ov], "downstream VC handed out twice");
      end
      // stimulus
      idle_inputs();
      for (int i = 0; i < P; i++) begin
        if ($urandom % 100 < 50) begin
          int v; v = $urandom % V;
          if (m_state[i][v] == 0 && !stop_new) begin
            arr_en[i] = 1; arr_vc[i] = 4'(v); arr_type[i] = FLIT_HEADER; arr_route[i] = port_e'($urandom % 5);
          end else if (m_state[i][v] != 0 && m_sent[i][v] < PKT_FLITS) begin
            arr_en[i] = 1; arr_vc[i] = 4'(v);
            arr_type[i] = (m_sent[i][v] == PKT_FLITS - 1) ? FLIT_TAIL : FLIT_BODY;
          end
          arr_slot[i] = 4'($urandom);
        end
        if ($urandom % 100 < 40) begin
          int v0; v0 = $urandom % V;
          for (int j = 0; j < V; j++) begin
            int v; v = (v0 + j) % V;
            if (!dep_en[i] && m_state[i][v] == 2 && m_cnt[i][v] > 0) begin dep_en[i] = 1; dep_vc[i] = 4'(v); end
          end
        end
        // downstream releases
        for (int v = 0; v < V; v++)
          if (!ds_rel_en[i] && ds_busy[i][v] && rel_due[i][v] >= 0 && rel_due[i][v] <= cycle) begin
            ds_rel_en[i] = 1; ds_rel_vc[i] = 4'(v);
          end
      end
      for (int o = 0; o < P; o++) begin
        g_ok[o] = va_valid[o]; g_in[o] = int'(va_in[o]); g_vc[o] = int'(va_in_vc[o]); g_ovc[o] = int'(va_out_vc[o]);
      end
      @(posedge clk);
      #1;
      // model update on the edge (decisions sampled before it)
      for (int o = 0; o < P; o++) if (g_ok[o]) begin
        m_state[g_in[o]][g_vc[o]] = 2;
        ds_busy[o][g_ovc[o]] = 1;
        rel_due[o][g_ovc[o]] = cycle + 5 + (slow_rel ? 150 + $urandom % 150 : $urandom % 60);
        grants++;
      end
      for (int i = 0; i < P; i++) begin
        exp_usrel[i] = 0;
        if (ds_rel_en[i]) begin ds_busy[i][ds_rel_vc[i]] = 0; rel_due[i][ds_rel_vc[i]] = -1; end
        if (dep_en[i]) begin
          m_cnt[i][dep_vc[i]]--;
          if (m_sent[i][dep_vc[i]] == PKT_FLITS && m_cnt[i][dep_vc[i]] == 0) begin
            m_state[i][dep_vc[i]] = 0; m_sent[i][dep_vc[i]] = 0;
            exp_usrel[i] = 1; exp_usrel_vc[i] = int'(dep_vc[i]);
          end
        end
        if (arr_en[i]) begin
          m_cnt[i][arr_vc[i]]++; m_sent[i][arr_vc[i]]++;
          if (arr_type[i] == FLIT_HEADER) begin
            m_state[i][arr_vc[i]] = 1; m_route[i][arr_vc[i]] = int'(arr_route[i]);
            m_wait_since[i][arr_vc[i]] = cycle;
          end
        end
      end
      @(negedge clk);
    end
    chk(grants > 1000, $sformatf("only %0d grants", grants));
    chk(n_exhaust > 0, "downstream VCs never ran out");
    $display("grants %0d exhaustion cycles %0d", grants, n_exhaust);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
