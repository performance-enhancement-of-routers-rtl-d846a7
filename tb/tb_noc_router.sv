// tb_noc_router: end-to-end test of the five-port router at its default size
// (5 ports, 16 UBS slots and 16 VCs per port, 128-bit flits, 4-flit packets).
//
// The testbench plays the five neighbours. Each upstream model keeps its own
// credit count (16 per port, one pulse back per freed slot) and its own set of
// free VCs of the router's input port (released through up_rel_*), opens up
// to three packets at once on different VCs and interleaves their flits.
// Each downstream model checks every flit against a reference computed here:
// the output port from XY routing, the order header-body-body-tail on one VC,
// and every payload bit (a function of packet id and flit index). It returns
// credits and VC releases, holding them back in some phases to force stalls.
//
// Phases: (1) one lone packet, with the three-cycle header latency and the
// one-flit-per-cycle streaming checked exactly; (2) random traffic with random
// back-pressure; (3) all inputs towards the local port with its VC releases
// held, which uses up all 16 downstream VCs; (4) drain. At the end every
// packet must have arrived once, and all credits and VCs must be back.
// Mechanisms counted, each must occur: VA contention, SA contention, credit
// stall, full UBS, downstream VCs exhausted, several VCs live on one input,
// flits of different packets interleaved on one link, VC reuse.
module tb_noc_router;
  import noc_pkg::*;

  localparam int P  = NUM_PORTS;
  localparam int V  = NUM_VCS;
  localparam int S  = NUM_SLOTS;
  localparam int FW = FLIT_WIDTH;
  localparam int VW = $clog2(V);
  localparam logic [3:0] MY_X = 4'd2, MY_Y = 4'd2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid [P];
  logic [VW-1:0] in_vc    [P];
  logic [FW-1:0] in_flit  [P];
  logic          up_credit [P], up_rel_valid [P];
  logic [VW-1:0] up_rel_vc [P];
  logic [$clog2(S+1)-1:0] up_free_slots [P];
  logic          out_valid [P];
  logic [VW-1:0] out_vc    [P];
  logic [FW-1:0] out_flit  [P];
  logic          ds_credit [P], ds_rel_valid [P];
  logic [VW-1:0] ds_rel_vc [P];
  logic          obs_va_valid [P], obs_credit_stall [P];

  noc_router dut (
    .clk, .rst_n, .cur_x(MY_X), .cur_y(MY_Y),
    .in_valid, .in_vc, .in_flit, .up_credit, .up_rel_valid, .up_rel_vc, .up_free_slots,
    .out_valid, .out_vc, .out_flit, .ds_credit, .ds_rel_valid, .ds_rel_vc,
    .obs_va_valid, .obs_credit_stall
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------- reference model ----------------
  function automatic int xy_port(int dx, int dy);
    if (dx > MY_X) return 2;      // East
    if (dx < MY_X) return 4;      // West
    if (dy > MY_Y) return 1;      // North
    if (dy < MY_Y) return 3;      // South
    return 0;                     // Local
  endfunction

  function automatic logic [FW-1:0] make_flit(int id, int idx, int dx, int dy);
    logic [FW-1:0] f;
    for (int w = 0; w < FW / 32; w++) f[w*32 +: 32] = 32'(id * 32'h9E3779B1 + w * 32'h7F4A7C15 + idx * 32'h1234567);
    f[1:0]  = (idx == 0) ? FLIT_HEADER : (idx == PKT_FLITS - 1) ? FLIT_TAIL : FLIT_BODY;
    f[5:2]  = 4'(dx);
    f[9:6]  = 4'(dy);
    f[31:16] = 16'(id);
    f[15:12] = 4'(idx);
    return f;
  endfunction

  // packet bookkeeping
  int pkt_dx [int], pkt_dy [int];
  int sent_pkts = 0, recv_pkts = 0, next_id = 1;
  bit received [int];

  // ---------------- traffic control knobs ----------------
  int  inj_pct   = 0;       // chance per cycle per port to send a flit
  int  local_only = 0;      // all new packets to the local port
  int  credit_pct [P];      // chance per cycle that a held credit is returned
  int  rel_pct    [P];      // chance per cycle that a held VC release is returned
  bit  lone_mode = 0;

  // ---------------- upstream models ----------------
  int  us_credits [P];
  bit  us_vc_busy [P][V];
  // open packets per port: up to 3
  int  op_id  [P][3], op_idx [P][3], op_vc [P][3];
  bit  op_on  [P][3];

  // mechanism counters
  int n_va_contend = 0, n_sa_contend = 0, n_credit_stall = 0, n_ubs_full = 0;
  int n_vc_exhaust = 0, n_multi_vc = 0, n_interleave = 0, n_vc_reuse = 0;
  bit vc_used_before [P][V];

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < P; p++) begin
        in_valid[p] <= 1'b0; in_vc[p] <= '0; in_flit[p] <= '0;
        us_credits[p] = S;
        for (int v = 0; v < V; v++) begin us_vc_busy[p][v] = 0; vc_used_before[p][v] = 0; end
        for (int k = 0; k < 3; k++) op_on[p][k] = 0;
      end
    end else begin
      for (int p = 0; p < P; p++) begin
        bit sent;
        if (up_credit[p]) us_credits[p]++;
        if (up_rel_valid[p]) begin
          check(us_vc_busy[p][up_rel_vc[p]], "release of a VC not in use");
          us_vc_busy[p][up_rel_vc[p]] = 0;
        end
        sent = 0;
        in_valid[p] <= 1'b0;
        if (us_credits[p] > 0 && !lone_mode && ($urandom % 100) < inj_pct) begin
          int k;
          k = $urandom % 3;
          if (!op_on[p][k]) begin
            // open a new packet on a free VC
            int v0, dx, dy;
            v0 = $urandom % V;
            for (int j = 0; j < V; j++) begin
              int v; v = (v0 + j) % V;
              if (!op_on[p][k] && !us_vc_busy[p][v]) begin
                if (local_only != 0) begin dx = MY_X; dy = MY_Y; end
                else begin dx = $urandom % 5; dy = $urandom % 5; end
                if (p != 0 && xy_port(dx, dy) == p) begin dx = MY_X; dy = MY_Y; end  // no U-turns
                us_vc_busy[p][v] = 1;
                if (vc_used_before[p][v]) n_vc_reuse++;
                vc_used_before[p][v] = 1;
                op_on[p][k] = 1; op_id[p][k] = next_id++; op_idx[p][k] = 0; op_vc[p][k] = v;
                pkt_dx[op_id[p][k]] = dx; pkt_dy[op_id[p][k]] = dy;
                sent_pkts++;
              end
            end
          end
          if (op_on[p][k]) begin
            in_valid[p] <= 1'b1;
            in_vc[p]    <= VW'(op_vc[p][k]);
            in_flit[p]  <= make_flit(op_id[p][k], op_idx[p][k], pkt_dx[op_id[p][k]], pkt_dy[op_id[p][k]]);
            us_credits[p]--;
            sent = 1;
            op_idx[p][k]++;
            if (op_idx[p][k] == PKT_FLITS) op_on[p][k] = 0;
          end
        end
        if (us_credits[p] == 0) n_ubs_full++;
      end
    end
  end

  // ---------------- downstream models ----------------
  int  ds_owed [P];
  int  rel_q [P][$];
  int  rx_id [P][V], rx_idx [P][V];
  bit  rx_on [P][V];
  int  last_id_on_link [P];

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int o = 0; o < P; o++) begin
        ds_credit[o] <= 1'b0; ds_rel_valid[o] <= 1'b0; ds_rel_vc[o] <= '0;
        ds_owed[o] = 0; rel_q[o].delete(); last_id_on_link[o] = -1;
        for (int v = 0; v < V; v++) rx_on[o][v] = 0;
      end
    end else begin
      for (int o = 0; o < P; o++) begin
        if (out_valid[o]) begin
          int v, id, idx;
          logic [FW-1:0] f;
          f = out_flit[o];
          v = int'(out_vc[o]);
          ds_owed[o]++;
          if (f[1:0] == FLIT_HEADER) begin
            check(!rx_on[o][v], "header on a downstream VC still open");
            rx_on[o][v] = 1; rx_id[o][v] = int'(f[31:16]); rx_idx[o][v] = 0;
          end
          check(rx_on[o][v], "flit on a VC without header");
          id = rx_id[o][v]; idx = rx_idx[o][v];
          if (last_id_on_link[o] != -1 && last_id_on_link[o] != id && idx != 0) n_interleave++;
          last_id_on_link[o] = id;
          check(pkt_dx.exists(id), "unknown packet id");
          if (pkt_dx.exists(id)) begin
            check(f == make_flit(id, idx, pkt_dx[id], pkt_dy[id]), $sformatf("payload of packet %0d flit %0d", id, idx));
            check(xy_port(pkt_dx[id], pkt_dy[id]) == o, $sformatf("packet %0d left on port %0d", id, o));
          end
          rx_idx[o][v]++;
          if (f[1:0] == FLIT_TAIL) begin
            check(rx_idx[o][v] == PKT_FLITS, "tail at the wrong position");
            check(!received.exists(id), "packet received twice");
            received[id] = 1; recv_pkts++;
            rx_on[o][v] = 0;
            rel_q[o].push_back(v);
          end
        end
        ds_credit[o] <= 1'b0;
        if (ds_owed[o] > 0 && ($urandom % 100) < credit_pct[o]) begin
          ds_credit[o] <= 1'b1; ds_owed[o]--;
        end
        ds_rel_valid[o] <= 1'b0;
        if (rel_q[o].size() > 0 && ($urandom % 100) < rel_pct[o]) begin
          ds_rel_valid[o] <= 1'b1; ds_rel_vc[o] <= VW'(rel_q[o].pop_front());
        end
      end
    end
  end

  // ---------------- mechanism monitors (observing the allocators) ----------------
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < P; o++) begin
      if ($countones(dut.u_va.s2_req[o]) > 1) n_va_contend++;
      if ($countones(dut.u_sa.s2_req[o]) > 1) n_sa_contend++;
      if (obs_credit_stall[o]) n_credit_stall++;
      if (!dut.u_va.token_ok[o]) begin
        for (int i = 0; i < P; i++) if (dut.u_va.s1_ok[i][o]) begin n_vc_exhaust++; break; end
      end
    end
    for (int i = 0; i < P; i++) begin
      int live; live = 0;
      for (int v = 0; v < V; v++) if (dut.u_va.tbl_state[i][v] != VC_IDLE) live++;
      if (live >= 4) n_multi_vc++;
    end
  end

  // ---------------- lone packet: exact latency ----------------
  int t_in, t_out [PKT_FLITS];
  task automatic lone_packet();
    int id;
    id = next_id++;
    pkt_dx[id] = MY_X; pkt_dy[id] = MY_Y; sent_pkts++;
    us_vc_busy[1][5] = 1; vc_used_before[1][5] = 1;
    for (int k = 0; k < PKT_FLITS; k++) t_out[k] = -1;
    fork
      begin
        for (int k = 0; k < PKT_FLITS; k++) begin
          @(negedge clk);
          in_valid[1] = 1'b1; in_vc[1] = 4'd5; in_flit[1] = make_flit(id, k, MY_X, MY_Y);
          us_credits[1]--;
          if (k == 0) t_in = cycle;
        end
        @(negedge clk); in_valid[1] = 1'b0;
      end
      begin
        int k; k = 0;
        repeat (20) begin
          @(negedge clk);
          if (out_valid[0] && k < PKT_FLITS) begin t_out[k] = cycle; k++; end
        end
      end
    join
    // cycle counts: the header is presented in cycle t_in and stored on the
    // edge that ends it; it is on the output link three cycles later.
    check(t_out[0] - t_in == 3, $sformatf("header latency %0d, expected 3", t_out[0] - t_in));
    for (int k = 1; k < PKT_FLITS; k++)
      check(t_out[k] - t_out[k-1] == 1, $sformatf("flit %0d not streamed one per cycle", k));
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < P; o++) begin credit_pct[o] = 100; rel_pct[o] = 100; end
    lone_mode = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // (1) lone packet
    lone_packet();
    repeat (10) @(posedge clk);
    lone_mode = 0;

    // (2) random traffic, random back-pressure
    for (int ph = 0; ph < 6; ph++) begin
      inj_pct = 40 + 10 * ph;
      for (int o = 0; o < P; o++) credit_pct[o] = (ph % 2 == 0) ? 100 : 10 + ($urandom % 40);
      repeat (2000) @(posedge clk);
    end

    // (3) all towards local, local releases held: downstream VCs run out
    for (int o = 0; o < P; o++) credit_pct[o] = 100;
    local_only = 1; inj_pct = 60; rel_pct[0] = 0;
    repeat (1500) @(posedge clk);
    rel_pct[0] = 100;
    repeat (1500) @(posedge clk);
    local_only = 0;

    // (4) drain
    inj_pct = 0;
    for (int o = 0; o < P; o++) begin credit_pct[o] = 100; rel_pct[o] = 100; end
    // finish the open packets
    begin
      bit open;
      do begin
        open = 0;
        for (int p = 0; p < P; p++) for (int k = 0; k < 3; k++) if (op_on[p][k]) open = 1;
        if (open) begin
          // send remaining flits with full injection but no new packets
          for (int p = 0; p < P; p++)
            for (int k = 0; k < 3; k++)
              if (op_on[p][k] && us_credits[p] > 0) begin
                @(negedge clk);
                in_valid[p] = 1'b1; in_vc[p] = VW'(op_vc[p][k]);
                in_flit[p] = make_flit(op_id[p][k], op_idx[p][k], pkt_dx[op_id[p][k]], pkt_dy[op_id[p][k]]);
                us_credits[p]--; op_idx[p][k]++;
                if (op_idx[p][k] == PKT_FLITS) op_on[p][k] = 0;
                @(negedge clk); in_valid[p] = 1'b0;
              end
          @(posedge clk);
        end
      end while (open);
    end
    repeat (500) @(posedge clk);

    check(recv_pkts == sent_pkts, $sformatf("received %0d of %0d packets", recv_pkts, sent_pkts));
    for (int p = 0; p < P; p++) begin
      check(us_credits[p] == S, $sformatf("port %0d upstream credits %0d", p, us_credits[p]));
      check(int'(dut.u_sa.credits[p]) == S, $sformatf("router credits on output %0d", p));
      check(dut.u_va.vc_free[p] == '1, $sformatf("downstream VCs of output %0d not all free", p));
    end

    $display("packets %0d; va_contend %0d sa_contend %0d credit_stall %0d ubs_full %0d vc_exhaust %0d multi_vc %0d interleave %0d vc_reuse %0d",
             recv_pkts, n_va_contend, n_sa_contend, n_credit_stall, n_ubs_full, n_vc_exhaust,
             n_multi_vc, n_interleave, n_vc_reuse);
    check(n_va_contend > 0,   "VA contention never happened");
    check(n_sa_contend > 0,   "SA contention never happened");
    check(n_credit_stall > 0, "credit stall never happened");
    check(n_ubs_full > 0,     "full UBS never happened");
    check(n_vc_exhaust > 0,   "downstream VCs never ran out");
    check(n_multi_vc > 0,     "never four VCs live on one input");
    check(n_interleave > 0,   "no interleaving on a link");
    check(n_vc_reuse > 0,     "no VC reuse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
