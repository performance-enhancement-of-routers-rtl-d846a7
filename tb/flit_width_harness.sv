// flit_width_harness: runs one router built with flit width FW under random
// traffic and checks it; used by tb_flit_widths to try the narrower flit
// widths (16, 32, 64 bits) next to the default 128.
//
// Each upstream model opens one packet at a time on a free VC of the router's
// input port, with a random destination, and sends header, two bodies and a
// tail under credit control. The header carries the destination (bits 9:2)
// and the source port and a 3-bit sequence number (bits 15:10), a number
// that no packet of the same source still in flight uses; bodies and tail carry random data. The downstream
// models check the output port (XY routing reference), the flit order on
// each VC and every bit of every flit, return credits and release VCs, with
// random delays. `done` rises when `npkts` packets per input have been sent
// and all of them have arrived; `checks`/`failures` count the comparisons.
module flit_width_harness #(
  parameter int FW = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  int   npkts,
  output logic done,
  output int   checks,
  output int   failures
);
  import noc_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VCS, S = NUM_SLOTS, VW = $clog2(V);
  localparam logic [3:0] MX = 4'd1, MY = 4'd1;

  logic          in_valid [P];
  logic [VW-1:0] in_vc [P];
  logic [FW-1:0] in_flit [P];
  logic          up_credit [P], up_rel_valid [P];
  logic [VW-1:0] up_rel_vc [P];
  logic [4:0]    up_free_slots [P];
  logic          out_valid [P];
  logic [VW-1:0] out_vc [P];
  logic [FW-1:0] out_flit [P];
  logic          ds_credit [P], ds_rel_valid [P];
  logic [VW-1:0] ds_rel_vc [P];
  logic          obs_va_valid [P], obs_credit_stall [P];

  noc_router #(.FLIT_W(FW)) dut (
    .clk, .rst_n, .cur_x(MX), .cur_y(MY),
    .in_valid, .in_vc, .in_flit, .up_credit, .up_rel_valid, .up_rel_vc, .up_free_slots,
    .out_valid, .out_vc, .out_flit, .ds_credit, .ds_rel_valid, .ds_rel_vc,
    .obs_va_valid, .obs_credit_stall
  );

  function automatic int xy_port(int dx, int dy);
    if (dx > MX) return 2;
    if (dx < MX) return 4;
    if (dy > MY) return 1;
    if (dy < MY) return 3;
    return 0;
  endfunction

  function automatic logic [FW-1:0] rand_flit(int ftype);
    logic [FW-1:0] f;
    for (int b = 0; b < FW; b += 16) f[b +: 16] = 16'($urandom);
    f[1:0] = 2'(ftype);
    return f;
  endfunction

  // expected packets: key = src*8 + seq
  logic [FW-1:0] exp_f [int];            // key * PKT_FLITS + flit index
  int            exp_port [int];
  logic [FW-1:0] cur_f [P][PKT_FLITS];   // packet being sent, per input
  int us_cred [P], us_sent [P], us_seq [P], us_idx [P], us_vc [P], us_key [P];
  bit us_busy [P][V], us_open [P];
  int rx_key [P][V], rx_idx [P][V];
  int owed [P]; int relq [P][$];
  int recv = 0;

  assign done = rst_n && recv == P * npkts;

  always @(posedge clk) begin
    if (!rst_n) begin
      checks = 0; failures = 0; recv = 0;
      for (int p = 0; p < P; p++) begin
        in_valid[p] <= 0; in_vc[p] <= '0; in_flit[p] <= '0;
        ds_credit[p] <= 0; ds_rel_valid[p] <= 0; ds_rel_vc[p] <= '0;
        us_cred[p] = S; us_sent[p] = 0; us_seq[p] = 0; us_open[p] = 0; owed[p] = 0;
        relq[p].delete();
        for (int v = 0; v < V; v++) begin us_busy[p][v] = 0; rx_key[p][v] = -1; end
      end
    end else begin
      // ---- upstream side
      for (int p = 0; p < P; p++) begin
        if (up_credit[p]) us_cred[p]++;
        if (up_rel_valid[p]) us_busy[p][up_rel_vc[p]] = 0;
        in_valid[p] <= 0;
        // a sequence number not used by a packet still in flight (packets to
        // a stalled output may be overtaken by later ones)
        us_seq[p] = -1;
        for (int q = 7; q >= 0; q--) if (!exp_port.exists(p * 8 + q)) us_seq[p] = q;
        if (!us_open[p] && us_sent[p] < npkts && us_seq[p] >= 0) begin
          int v0; v0 = $urandom % V;
          for (int j = 0; j < V; j++) if (!us_open[p] && !us_busy[p][(v0 + j) % V]) begin
            int dx, dy, key;
            us_vc[p] = (v0 + j) % V; us_busy[p][us_vc[p]] = 1; us_open[p] = 1; us_idx[p] = 0;
            dx = $urandom % 3; dy = $urandom % 3;
            if (p != 0 && xy_port(dx, dy) == p) begin dx = MX; dy = MY; end
            key = p * 8 + us_seq[p]; us_key[p] = key;
            for (int k = 0; k < PKT_FLITS; k++) begin
              logic [FW-1:0] fl;
              fl = rand_flit(k == 0 ? 1 : k == PKT_FLITS - 1 ? 3 : 2);
              if (k == 0) begin fl[5:2] = 4'(dx); fl[9:6] = 4'(dy); fl[15:10] = 6'(key); end
              exp_f[key * PKT_FLITS + k] = fl;
              cur_f[p][k] = fl;
            end
            exp_port[key] = xy_port(dx, dy);
          end
        end
        if (us_open[p] && us_cred[p] > 0 && $urandom % 100 < 70) begin
          in_valid[p] <= 1; in_vc[p] <= VW'(us_vc[p]); in_flit[p] <= cur_f[p][us_idx[p]];
          us_cred[p]--; us_idx[p]++;
          if (us_idx[p] == PKT_FLITS) begin us_open[p] = 0; us_sent[p]++; end
        end
      end
      // ---- downstream side
      for (int o = 0; o < P; o++) begin
        if (out_valid[o]) begin
          int v; v = int'(out_vc[o]); owed[o]++;
          if (out_flit[o][1:0] == 2'b01) begin
            int key; key = int'(out_flit[o][15:10]);
            checks++; if (rx_key[o][v] != -1 || !exp_port.exists(key)) failures++;
            rx_key[o][v] = key; rx_idx[o][v] = 0;
          end
          if (rx_key[o][v] >= 0 && exp_port.exists(rx_key[o][v])) begin
            int key; key = rx_key[o][v];
            checks += 2;
            begin
              logic [FW-1:0] e; e = exp_f[key * PKT_FLITS + rx_idx[o][v]];
              if (out_flit[o] != e) begin failures++; if (failures < 5) $display("FW%0d data fail out %0d key %0d idx %0d %h %h", FW, o, key, rx_idx[o][v], out_flit[o], e); end
            end
            if (exp_port[key] != o) failures++;
            rx_idx[o][v]++;
            if (rx_idx[o][v] == PKT_FLITS) begin
              exp_port.delete(key); rx_key[o][v] = -1; recv++; relq[o].push_back(v);
            end
          end else begin
            checks++; failures++;
          end
        end
        ds_credit[o] <= 0;
        if (owed[o] > 0 && $urandom % 100 < 50) begin ds_credit[o] <= 1; owed[o]--; end
        ds_rel_valid[o] <= 0;
        if (relq[o].size() > 0 && $urandom % 100 < 30) begin ds_rel_valid[o] <= 1; ds_rel_vc[o] <= VW'(relq[o].pop_front()); end
      end
    end
  end
endmodule
