// vc_control_table: the virtual-channel control table of one input port.
//
// The UBS of a port is shared by all of its VCs, so the table records which
// slots belong to which VC and in what order, as in a table-based dynamic VC
// router. For each of the NUM_VCS virtual channels it holds
//   * the state (idle / waiting for VC allocation / active),
//   * the output port computed by the routing unit for the packet's header,
//   * the downstream VC handed out by the token dispenser,
//   * the arriving-flit pointer (where the next flit's slot number goes), the
//     departing-flit pointer (which entry leaves next) and a flit count,
//   * the list of slot numbers, each with the flit's TYPE, in arrival order.
// The paper embeds the arriving/departing flit pointers in the table and holds
// the table inside the VC allocator; so does this design (the VC allocator
// instantiates one table per input port).
//
// Updates, all on the rising edge and all allowed in the same cycle:
//   * arrival (`arr_*`): a flit of VC `arr_vc` was written to UBS slot
//     `arr_slot`. Its slot number is appended; a header also stores the route
//     and moves the VC from idle to waiting;
//   * VC allocation (`va_grant`, `va_out_vc`): a waiting VC becomes active;
//   * departure (`dep_en`, `dep_vc`): the switch allocator sent the VC's head
//     flit; the departing pointer moves on, and when that flit was the tail
//     the VC becomes idle and its number is returned upstream on the next
//     cycle through `rel_valid`/`rel_vc` (the upstream router may then hand
//     it to a new packet).
// Reads are combinational: the head slot, head TYPE, count, state, route and
// downstream VC of every VC are outputs. The slot list is a one-write-port
// array. A VC holds one packet at a time, so PKT_FLITS entries per VC suffice.
// Reset: all VCs idle, all pointers and counts zero.
module vc_control_table
  import noc_pkg::*;
#(
  parameter int VCS   = noc_pkg::NUM_VCS,
  parameter int SLOTS = noc_pkg::NUM_SLOTS,
  parameter int DEPTH = noc_pkg::PKT_FLITS,
  localparam int VW   = $clog2(VCS),
  localparam int SW   = $clog2(SLOTS),
  localparam int PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // arrival of a flit into the UBS
  input  logic              arr_en,
  input  logic [VW-1:0]     arr_vc,
  input  logic [SW-1:0]     arr_slot,
  input  flit_type_e        arr_type,
  input  port_e             arr_route,
  // VC allocation results
  input  logic [VCS-1:0]    va_grant,
  input  logic [VW-1:0]     va_out_vc [VCS],
  // departure of a head flit through the switch
  input  logic              dep_en,
  input  logic [VW-1:0]     dep_vc,
  // table contents
  output vc_state_e         state     [VCS],
  output port_e             route     [VCS],
  output logic [VW-1:0]     out_vc    [VCS],
  output logic [CW-1:0]     count     [VCS],
  output logic [SW-1:0]     head_slot [VCS],
  output flit_type_e        head_type [VCS],
  // VC freed (its tail has left), one cycle after the departure edge
  output logic              rel_valid,
  output logic [VW-1:0]     rel_vc
);

  typedef struct packed {
    flit_type_e    ftype;
    logic [SW-1:0] slot;
  } entry_t;

  entry_t        slot_list [VCS * DEPTH];  // one write port
  logic [PW-1:0] arr_ptr [VCS];
  logic [PW-1:0] dep_ptr [VCS];

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  // Slot list: written by arrivals only.
  always_ff @(posedge clk) begin
    if (arr_en) slot_list[int'(arr_vc) * DEPTH + int'(arr_ptr[arr_vc])] <= '{ftype: arr_type, slot: arr_slot};
  end

  always_comb begin
    for (int v = 0; v < VCS; v++) begin
      head_slot[v] = slot_list[v * DEPTH + int'(dep_ptr[v])].slot;
      head_type[v] = slot_list[v * DEPTH + int'(dep_ptr[v])].ftype;
    end
  end

  logic dep_tail;
  assign dep_tail = dep_en && (head_type[dep_vc] == FLIT_TAIL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < VCS; v++) begin
        state[v]   <= VC_IDLE;
        route[v]   <= PORT_LOCAL;
        out_vc[v]  <= '0;
        count[v]   <= '0;
        arr_ptr[v] <= '0;
        dep_ptr[v] <= '0;
      end
      rel_valid <= 1'b0;
      rel_vc    <= '0;
    end else begin
      for (int v = 0; v < VCS; v++) begin
        logic inc, dec;
        inc = arr_en && (arr_vc == VW'(v));
        dec = dep_en && (dep_vc == VW'(v));
        if (inc) arr_ptr[v] <= next_ptr(arr_ptr[v]);
        if (dec) dep_ptr[v] <= next_ptr(dep_ptr[v]);
        count[v] <= count[v] + CW'(inc) - CW'(dec);
        if (inc && arr_type == FLIT_HEADER) begin
          state[v] <= VC_WAIT_VA;
          route[v] <= arr_route;
        end else if (va_grant[v]) begin
          state[v]  <= VC_ACTIVE;
          out_vc[v] <= va_out_vc[v];
        end else if (dec && dep_tail) begin
          state[v] <= VC_IDLE;
        end
      end
      rel_valid <= dep_tail;
      rel_vc    <= dep_vc;
    end
  end

  a_hdr_idle   : assert property (@(posedge clk) disable iff (!rst_n)
                   arr_en && arr_type == FLIT_HEADER |-> state[arr_vc] == VC_IDLE);
  a_body_owned : assert property (@(posedge clk) disable iff (!rst_n)
                   arr_en && arr_type != FLIT_HEADER |-> state[arr_vc] != VC_IDLE);
  a_no_ovf     : assert property (@(posedge clk) disable iff (!rst_n)
                   arr_en |-> (int'(count[arr_vc]) < DEPTH || (dep_en && dep_vc == arr_vc)));
  a_dep_active : assert property (@(posedge clk) disable iff (!rst_n)
                   dep_en |-> state[dep_vc] == VC_ACTIVE && count[dep_vc] != '0);

endmodule
