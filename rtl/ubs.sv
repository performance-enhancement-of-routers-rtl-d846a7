// ubs: unified buffer structure (UBS) of one router input port.
//
// All virtual channels of the port share one pool of NUM_SLOTS flit slots
// (16 in the paper). Which VC a slot belongs to is not kept here but in the VC
// control table, which lists the slots of each VC in arrival order. As in the
// paper, a slot is free when the TYPE bits (bits 1:0) of the flit it holds are
// 00: the UBS shows these bits to the slot availability tracer as `slot_free`,
// and the tracer picks the slot for the next arriving flit.
//
// Write: when `wr_en` is high the flit `wr_flit` is stored in slot `wr_slot`
// on the rising edge (the slot must be free). Read: when `rd_en` is high, slot
// `rd_slot` is read on the rising edge and appears on `rd_flit` in the next
// cycle with `rd_valid`; the same edge writes 00 to the slot's TYPE bits, so
// the slot is free from the next cycle on. Read data are registered, the
// pattern of a synchronous memory, so the flit store can go to FPGA block RAM.
// The TYPE bits are registers of their own because all of them are looked at
// every cycle. Reset empties every slot; the flit store itself is not reset.
module ubs
  import noc_pkg::*;
#(
  parameter int FLIT_W = noc_pkg::FLIT_WIDTH,
  parameter int SLOTS  = noc_pkg::NUM_SLOTS,
  localparam int SW    = $clog2(SLOTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // flit arriving from the link
  input  logic              wr_en,
  input  logic [SW-1:0]     wr_slot,
  input  logic [FLIT_W-1:0] wr_flit,
  // flit leaving through the crossbar
  input  logic              rd_en,
  input  logic [SW-1:0]     rd_slot,
  output logic [FLIT_W-1:0] rd_flit,
  output logic              rd_valid,
  // TYPE == 00 for each slot
  output logic [SLOTS-1:0]  slot_free
);

  logic [FLIT_W-1:0] mem [SLOTS];
  logic [1:0]        slot_type [SLOTS];

  // Flit store: one write port, one registered read port.
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= wr_flit;
    if (rd_en) rd_flit <= mem[rd_slot];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      for (int s = 0; s < SLOTS; s++) slot_type[s] <= FLIT_FREE;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) slot_type[rd_slot] <= FLIT_FREE;
      if (wr_en) slot_type[wr_slot] <= wr_flit[1:0];
    end
  end

  always_comb begin
    for (int s = 0; s < SLOTS; s++) slot_free[s] = (slot_type[s] == FLIT_FREE);
  end

  a_wr_free  : assert property (@(posedge clk) disable iff (!rst_n)
                                 wr_en |-> slot_free[wr_slot]);
  a_wr_typed : assert property (@(posedge clk) disable iff (!rst_n)
                                 wr_en |-> wr_flit[1:0] != FLIT_FREE);
  a_rd_used  : assert property (@(posedge clk) disable iff (!rst_n)
                                 rd_en |-> !slot_free[rd_slot]);

endmodule
