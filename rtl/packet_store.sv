// packet_store: payload buffer of the SuperNIC.
//
// While a packet's header is scheduled through the NT regions, its payload
// waits here. The store is divided into PS_SLOTS slots of SLOT_BEATS 64-byte
// beats (2 KB, enough for a 1500-byte frame). The default of 445 slots is
// about the 198 36-Kbit BRAMs the paper's prototype spends on the packet
// store; the slot size and the slot organisation are this design's choice.
//
// Allocation: `alloc_valid`/`alloc_slot` offer a free slot; `alloc_take`
// consumes it. Slots are first handed out from a bump counter and, once
// freed, recycled through a FIFO free list, so nothing has to be initialised
// slot by slot at reset. Freeing: `free_en`/`free_slot`.
// Write port: one beat per cycle (`wr_en`, slot, beat, data).
// Read port: `rd_en` with slot and beat; `rd_data` is valid one cycle later.
// `used` counts slots in use.
module packet_store
  import snic_pkg::*;
#(
  parameter int SLOTS = PS_SLOTS,
  parameter int BEATS = SLOT_BEATS
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              alloc_valid,
  output logic [SLOT_W-1:0] alloc_slot,
  input  logic              alloc_take,
  input  logic              free_en,
  input  logic [SLOT_W-1:0] free_slot,
  input  logic              wr_en,
  input  logic [SLOT_W-1:0] wr_slot,
  input  logic [BEAT_W-1:0] wr_beat,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [SLOT_W-1:0] rd_slot,
  input  logic [BEAT_W-1:0] rd_beat,
  output logic [DATA_W-1:0] rd_data,
  output logic [SLOT_W:0]   used
);
  logic [DATA_W-1:0] mem [SLOTS * BEATS];

  // free list: bump counter for never-used slots, FIFO for recycled ones
  logic [SLOT_W:0]   bump;
  logic              fl_valid;
  logic [SLOT_W-1:0] fl_head;
  logic              fl_pop;

  sync_fifo #(.T(logic [SLOT_W-1:0]), .DEPTH(SLOTS)) u_free (
    .clk, .rst_n,
    .in_valid(free_en), .in_ready(), .in_data(free_slot),
    .out_valid(fl_valid), .out_ready(fl_pop), .out_data(fl_head), .count()
  );

  assign alloc_valid = fl_valid || (int'(bump) < SLOTS);
  assign alloc_slot  = fl_valid ? fl_head : bump[SLOT_W-1:0];
  assign fl_pop      = alloc_take && fl_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bump <= '0;
      used <= '0;
    end else begin
      if (alloc_take && alloc_valid && !fl_valid) bump <= bump + 1'b1;
      used <= used + $bits(used)'(alloc_take && alloc_valid) - $bits(used)'(free_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wr_slot) * BEATS + int'(wr_beat)] <= wr_data;
    if (rd_en) rd_data <= mem[int'(rd_slot) * BEATS + int'(rd_beat)];
  end
endmodule
