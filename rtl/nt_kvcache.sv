// nt_kvcache: key-value caching network task.
//
// Sits between key-value clients and a remote key-value server and keeps
// recently written or read pairs in a small on-chip buffer of ENTRIES
// entries with FIFO replacement, as the paper's KV-cache NT does.
//   GET hit      -> the packet is turned into a GET_RESP carrying the cached
//                   value and marked `reply`, so egress returns it to the
//                   client without reaching the server;
//   GET miss     -> passes on to the server;
//   SET          -> the pair is written into the cache (updated in place on a
//                   hit, else into the oldest entry) and passes on to the
//                   server (write-through);
//   GET_RESP     -> a value coming back from the server is cached likewise.
// Keys and values are 32-bit fields of the header shim (this design's
// format). One register stage, valid/ready; lookups and updates happen in
// the accepting cycle, so back-to-back packets see each other's updates.
module nt_kvcache
  import snic_pkg::*;
#(
  parameter int ENTRIES = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  desc_t in_d,
  output logic  out_valid,
  input  logic  out_ready,
  output desc_t out_d,
  output logic [31:0] hits,
  output logic [31:0] misses
);
  localparam int IW = $clog2(ENTRIES);
  logic          v   [ENTRIES];
  logic [31:0]   k   [ENTRIES];
  logic [31:0]   val [ENTRIES];
  logic [IW-1:0] fifo_ptr;

  logic          hit;
  logic [IW-1:0] hidx;
  always_comb begin
    hit  = 1'b0;
    hidx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (v[i] && k[i] == in_d.key) begin
        hit  = 1'b1;
        hidx = IW'(i);
      end
  end

  assign in_ready = !out_valid || out_ready;
  wire acc = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_d     <= '0;
      fifo_ptr  <= '0;
      hits      <= '0;
      misses    <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        v[i] <= 1'b0; k[i] <= '0; val[i] <= '0;
      end
    end else begin
      if (in_ready) out_valid <= in_valid;
      if (acc) begin
        out_d <= in_d;
        if (in_d.op == OP_GET) begin
          if (hit) begin
            hits          <= hits + 1;
            out_d.op      <= OP_GET_RESP;
            out_d.val     <= val[hidx];
            out_d.reply   <= 1'b1;
          end else begin
            misses <= misses + 1;
          end
        end else if (in_d.op == OP_SET || in_d.op == OP_GET_RESP) begin
          if (hit) begin
            val[hidx] <= in_d.val;
          end else begin
            v[fifo_ptr]   <= 1'b1;
            k[fifo_ptr]   <= in_d.key;
            val[fifo_ptr] <= in_d.val;
            fifo_ptr      <= (fifo_ptr == IW'(ENTRIES - 1)) ? '0 : fifo_ptr + 1'b1;
          end
        end
      end
    end
  end
endmodule
