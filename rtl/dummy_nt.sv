// dummy_nt: network task that only spends time.
//
// The paper's micro-benchmarks use dummy NTs that "spin" for a fixed number
// of cycles per packet (10 or 50). This one holds every descriptor for
// exactly LATENCY cycles and passes it on unchanged. It is fully pipelined:
// a new descriptor may enter every cycle (up to DEPTH in flight), which is
// how the paper pipelines packets through a chain. Each entry is stamped
// with its arrival cycle; the head leaves once LATENCY cycles have passed
// and out_ready is high. Interface: valid/ready on both sides.
module dummy_nt
  import snic_pkg::*;
#(
  parameter int LATENCY = 10,
  parameter int DEPTH   = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  desc_t in_d,
  output logic  out_valid,
  input  logic  out_ready,
  output desc_t out_d
);
  typedef struct packed {
    desc_t       d;
    logic [15:0] t;
  } ent_t;

  logic [15:0] now;
  logic        h_valid;
  ent_t        head;

  sync_fifo #(.T(ent_t), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data('{d: in_d, t: now}),
    .out_valid(h_valid), .out_ready(out_valid && out_ready), .out_data(head), .count()
  );

  // accepted at cycle t, may leave at cycle t + LATENCY (LATENCY >= 1)
  assign out_valid = h_valid && ((now - head.t) >= 16'(LATENCY));
  assign out_d     = head.d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end
endmodule
