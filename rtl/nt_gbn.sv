// nt_gbn: receiver side of a go-back-N reliable transport.
//
// The paper offloads a simple go-back-N transport over a lossless network:
// a receiver discards an out-of-order packet and answers with a NACK; the
// sender then retransmits everything after the last acknowledged packet.
// This task implements the receiver for FLOWS flows (flow = source port
// modulo FLOWS, this design's choice). It keeps the next expected sequence
// number per flow. A packet carrying the expected number is accepted and the
// expectation advances; any other packet is turned into a NACK (op OP_NACK,
// seq = expected number, marked `reply` so egress sends it back to the
// sender). The sender side, with its retransmission buffer, is not part of
// this module. One register stage, valid/ready.
module nt_gbn
  import snic_pkg::*;
#(
  parameter int FLOWS = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  desc_t in_d,
  output logic  out_valid,
  input  logic  out_ready,
  output desc_t out_d,
  output logic [31:0] nacks
);
  localparam int FW = $clog2(FLOWS);
  logic [31:0] expect_seq [FLOWS];
  logic [FW-1:0] f;
  assign f = in_d.sport[FW-1:0];

  assign in_ready = !out_valid || out_ready;
  wire acc = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_d     <= '0;
      nacks     <= '0;
      for (int i = 0; i < FLOWS; i++) expect_seq[i] <= '0;
    end else begin
      if (in_ready) out_valid <= in_valid;
      if (acc) begin
        out_d <= in_d;
        if (in_d.seq == expect_seq[f]) begin
          expect_seq[f] <= expect_seq[f] + 1;
        end else begin
          nacks       <= nacks + 1;
          out_d.op    <= OP_NACK;
          out_d.seq   <= expect_seq[f];
          out_d.reply <= 1'b1;
        end
      end
    end
  end
endmodule
