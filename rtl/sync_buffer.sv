// sync_buffer: join point for the DAG parallelism of the central scheduler.
//
// When the scheduler forks a packet header to N parallel chains it opens a
// join for the packet's tag (its packet-store slot, unique while the packet
// is in flight) with `fork_en`, `fork_tag`, `fork_n`. Each branch result that
// comes back is presented with `arr_en`/`arr_tag`/`arr_drop`; `arr_last` shows
// (combinationally, before `arr_en` commits the arrival) whether the result
// presented on `arr_tag` would complete the join;
// which the scheduler then lets proceed to the next DAG stage, while earlier
// results are held back, i.e. absorbed. `arr_drop_any` ORs the drop requests
// of all branches so a drop decided in any branch survives the merge. The
// paper stores the returning headers themselves; here the descriptor of the
// last arriving branch continues, which is this design's merge rule.
module sync_buffer
  import snic_pkg::*;
#(
  parameter int TAGS = PS_SLOTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fork_en,
  input  logic [SLOT_W-1:0] fork_tag,
  input  logic [BR_W:0]     fork_n,
  input  logic              arr_en,
  input  logic [SLOT_W-1:0] arr_tag,
  input  logic              arr_drop,
  output logic              arr_last,
  output logic              arr_drop_any,
  output logic [$clog2(TAGS+1)-1:0] open_joins
);
  logic [BR_W:0] cnt  [TAGS];
  logic          drop [TAGS];

  assign arr_last     = (cnt[arr_tag] <= 1);
  assign arr_drop_any = arr_drop || drop[arr_tag];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < TAGS; i++) begin
        cnt[i]  <= '0;
        drop[i] <= 1'b0;
      end
      open_joins <= '0;
    end else begin
      if (arr_en) begin
        if (arr_last) begin
          cnt[arr_tag]  <= '0;
          drop[arr_tag] <= 1'b0;
        end else begin
          cnt[arr_tag]  <= cnt[arr_tag] - 1'b1;
          drop[arr_tag] <= drop[arr_tag] | arr_drop;
        end
      end
      if (fork_en) begin
        cnt[fork_tag]  <= fork_n;
        drop[fork_tag] <= 1'b0;
      end
      open_joins <= open_joins + $bits(open_joins)'(fork_en) - $bits(open_joins)'(arr_en && arr_last);
    end
  end
endmodule
