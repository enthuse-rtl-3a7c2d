// mark_last: steps (a) buffering and (b) marking of the Enthuse pipeline.
//
// The last tuple of each group is the one that will carry the group's aggregate.
// Inside a batch of P sorted tuples, tuple i is last when its group differs from
// tuple i+1. Tuple P-1 can only be judged once the next batch is seen, so one
// batch is held back (step (a)) until either the next batch arrives or the held
// batch is flagged as the end of a stream/window (in_end), in which case its
// final tuple is the last of its group by definition.
//
// Interface: in_valid qualifies a full batch of P tuples (the input is dense:
// P or 0 tuples per cycle). out_valid qualifies the marked batch; out_last[i]
// is the per-tuple last flag. There is no backpressure.
// Timing: a batch leaves one cycle after the next batch enters, or one cycle
// after it entered itself when it carries in_end.
// The hold-and-compare scheme follows the paper; the in_end flag that closes a
// stream or window is this design's own way to release the final batch.
module mark_last
  import enthuse_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_end,
  input  ctuple_t in_data [P],
  output logic    out_valid,
  output logic    out_end,
  output ctuple_t out_data [P],
  output logic    out_last [P]
);

  logic    hold_valid, hold_end;
  ctuple_t hold [P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_valid <= 1'b0;
      hold_end   <= 1'b0;
      out_valid  <= 1'b0;
      out_end    <= 1'b0;
      for (int i = 0; i < P; i++) begin
        hold[i]     <= '0;
        out_data[i] <= '0;
        out_last[i] <= 1'b0;
      end
    end else begin
      out_valid <= 1'b0;
      if (hold_valid && (hold_end || in_valid)) begin
        out_valid <= 1'b1;
        out_end   <= hold_end;
        for (int i = 0; i < P; i++) begin
          out_data[i] <= hold[i];
          if (i < P - 1) out_last[i] <= (hold[i].group != hold[i+1].group);
          else           out_last[i] <= hold_end || (hold[i].group != in_data[0].group);
        end
      end
      if (in_valid) begin
        hold_valid <= 1'b1;
        hold_end   <= in_end;
        for (int i = 0; i < P; i++) hold[i] <= in_data[i];
      end else if (hold_valid && hold_end) begin
        hold_valid <= 1'b0;
      end
    end
  end

endmodule
