// card_merger: merges two sorted lists and combines their group cardinalities.
//
// Each input list is sorted by {group, key} and every tuple carries the size of
// its group within its own list. The merged list must carry the size of the
// group over both lists. When the two list heads compared belong to the same
// group, the group's total is the sum of the two cardinalities (the paper's
// cond1). Once a group's total is known it is remembered, and every following
// tuple of that group, from either list, adopts it (cond2 and the memory of the
// selector stage). A head whose group differs from the other head's cannot have
// tuples in the other list, since that list has already moved past the group,
// so it keeps its own cardinality.
//
// Interface: valid-ready streams; a_last / b_last mark the final tuple of a
// list, out_last the final tuple of the merged list. Each list has at least one
// tuple. The merger waits until both heads are present (or the list is done).
// Timing: one tuple per cycle, registered output (one cycle latency).
// The cardinality rules follow the paper; the paper merges P tuples per cycle
// with FLiMS compare-and-swap networks, while this merger emits one tuple per
// cycle, this design's simplification.
module card_merger
  import enthuse_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    a_valid,
  input  ctuple_t a_data,
  input  logic    a_last,
  output logic    a_ready,
  input  logic    b_valid,
  input  ctuple_t b_data,
  input  logic    b_last,
  output logic    b_ready,
  output logic    out_valid,
  output ctuple_t out_data,
  output logic    out_last,
  input  logic    out_ready
);

  logic    a_done, b_done;       // list fully consumed
  logic    mem_valid;            // a group total is remembered
  group_t  mem_group;
  card_t   mem_card;
  logic    take_a, take_b, adv;
  ctuple_t x;                    // chosen tuple
  logic    x_last;
  logic    y_here;               // other head present
  ctuple_t y;
  card_t   x_card;

  always_comb begin
    take_a = a_valid && !a_done &&
             (b_done || (b_valid && ({a_data.group, a_data.key} <= {b_data.group, b_data.key})));
    take_b = b_valid && !b_done && !take_a &&
             (a_done || a_valid);
    adv    = (take_a || take_b) && (!out_valid || out_ready);
    x      = take_a ? a_data : b_data;
    y      = take_a ? b_data : a_data;
    y_here = take_a ? (b_valid && !b_done) : (a_valid && !a_done);
    x_last = take_a ? (a_last && b_done) : (b_last && a_done);
    if (mem_valid && mem_group == x.group)        x_card = mem_card;
    else if (y_here && y.group == x.group)        x_card = x.card + y.card;
    else                                          x_card = x.card;
  end

  assign a_ready = adv && take_a;
  assign b_ready = adv && take_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_done    <= 1'b0;
      b_done    <= 1'b0;
      mem_valid <= 1'b0;
      mem_group <= '0;
      mem_card  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (adv) begin
        out_valid     <= 1'b1;
        out_data      <= x;
        out_data.card <= x_card;
        out_last      <= x_last;
        mem_valid     <= 1'b1;
        mem_group     <= x.group;
        mem_card      <= x_card;
        if (x_last) begin
          a_done    <= 1'b0;
          b_done    <= 1'b0;
          mem_valid <= 1'b0;
        end else begin
          if (take_a && a_last) a_done <= 1'b1;
          if (take_b && b_last) b_done <= 1'b1;
        end
      end
    end
  end

endmodule
