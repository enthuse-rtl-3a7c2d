// linear_sorter_card: linear (insertion) sorter that also counts group sizes.
//
// N cells hold a sorted list, smallest {group, key} in cell 0, empty cells at the
// top. Every cycle one new tuple can be inserted: each cell compares the new
// tuple with its own; a cell whose tuple is not larger keeps it, the first cell
// whose tuple is larger adopts the new tuple, and the cells above it take their
// lower neighbour's tuple (the "left smaller" signal of the sorter cell).
// Group cardinality: every cell also compares the group of the new tuple with
// its own and, on a match, adds the new tuple's cardinality to its own, so all
// tuples of a group carry the group's total. The inserted tuple takes the total
// of a neighbour of the same group plus its own cardinality, or just its own
// if none has it; sorting keeps a group's tuples adjacent, so a neighbour
// always has it. When sorting raw tuples every inserted cardinality is 1 and
// this is a plain count; in the merge pass the inserted tuples are heads of
// sorted chunks and bring the cardinality their group had in their chunk.
// A tag travels with each tuple (the merge pass keeps chunk and position in it).
// Equal tuples keep their arrival order.
//
// Interface: ins_valid inserts ins_data with its cardinality and ins_tag; pop
// removes the head (cell 0). head/head_tag/head_valid show the smallest tuple, count the
// fill level. Insert and pop must not be asked for in the same cycle, and an
// insert into a full sorter is an error (both asserted).
// Timing: an insert or pop takes effect at the next clock edge.
// The cell behaviour and cardinality rule follow the paper's figure of the
// modified linear sorter and its inherited cardinality in merge mode; pop-based
// flushing and the tag are this design's own choices.
module linear_sorter_card
  import enthuse_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned TW = 1     // width of a payload tag kept with each tuple
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ins_valid,
  input  ctuple_t              ins_data,
  input  logic [TW-1:0]        ins_tag,
  input  logic                 pop,
  output ctuple_t              head,
  output logic [TW-1:0]        head_tag,
  output logic                 head_valid,
  output logic [$clog2(N):0]   count
);

  ctuple_t       c [N];
  logic [TW-1:0] tg [N];
  logic          v [N];
  logic          keep [N];   // cell holds a tuple not larger than the new one

  always_comb
    for (int i = 0; i < N; i++)
      keep[i] = v[i] && ({c[i].group, c[i].key} <= {ins_data.group, ins_data.key});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                count <= '0;
    else if (ins_valid)        count <= count + 1'b1;
    else if (pop && v[0])      count <= count - 1'b1;
  end

  // one process per cell: left neighbour for inserts, right neighbour for pops
  for (genvar i = 0; i < N; i++) begin : g_cell
    ctuple_t       cc, lc, rc;
    logic [TW-1:0] ct, lt, rt;
    logic          cv, lv, lk, rv, first;

    if (i == 0) begin : g_left_edge
      assign lc = '0;
      assign lt = '0;
      assign lv = 1'b0;
      assign lk = 1'b0;
    end else begin : g_left
      assign lc = c[i-1];
      assign lt = tg[i-1];
      assign lv = v[i-1];
      assign lk = keep[i-1];
    end
    if (i == N - 1) begin : g_right_edge
      assign rc = '0;
      assign rt = '0;
      assign rv = 1'b0;
    end else begin : g_right
      assign rc = c[i+1];
      assign rt = tg[i+1];
      assign rv = v[i+1];
    end
    assign first = (i == 0) || lk;    // the new tuple lands in this cell

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cc <= '0;
        ct <= '0;
        cv <= 1'b0;
      end else if (ins_valid) begin
        if (keep[i]) begin
          if (cc.group == ins_data.group) cc.card <= cc.card + ins_data.card;
        end else if (first) begin
          cv       <= 1'b1;
          cc.group <= ins_data.group;
          cc.key   <= ins_data.key;
          ct       <= ins_tag;
          if (lv && lc.group == ins_data.group)
            cc.card <= lc.card + ins_data.card;
          else if (cv && cc.group == ins_data.group)
            cc.card <= cc.card + ins_data.card;
          else
            cc.card <= ins_data.card;
        end else begin
          cv <= lv;
          cc <= lc;
          ct <= lt;
          if (lv && lc.group == ins_data.group) cc.card <= lc.card + ins_data.card;
        end
      end else if (pop && v[0]) begin
        cc <= rc;
        ct <= rt;
        cv <= rv;
      end
    end

    assign c[i]  = cc;
    assign tg[i] = ct;
    assign v[i]  = cv;
  end

  assign head       = c[0];
  assign head_tag   = tg[0];
  assign head_valid = v[0];

  a_no_ins_and_pop: assert property (@(posedge clk) disable iff (!rst_n) !(ins_valid && pop));
  a_no_overflow:    assert property (@(posedge clk) disable iff (!rst_n) !(ins_valid && count == ($clog2(N)+1)'(N)));

endmodule
