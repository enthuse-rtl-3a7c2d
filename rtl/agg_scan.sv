// agg_scan: the adapted rolling prefix scan of Enthuse (steps (c) and (d)).
//
// A batch of P sorted tuples, each with its "last of group" flag, enters a
// Kogge-Stone prefix scan of log2(P) registered stages. Every scan entity n
// combines the partial state of the tuple d positions to its left with its own
// (d = 1, 2, 4, ...). Two kinds of sums run side by side:
//   * group-segmented: the key aggregate (sum, min or max, picked by fn), the
//     tuple count of the group and the distinct-key count. They are only combined
//     when both partial states belong to the same group; because the input is
//     sorted, one equality check on the group IDs is enough.
//   * unsegmented: the count of last flags, which becomes the permutation index
//     of each marked tuple for the reverse butterfly network.
// Distinct count: each partial state carries its smallest key and its own (the
// largest) key; joining a left and a right part adds their distinct counts and
// subtracts one when the left part's largest key equals the right part's smallest.
//
// The final row of entities n' (one more registered stage) rolls the state over
// between batches: a carry register holds the running state of a group that was
// still open at the end of the previous batch, with a full 32-bit count, and is
// added to every tuple of the same group at the start of the new batch. The n'
// entities then write the requested result into the tuple (sum, min, max, count,
// distinct count, or sum/count for the average) and produce the valid bit:
// the last flag, or for FN_MINMEDMAX (used by the sliding-window engine) whether
// the tuple's position inside its group equals 1, card/2+1 or card, card being
// the group cardinality appended by the sorter. The round-robin index is the
// exclusive prefix of last flags plus a rolling offset modulo P.
//
// Interface: in_valid qualifies a batch; in_end closes a stream or window (the
// carry is dropped after it). fn must stay stable while a batch is in flight.
// Timing: log2(P)+1 cycles from input to output, one batch per cycle, no stall.
// Follows the paper: the scan topology, segmented combining, distinct-count
// rule, roll-over in n', (log2 P + 1)-bit counts inside the scan and a 32-bit
// rolled count. This design's own choices: Kogge-Stone wiring, unsigned
// min/max, 32-bit wrapping sum, integer (truncating) average, and the median
// position card/2+1 (taken from the worked example of min/med/max).
module agg_scan
  import enthuse_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  fn_e     fn,
  input  logic    in_valid,
  input  logic    in_end,
  input  ctuple_t in_data [P],
  input  logic    in_last [P],
  output logic    out_valid,
  output logic    out_end,
  output res_t    out_res [P],
  output logic    out_sel [P],
  output logic [$clog2(P)-1:0] out_idx [P]
);

  localparam int unsigned L  = $clog2(P);
  localparam int unsigned SW = L + 1;     // in-scan count width

  typedef struct packed {
    group_t           group;
    key_t             key;     // own key: largest key of the covered range
    key_t             dmin;    // smallest key of the covered range
    result_t          acc;     // sum / min / max
    logic [SW-1:0]    cnt;     // tuples of the group in the range
    logic [SW-1:0]    dcnt;    // distinct keys of the group in the range
    logic [SW-1:0]    lcnt;    // last flags in the (unsegmented) range
    card_t            card;
    logic             last;
    logic             seg0;    // same group as tuple 0 of the batch
  } node_t;

  function automatic result_t op(input fn_e f, input result_t a, input result_t b);
    case (f)
      FN_MIN:  return (a < b) ? a : b;
      FN_MAX:  return (a > b) ? a : b;
      default: return a + b;
    endcase
  endfunction

  function automatic node_t combine(input fn_e f, input node_t l, input node_t r);
    node_t o;
    o = r;
    o.lcnt = l.lcnt + r.lcnt;
    if (l.group == r.group) begin
      o.acc  = op(f, l.acc, r.acc);
      o.cnt  = l.cnt + r.cnt;
      o.dcnt = l.dcnt + r.dcnt - SW'(l.key == r.dmin);
      o.dmin = l.dmin;
    end
    return o;
  endfunction

  node_t s0 [P];
  node_t sl [P];    // output of the last scan stage
  logic  sl_v, sl_e;

  // entry of the scan (combinational)
  always_comb begin
    for (int i = 0; i < P; i++) begin
      s0[i].group = in_data[i].group;
      s0[i].key   = in_data[i].key;
      s0[i].dmin  = in_data[i].key;
      s0[i].acc   = result_t'(in_data[i].key);
      s0[i].cnt   = SW'(1);
      s0[i].dcnt  = SW'(1);
      s0[i].lcnt  = SW'(in_last[i]);
      s0[i].card  = in_data[i].card;
      s0[i].last  = in_last[i];
      s0[i].seg0  = (in_data[i].group == in_data[0].group);
    end
  end

  // scan entities n, one registered stage per distance
  for (genvar s = 0; s < L; s++) begin : g_stage
    localparam int unsigned D = 1 << s;
    node_t d [P];
    logic  dv, de;
    node_t q [P];
    logic  qv, qe;
    if (s == 0) begin : g_first
      assign d  = s0;
      assign dv = in_valid;
      assign de = in_end;
    end else begin : g_next
      assign d  = g_stage[s-1].q;
      assign dv = g_stage[s-1].qv;
      assign de = g_stage[s-1].qe;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        qv <= 1'b0;
        qe <= 1'b0;
        for (int i = 0; i < P; i++) q[i] <= '0;
      end else begin
        qv <= dv;
        qe <= de;
        for (int i = 0; i < P; i++)
          q[i] <= (i >= D) ? combine(fn, d[i-D], d[i]) : d[i];
      end
    end
  end

  assign sl   = g_stage[L-1].q;
  assign sl_v = g_stage[L-1].qv;
  assign sl_e = g_stage[L-1].qe;

  // entities n': roll-over with the previous batch and summarisation
  logic              c_valid;
  group_t            c_group;
  key_t              c_key;
  result_t           c_acc;
  logic [CNT_W-1:0]  c_cnt, c_dcnt;
  logic [L-1:0]      rr_off;

  result_t           f_acc  [P];
  logic [CNT_W-1:0]  f_cnt  [P];
  logic [CNT_W-1:0]  f_dcnt [P];
  logic              f_join [P];

  always_comb begin
    for (int i = 0; i < P; i++) begin
      f_join[i] = c_valid && sl[i].seg0 && (c_group == sl[i].group);
      f_acc[i]  = sl[i].acc;
      f_cnt[i]  = CNT_W'(sl[i].cnt);
      f_dcnt[i] = CNT_W'(sl[i].dcnt);
      if (f_join[i]) begin
        f_acc[i]  = op(fn, c_acc, sl[i].acc);
        f_cnt[i]  = c_cnt + CNT_W'(sl[i].cnt);
        f_dcnt[i] = c_dcnt + CNT_W'(sl[i].dcnt) - CNT_W'(c_key == sl[i].dmin);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid   <= 1'b0;
      c_group   <= '0;
      c_key     <= '0;
      c_acc     <= '0;
      c_cnt     <= '0;
      c_dcnt    <= '0;
      rr_off    <= '0;
      out_valid <= 1'b0;
      out_end   <= 1'b0;
      for (int i = 0; i < P; i++) begin
        out_res[i] <= '0;
        out_sel[i] <= 1'b0;
        out_idx[i] <= '0;
      end
    end else begin
      out_valid <= sl_v;
      out_end   <= sl_e;
      if (sl_v) begin
        for (int i = 0; i < P; i++) begin
          out_res[i].group <= sl[i].group;
          case (fn)
            FN_COUNT:     out_res[i].result <= result_t'(f_cnt[i]);
            FN_DCOUNT:    out_res[i].result <= result_t'(f_dcnt[i]);
            FN_AVG:       out_res[i].result <= f_acc[i] / result_t'(f_cnt[i]);
            FN_MINMEDMAX: out_res[i].result <= result_t'(sl[i].key);
            default:      out_res[i].result <= f_acc[i];
          endcase
          if (fn == FN_MINMEDMAX)
            out_sel[i] <= (f_cnt[i] == CNT_W'(1)) ||
                          (f_cnt[i] == CNT_W'(sl[i].card / 2) + CNT_W'(1)) ||
                          (f_cnt[i] == CNT_W'(sl[i].card));
          else
            out_sel[i] <= sl[i].last;
          out_idx[i] <= rr_off + L'(sl[i].lcnt - SW'(sl[i].last));
        end
        rr_off  <= rr_off + L'(sl[P-1].lcnt);
        c_valid <= !sl[P-1].last && !sl_e;
        c_group <= sl[P-1].group;
        c_key   <= sl[P-1].key;
        c_acc   <= f_acc[P-1];
        c_cnt   <= f_cnt[P-1];
        c_dcnt  <= f_dcnt[P-1];
      end
    end
  end

endmodule
