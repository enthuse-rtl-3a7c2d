// enthuse_ref_pkg: reference model used by the testbenches.
//
// Computes, from plain arrays of tuples, what the engines must produce: the
// per-group aggregates of a sorted stream (group-by), and the per-window,
// per-group results of a sliding-window query (each window sorted by
// {group, key}, then aggregated; min/med/max keeps the tuples at positions 1,
// card/2+1 and card of each group, each tuple at most once).
package enthuse_ref_pkg;
  import enthuse_pkg::*;

  typedef tuple_t tq_t [$];

  // aggregate a stream sorted by {group, key}; append (group, result) pairs
  function automatic void aggregate(input tq_t t, input fn_e f,
                                    ref group_t eg [$], ref result_t er [$]);
    int s = 0;
    while (s < t.size()) begin
      int e = s;
      result_t mn, mx, sm, dc;
      int c;
      while (e + 1 < t.size() && t[e+1].group == t[s].group) e++;
      mn = t[s].key; mx = t[s].key; sm = 0; dc = 0;
      c = e - s + 1;
      for (int i = s; i <= e; i++) begin
        if (t[i].key < mn) mn = t[i].key;
        if (t[i].key > mx) mx = t[i].key;
        sm += t[i].key;
        if (i == s || t[i].key != t[i-1].key) dc++;
      end
      case (f)
        FN_MIN:    begin eg.push_back(t[s].group); er.push_back(mn); end
        FN_MAX:    begin eg.push_back(t[s].group); er.push_back(mx); end
        FN_SUM:    begin eg.push_back(t[s].group); er.push_back(sm); end
        FN_COUNT:  begin eg.push_back(t[s].group); er.push_back(result_t'(c)); end
        FN_DCOUNT: begin eg.push_back(t[s].group); er.push_back(dc); end
        FN_AVG:    begin eg.push_back(t[s].group); er.push_back(sm / result_t'(c)); end
        default: begin
          for (int p = 1; p <= c; p++)
            if (p == 1 || p == c / 2 + 1 || p == c) begin
              eg.push_back(t[s].group);
              er.push_back(t[s+p-1].key);
            end
        end
      endcase
      s = e + 1;
    end
  endfunction

  function automatic tq_t sort_tuples(input tq_t t);
    tq_t o = t;
    o.sort() with ({item.group, item.key});
    return o;
  endfunction

  // all windows of ws tuples advancing by wa over stream t
  function automatic int swag(input tq_t t, input int ws, input int wa, input fn_e f,
                              ref group_t eg [$], ref result_t er [$]);
    int nw = 0;
    for (int s = 0; s + ws <= t.size(); s += wa) begin
      tq_t w;
      for (int i = s; i < s + ws; i++) w.push_back(t[i]);
      aggregate(sort_tuples(w), f, eg, er);
      nw++;
    end
    return nw;
  endfunction
endpackage
