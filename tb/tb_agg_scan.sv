// tb_agg_scan: checks the adapted rolling prefix scan tuple by tuple.
//
// A sorted stream with marked last tuples and group cardinalities goes through
// the scan for every operator. For each tuple the expected output is computed
// here: the running aggregate of its group up to and including that tuple
// (across batch boundaries), the valid bit (last flag, or position 1, card/2+1
// or card for min/med/max) and, for marked tuples, the round-robin index
// (number of earlier marked tuples mod P). Latency is log2(P)+1 cycles.
module tb_agg_scan;
  import enthuse_pkg::*;
  localparam int unsigned P = 4, L = $clog2(P), NB = 30, NT = NB * P;

  logic    clk = 0, rst_n = 0, in_valid = 0, in_end = 0;
  fn_e     fn;
  ctuple_t in_data [P];
  logic    in_last [P];
  logic    out_valid, out_end;
  res_t    out_res [P];
  logic    out_sel [P];
  logic [L-1:0] out_idx [P];

  agg_scan #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, ob;
  int unsigned cyc = 0, in_cyc [$];
  always @(posedge clk) cyc <= cyc + 1;

  group_t  tg [NT];
  key_t    tk [NT];
  logic    tl [NT];
  card_t   tc [NT];
  result_t eres [NT];
  logic    esel [NT];
  int      eidx [NT];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int unsigned c0 = in_cyc.pop_front();
    checks++;
    if (cyc - c0 != L + 1) begin
      failures++;
      $display("latency %0d", cyc - c0);
    end
    for (int i = 0; i < P; i++) begin
      automatic int t = ob * P + i;
      checks++;
      if (out_res[i].group != tg[t] || out_sel[i] != esel[t] ||
          (out_sel[i] && out_res[i].result != eres[t]) ||
          (fn != FN_MINMEDMAX && out_res[i].result != eres[t]) ||
          (fn != FN_MINMEDMAX && out_sel[i] && int'(out_idx[i]) != eidx[t])) begin
        failures++;
        $display("%s tuple %0d: got (%0d,%0d,sel %0b,idx %0d) exp (%0d,%0d,%0b,%0d)", fn.name(), t,
                 out_res[i].group, out_res[i].result, out_sel[i], out_idx[i], tg[t], eres[t], esel[t], eidx[t]);
      end
    end
    ob++;
  end

  initial begin
    for (int i = 0; i < P; i++) begin in_data[i] = '0; in_last[i] = 0; end
    fn = FN_SUM;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f <= 6; f++) begin
      automatic int s = 0, nl = 0;
      automatic group_t g = '0;
      automatic key_t   k = '0;
      fn = fn_e'(f);
      for (int t = 0; t < NT; t++) begin
        if (t > 0 && $urandom_range(0, 5) == 0) begin g += 1; k = key_t'($urandom_range(0, 9)); end
        else if (t > 0) k += key_t'($urandom_range(0, 1));
        tg[t] = g; tk[t] = k;
      end
      // model: running aggregate per group
      while (s < NT) begin
        automatic int e = s;
        while (e + 1 < NT && tg[e+1] == tg[s]) e++;
        for (int t = s; t <= e; t++) begin
          automatic result_t mn = tk[s], mx = tk[s], sm = 0, dc = 0;
          automatic int pos = t - s + 1, c = e - s + 1;
          for (int u = s; u <= t; u++) begin
            if (tk[u] < mn) mn = tk[u];
            if (tk[u] > mx) mx = tk[u];
            sm += tk[u];
            if (u == s || tk[u] != tk[u-1]) dc++;
          end
          tl[t] = (t == e);
          tc[t] = card_t'(c);
          case (fn)
            FN_MIN:       eres[t] = mn;
            FN_MAX:       eres[t] = mx;
            FN_SUM:       eres[t] = sm;
            FN_COUNT:     eres[t] = result_t'(pos);
            FN_DCOUNT:    eres[t] = dc;
            FN_AVG:       eres[t] = sm / result_t'(pos);
            default:      eres[t] = tk[t];
          endcase
          esel[t] = (fn == FN_MINMEDMAX) ? (pos == 1 || pos == c / 2 + 1 || pos == c) : tl[t];
          eidx[t] = nl % P;
          if (tl[t]) nl++;
        end
        s = e + 1;
      end
      ob = 0;
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        in_valid = 1;
        in_end   = (b == NB - 1);
        for (int i = 0; i < P; i++) begin
          in_data[i] = '{group: tg[b*P+i], key: tk[b*P+i], card: tc[b*P+i]};
          in_last[i] = tl[b*P+i];
        end
        in_cyc.push_back(cyc);
        if (b % 3 == 1) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk);
      in_valid = 0;
      in_end = 0;
      repeat (L + 4) @(negedge clk);
      checks++;
      if (ob != NB) begin failures++; $display("%0d batches out", ob); end
      // the round-robin offset carries over between streams
      in_valid = 0;
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
