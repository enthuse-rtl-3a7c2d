// tb_enthuse_groupby: self-checking test of the Enthuse group-by pipeline.
//
// For each operator (min, max, sum, count, distinct count, average) a random
// stream sorted by {group, key} is sent in batches of P, with random idle
// cycles between batches, groups that span several batches, and duplicate keys.
// The expected per-group results are computed here from the same tuples.
// Outputs are read round-robin from port 0 and compared in order; the check
// also requires the valid ports of each output batch to be the next ports in
// round-robin order. The latency from the final batch to its results is
// checked against 2 log2(P) + 2 cycles.
module tb_enthuse_groupby;
  import enthuse_pkg::*;

  localparam int unsigned P  = 4;
  localparam int unsigned L  = $clog2(P);
  localparam int unsigned NB = 40;          // batches per stream
  localparam int unsigned NT = NB * P;

  logic   clk = 0, rst_n = 0;
  fn_e    fn;
  logic   in_valid = 0, in_end = 0;
  tuple_t in_data [P];
  logic   out_valid, out_end;
  res_t   out_res [P];
  logic   out_vld [P];

  enthuse_groupby #(.P(P)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  group_t  tg [NT];
  key_t    tk [NT];
  group_t  eg [$];
  result_t er [$];
  int      got, ptr;
  int unsigned end_cyc, res_cyc;

  task automatic gen_stream();
    automatic group_t g = group_t'($urandom_range(0, 5));
    automatic key_t   k = key_t'($urandom_range(0, 20));
    for (int t = 0; t < NT; t++) begin
      if (t > 0 && $urandom_range(0, 9) < 3) begin
        g = g + group_t'($urandom_range(1, 3));
        k = key_t'($urandom_range(0, 20));
      end else if (t > 0) begin
        k = k + key_t'($urandom_range(0, 1));
      end
      if (t >= NT/2 && t < NT/2 + 11) k = k;   // a long run of one group
      tg[t] = g;
      tk[t] = k;
    end
  endtask

  task automatic model(input fn_e f);
    automatic int s = 0;
    eg.delete(); er.delete();
    while (s < NT) begin
      automatic int e = s;
      automatic result_t mn = tk[s], mx = tk[s], sm = 0, dc = 0;
      while (e + 1 < NT && tg[e+1] == tg[s]) e++;
      for (int t = s; t <= e; t++) begin
        if (tk[t] < mn) mn = tk[t];
        if (tk[t] > mx) mx = tk[t];
        sm += tk[t];
        if (t == s || tk[t] != tk[t-1]) dc++;
      end
      eg.push_back(tg[s]);
      case (f)
        FN_MIN:    er.push_back(mn);
        FN_MAX:    er.push_back(mx);
        FN_SUM:    er.push_back(sm);
        FN_COUNT:  er.push_back(result_t'(e - s + 1));
        FN_DCOUNT: er.push_back(dc);
        default:   er.push_back(sm / result_t'(e - s + 1));
      endcase
      s = e + 1;
    end
  endtask

  // collect results round-robin
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int n = 0;
    for (int i = 0; i < P; i++) if (out_vld[i]) n++;
    for (int j = 0; j < n; j++) begin
      automatic int port = (ptr + j) % P;
      checks++;
      if (!out_vld[port] || got >= eg.size() ||
          out_res[port].group != eg[got] || out_res[port].result != er[got]) begin
        failures++;
        if (failures < 10)
          $display("mismatch fn=%s #%0d port %0d: got (%0d,%0d) exp (%0d,%0d)", fn.name(), got, port,
                   out_res[port].group, out_res[port].result,
                   got < eg.size() ? eg[got] : 0, got < er.size() ? er[got] : 0);
      end
      got++;
    end
    ptr = (ptr + n) % P;
    if (out_end) res_cyc = cyc;
  end

  initial begin
    fn = FN_SUM;
    for (int i = 0; i < P; i++) in_data[i] = '0;
    ptr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      fn = fn_e'(f);
      gen_stream();
      model(fn);
      got = 0;
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        automatic int gap = (f % 2 == 0) ? 0 : $urandom_range(0, 2);
        repeat (gap) @(negedge clk);
        in_valid = 1;
        in_end   = (b == NB - 1);
        for (int i = 0; i < P; i++) in_data[i] = '{group: tg[b*P+i], key: tk[b*P+i]};
        @(posedge clk);
        if (in_end) end_cyc = cyc;
        @(negedge clk);
        in_valid = 0;
        in_end   = 0;
      end
      repeat (4 * L + 8) @(negedge clk);
      checks++;
      if (got != eg.size()) begin
        failures++;
        $display("fn=%s: %0d results, expected %0d", fn.name(), got, eg.size());
      end
      checks++;
      // res_cyc is sampled one edge after the results were registered
      if (res_cyc - end_cyc - 1 != 2 * L + 2) begin
        failures++;
        $display("fn=%s: latency %0d, expected %0d", fn.name(), res_cyc - end_cyc - 1, 2 * L + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
