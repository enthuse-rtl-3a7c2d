// tb_enthuse_swag: end-to-end test of the sliding-window engine.
//
// Random (group, key) tuples are streamed in while the input side obeys
// in_ready. For several (ws, wa, operator) settings, including min/med/max,
// windows that overlap (wa < ws, so backpressure must occur), windows the
// sorter holds at once (ws <= K) and windows it sorts in chunks and merges
// (ws > K, with a small K so that this stays short), a small buffer so that it
// fills, and plain numbers without groups, every
// result is compared in order with the reference model, which sorts each
// window itself. It also checks that in_ready did drop when wa < ws.
module tb_enthuse_swag;
  import enthuse_pkg::*;
  import enthuse_ref_pkg::*;

  localparam int unsigned P = 4, K = 16, WS_MAX = 128;

  logic   clk = 0, rst_n = 0;
  fn_e    fn;
  logic   use_groups;
  logic [$clog2(WS_MAX):0] ws, wa;
  logic   in_valid = 0, in_ready;
  tuple_t in_data [P];
  logic   out_valid, out_end;
  res_t   out_res [P];
  logic   out_vld [P];

  enthuse_swag #(.P(P), .K(K), .WS_MAX(WS_MAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, got = 0, ptr = 0, stalls = 0, win_ends = 0;
  group_t  eg [$];
  result_t er [$];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) stalls++;
    if (out_valid) begin
      automatic int n = 0;
      for (int i = 0; i < P; i++) n += int'(out_vld[i]);
      for (int j = 0; j < n; j++) begin
        automatic int port = (ptr + j) % P;
        checks++;
        if (!out_vld[port] || got >= eg.size() ||
            out_res[port].group != eg[got] || out_res[port].result != er[got]) begin
          failures++;
          if (failures < 10)
            $display("mismatch %s #%0d: got (%0d,%0d) exp (%0d,%0d)", fn.name(), got,
                     out_res[port].group, out_res[port].result,
                     got < eg.size() ? eg[got] : 0, got < er.size() ? er[got] : 0);
        end
        got++;
      end
      ptr = (ptr + n) % P;
      if (out_end) win_ends++;
    end
  end

  task automatic run(input int cws, input int cwa, input fn_e cfn, input bit grp, input int nt);
    tq_t t;
    int  nw, st0;
    rst_n = 0;
    ws = ($clog2(WS_MAX)+1)'(cws); wa = ($clog2(WS_MAX)+1)'(cwa); fn = cfn; use_groups = grp;
    for (int i = 0; i < nt; i++)
      t.push_back('{group: grp ? group_t'($urandom_range(0, 7)) : '0, key: key_t'($urandom_range(0, 40))});
    eg.delete(); er.delete(); got = 0; ptr = 0; win_ends = 0; st0 = stalls;
    nw = swag(t, cws, cwa, cfn, eg, er);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int b = 0; b < nt / P; b++) begin
      in_valid = 1;
      for (int i = 0; i < P; i++) in_data[i] = t[b*P+i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    while (win_ends < nw) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (got != eg.size()) begin
      failures++;
      $display("ws=%0d wa=%0d %s: %0d results, expected %0d", cws, cwa, cfn.name(), got, eg.size());
    end
    if (cwa < cws) begin
      checks++;
      if (stalls == st0) begin
        failures++;
        $display("ws=%0d wa=%0d: no backpressure seen", cws, cwa);
      end
    end
    $display("ws=%0d wa=%0d %s groups=%0b: %0d windows, %0d results", cws, cwa, cfn.name(), grp, nw, got);
  endtask

  initial begin
    for (int i = 0; i < P; i++) in_data[i] = '0;
    run(16, 8,  FN_MINMEDMAX, 1, 512);
    run(32, 32, FN_SUM,       1, 128);
    run(128, 64, FN_MINMEDMAX, 1, 640);
    run(16, 4,  FN_DCOUNT,    1, 512);
    run(8, 4,   FN_AVG,       1, 512);
    run(16, 8,  FN_MINMEDMAX, 0, 512);
    run(12, 12, FN_MAX,       1, 48);
    run(64, 16, FN_COUNT,     1, 384);
    run(48, 48, FN_MINMEDMAX, 0, 480);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
