// tb_enthuse_top: end-to-end test of the accelerator at its default size
// (P = 4, K = 128, WS_MAX = 16384; the top's parameters are not overridden).
//
// Phases, each started from reset:
//   1. group-by, every operator, on a sorted stream whose groups span batch
//      boundaries and hold duplicate keys; results checked in order.
//   2. sliding window with groups: min/med/max, sum and distinct count with
//      overlapping windows, windows the sorter holds at once (ws <= 128) and
//      windows it sorts in chunks and merges, up to the largest (ws = 16384).
//   3. sliding window without groups (use_groups low).
//   4. backpressure: a long stream with wa << ws fills the 2*WS_MAX buffer so
//      in_ready must drop; the results produced until then are checked.
// Every mechanism is counted (group-by results, window results, carries across
// batches, duplicate keys in distinct count, min/med/max groups with three
// results, windows without groups, input stalls) and one that never happened
// counts as a failure.
module tb_enthuse_top;
  import enthuse_pkg::*;
  import enthuse_ref_pkg::*;

  localparam int unsigned P = 4;

  logic   clk = 0, rst_n = 0;
  logic   mode = 0, use_groups = 1;
  fn_e    fn = FN_SUM;
  logic [14:0] ws = 15'd16, wa = 15'd16;
  logic   in_valid = 0, in_ready, in_end = 0;
  tuple_t in_data [P];
  logic   out_valid, out_end;
  res_t   out_res [P];
  logic   out_vld [P];

  enthuse_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, got = 0, ptr = 0, win_ends = 0;
  int n_gb = 0, n_sw = 0, n_carry = 0, n_dup = 0, n_mmm3 = 0, n_nogrp = 0, n_stall = 0, n_merge = 0;
  group_t  eg [$];
  result_t er [$];

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_stall++;
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
            $display("mode %0b %s #%0d: got (%0d,%0d) exp (%0d,%0d)", mode, fn.name(), got,
                     out_res[port].group, out_res[port].result,
                     got < eg.size() ? eg[got] : 0, got < er.size() ? er[got] : 0);
        end
        got++;
        if (mode) n_sw++; else n_gb++;
        if (mode && !use_groups) n_nogrp++;
      end
      ptr = (ptr + n) % P;
      if (out_end) win_ends++;
    end
  end

  task automatic restart(input logic m, input fn_e f, input logic grp, input int cws, input int cwa);
    @(negedge clk);
    rst_n = 0; in_valid = 0; in_end = 0;
    mode = m; fn = f; use_groups = grp; ws = 15'(cws); wa = 15'(cwa);
    eg.delete(); er.delete(); got = 0; ptr = 0; win_ends = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
  endtask

  task automatic send(input tq_t t, input logic last_is_end);
    for (int b = 0; b < t.size() / P; b++) begin
      in_valid = 1;
      in_end   = last_is_end && (b == t.size() / P - 1);
      for (int i = 0; i < P; i++) in_data[i] = t[b*P+i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      in_end   = 0;
    end
  endtask

  task automatic expect_all(input string what);
    checks++;
    if (got != eg.size()) begin
      failures++;
      $display("%s: %0d results, expected %0d", what, got, eg.size());
    end
  endtask

  // phase 1: group-by
  task automatic phase_groupby();
    for (int f = 0; f < 6; f++) begin
      tq_t t;
      automatic group_t g = 1;
      automatic key_t   k = 0;
      for (int i = 0; i < 400; i++) begin
        if (i > 0 && $urandom_range(0, 6) == 0) begin g += group_t'($urandom_range(1, 4)); k = key_t'($urandom_range(0, 50)); end
        else if (i > 0) k += key_t'($urandom_range(0, 2));
        if (i > 0 && k == t[i-1].key && g == t[i-1].group) n_dup++;
        if (i > 0 && i % P == 0 && g == t[i-1].group) n_carry++;
        t.push_back('{group: g, key: k});
      end
      restart(0, fn_e'(f), 1, 16, 16);
      aggregate(t, fn_e'(f), eg, er);
      send(t, 1);
      repeat (20) @(negedge clk);
      expect_all("group-by");
    end
  endtask

  // phases 2 and 3: sliding windows
  task automatic phase_swag(input fn_e f, input logic grp, input int cws, input int cwa, input int nt);
    tq_t t;
    int  nw;
    for (int i = 0; i < nt; i++)
      t.push_back('{group: grp ? group_t'($urandom_range(0, 5)) : '0, key: key_t'($urandom_range(0, 60))});
    restart(1, f, grp, cws, cwa);
    nw = swag(t, cws, cwa, f, eg, er);
    if (cws > 128) n_merge += nw;
    if (f == FN_MINMEDMAX) begin
      // groups of at least three tuples give three results
      for (int i = 2; i < eg.size(); i++) if (eg[i] == eg[i-1] && eg[i] == eg[i-2]) n_mmm3++;
    end
    send(t, 0);
    while (win_ends < nw) @(negedge clk);
    repeat (20) @(negedge clk);
    expect_all($sformatf("swag ws=%0d wa=%0d %s", cws, cwa, f.name()));
  endtask

  // phase 4: fill the window buffer so that in_ready drops
  task automatic phase_backpressure();
    tq_t t;
    int  s0 = n_stall, nw;
    for (int i = 0; i < 2 * 16384 + 2048; i++)
      t.push_back('{group: group_t'($urandom_range(0, 3)), key: key_t'($urandom_range(0, 99))});
    restart(1, FN_MAX, 1, 32, 4);
    nw = swag(t, 32, 4, FN_MAX, eg, er);
    send(t, 0);
    repeat (50) @(negedge clk);
    checks++;
    if (n_stall == s0) begin failures++; $display("no backpressure"); end
    checks++;
    if (got == 0) begin failures++; $display("no results under backpressure"); end
    $display("backpressure: %0d stalled cycles, %0d of %0d windows done", n_stall - s0, win_ends, nw);
  endtask

  initial begin
    for (int i = 0; i < P; i++) in_data[i] = '0;
    phase_groupby();
    phase_swag(FN_MINMEDMAX, 1, 16, 8, 256);
    phase_swag(FN_MINMEDMAX, 1, 128, 32, 512);
    phase_swag(FN_SUM, 1, 64, 64, 512);
    phase_swag(FN_DCOUNT, 1, 32, 8, 256);
    phase_swag(FN_MINMEDMAX, 0, 32, 16, 256);
    phase_swag(FN_MINMEDMAX, 1, 512, 256, 1536);
    phase_swag(FN_DCOUNT, 1, 16384, 16384, 16384);
    phase_backpressure();
    $display("mechanisms: groupby=%0d swag=%0d carry=%0d dup=%0d minmedmax3=%0d nogroups=%0d stalls=%0d merged=%0d",
             n_gb, n_sw, n_carry, n_dup, n_mmm3, n_nogrp, n_stall, n_merge);
    checks += 8;
    if (n_merge == 0) begin failures++; $display("no window went through the merge pass"); end
    if (n_gb == 0)    begin failures++; $display("group-by never produced a result"); end
    if (n_sw == 0)    begin failures++; $display("sliding window never produced a result"); end
    if (n_carry == 0) begin failures++; $display("no group crossed a batch"); end
    if (n_dup == 0)   begin failures++; $display("no duplicate key"); end
    if (n_mmm3 == 0)  begin failures++; $display("no min/med/max triple"); end
    if (n_nogrp == 0) begin failures++; $display("no result without groups"); end
    if (n_stall == 0) begin failures++; $display("no backpressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
