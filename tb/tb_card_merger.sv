// tb_card_merger: checks merging of two sorted lists with cardinalities.
//
// Each round builds two random sorted lists (few groups, so groups appear in
// one list only or in both), gives every tuple the size of its group within
// its own list, and streams them in with random stalls on both inputs and on
// the output. The merged stream must be sorted, end with out_last on its final
// tuple, and give each tuple the size of its group over both lists.
module tb_card_merger;
  import enthuse_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    a_valid, a_last, a_ready, b_valid, b_last, b_ready;
  ctuple_t a_data, b_data, out_data;
  logic    out_valid, out_last, out_ready;

  card_merger dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  ctuple_t la [$], lb [$];
  logic [63:0] all [$];
  int tot [int];
  int ia, ib, io;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void mk(ref ctuple_t l [$], input int n);
    automatic logic [63:0] v [$];
    automatic int c [int];
    l.delete();
    for (int i = 0; i < n; i++) v.push_back({32'($urandom_range(0, 5)), 32'($urandom_range(0, 9))});
    v.sort();
    foreach (v[i]) begin
      if (c.exists(int'(v[i][63:32]))) c[int'(v[i][63:32])]++; else c[int'(v[i][63:32])] = 1;
      if (tot.exists(int'(v[i][63:32]))) tot[int'(v[i][63:32])]++; else tot[int'(v[i][63:32])] = 1;
      all.push_back(v[i]);
    end
    foreach (v[i]) l.push_back('{group: v[i][63:32], key: v[i][31:0], card: card_t'(c[int'(v[i][63:32])])});
  endfunction


  initial begin
    a_valid = 0; b_valid = 0; out_ready = 0; a_data = '0; b_data = '0; a_last = 0; b_last = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      tot.delete(); all.delete();
      mk(la, $urandom_range(1, 12));
      mk(lb, $urandom_range(1, 12));
      all.sort();
      ia = 0; ib = 0; io = 0;
      while (io < all.size()) begin
        @(negedge clk);
        a_data    = (ia < la.size()) ? la[ia] : '0;
        b_data    = (ib < lb.size()) ? lb[ib] : '0;
        a_last    = (ia == la.size() - 1);
        b_last    = (ib == lb.size() - 1);
        a_valid   = (ia < la.size()) && ($urandom_range(0, 3) != 0);
        b_valid   = (ib < lb.size()) && ($urandom_range(0, 3) != 0);
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
        begin
          automatic logic    ta = a_valid && a_ready;
          automatic logic    tb = b_valid && b_ready;
          automatic logic    to = out_valid && out_ready;
          automatic ctuple_t od = out_data;
          automatic logic    ol = out_last;
          @(posedge clk);
          if (to) begin
            checks++;
            if ({od.group, od.key} != all[io] || od.card != card_t'(tot[int'(od.group)]) ||
                ol != (io == all.size() - 1)) begin
              failures++;
              $display("round %0d #%0d: got (%0d,%0d,%0d,%0b) exp %0h card %0d", r, io, od.group,
                       od.key, od.card, ol, all[io], tot[int'(od.group)]);
            end
            io++;
          end
          if (ta) ia++;
          if (tb) ib++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
