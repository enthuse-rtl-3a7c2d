// tb_linear_sorter_card: checks insertion sorting and group counting.
//
// Rounds of random tuples (few groups, repeated keys) are inserted, up to the
// full capacity, and then popped. The popped list must be the sorted input,
// equal tuples in arrival order (checked through the tag, which holds the
// arrival number). Every tuple's cardinality must equal the sum of the
// cardinalities inserted for its group: 1 per tuple in half of the rounds (a
// plain count), random values in the others (merge-pass use). Count and
// head_valid are checked on the way.
module tb_linear_sorter_card;
  import enthuse_pkg::*;
  localparam int unsigned N = 16, TW = 8;

  logic    clk = 0, rst_n = 0, ins_valid = 0, pop = 0;
  ctuple_t ins_data, head;
  logic    head_valid;
  logic [TW-1:0] ins_tag = '0, head_tag;
  logic [$clog2(N):0] count;

  linear_sorter_card #(.N(N), .TW(TW)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ins_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int n = (r % 4 == 0) ? N : $urandom_range(1, N);
      automatic logic [63+TW:0] v [$];
      automatic int gc [int];
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        ins_valid = 1;
        ins_data  = '{group: group_t'($urandom_range(0, 3)), key: key_t'($urandom_range(0, 5)),
                      card: (r % 2 == 0) ? card_t'(1) : card_t'($urandom_range(1, 9))};
        ins_tag   = TW'(i);
        v.push_back({ins_data.group, ins_data.key, ins_tag});
        if (gc.exists(int'(ins_data.group))) gc[int'(ins_data.group)] += int'(ins_data.card);
        else gc[int'(ins_data.group)] = int'(ins_data.card);
      end
      @(negedge clk);
      ins_valid = 0;
      checks++;
      if (count != ($clog2(N)+1)'(n)) begin
        failures++;
        $display("count %0d, expected %0d", count, n);
      end
      v.sort();
      for (int i = 0; i < n; i++) begin
        checks++;
        if (!head_valid || {head.group, head.key, head_tag} != v[i] || head.card != card_t'(gc[int'(head.group)])) begin
          failures++;
          $display("round %0d pos %0d: got (%0d,%0d,card %0d) exp %0h card %0d", r, i,
                   head.group, head.key, head.card, v[i], gc[int'(head.group)]);
        end
        pop = 1;
        @(negedge clk);
        pop = 0;
      end
      checks++;
      if (head_valid || count != 0) begin
        failures++;
        $display("not empty after popping");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
