// tb_sorter_card: checks the window sorter and cardinality counter.
//
// Windows of random tuples are loaded as batches: sizes from P up to K (sorting
// mode) and from above K up to K*K (merge mode through the chunk memory), with
// few or many groups. Each window must come out as batches of P tuples sorted by
// {group, key}, each tuple carrying the size of its group in the window, with
// out_end on the final batch. in_ready must be low once a window has been
// loaded, until it has been sent. A small K keeps the merge-mode runs short.
module tb_sorter_card;
  import enthuse_pkg::*;
  localparam int unsigned P = 4, K = 16;

  logic    clk = 0, rst_n = 0, in_valid = 0, in_win_last = 0, in_ready;
  tuple_t  in_data [P];
  logic    out_valid, out_end;
  ctuple_t out_data [P];

  sorter_card #(.P(P), .K(K)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, io = 0, ends = 0, merged = 0;
  logic [63:0] expv [$];
  int tot [int];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int i = 0; i < P; i++) begin
      checks++;
      if ({out_data[i].group, out_data[i].key} != expv[io] ||
          out_data[i].card != card_t'(tot[int'(out_data[i].group)])) begin
        failures++;
        $display("#%0d: got (%0d,%0d,%0d) exp %0h card %0d", io, out_data[i].group,
                 out_data[i].key, out_data[i].card, expv[io], tot[int'(out_data[i].group)]);
      end
      io++;
    end
    checks++;
    if (out_end != (io == expv.size())) begin
      failures++;
      $display("out_end wrong at %0d", io);
    end
    if (out_end) ends++;
  end

  initial begin
    for (int i = 0; i < P; i++) in_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 40; w++) begin
      automatic int nb = (w % 4 == 0) ? K / P :
                         (w % 4 == 1) ? K * K / P :
                         (w % 4 == 2) ? $urandom_range(1, K / P) :
                                        $urandom_range(K / P + 1, K * K / P);
      automatic int ng = (w % 8 < 4) ? 6 : 200;
      if (nb > K / P) merged++;
      expv.delete(); tot.delete(); io = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = 0;
        while (!in_ready) @(negedge clk);
        in_valid    = 1;
        in_win_last = (b == nb - 1);
        for (int i = 0; i < P; i++) begin
          in_data[i] = '{group: group_t'($urandom_range(0, ng)), key: key_t'($urandom_range(0, 30))};
          expv.push_back({in_data[i].group, in_data[i].key});
          if (tot.exists(int'(in_data[i].group))) tot[int'(in_data[i].group)]++;
          else tot[int'(in_data[i].group)] = 1;
        end
      end
      @(negedge clk);
      in_valid = 0; in_win_last = 0;
      expv.sort();
      checks++;
      if (in_ready) begin
        failures++;
        $display("in_ready high during flush");
      end
      while (ends <= w) @(negedge clk);
      @(negedge clk);
    end
    checks++;
    if (merged == 0) failures++;
    $display("windows in merge mode: %0d", merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
