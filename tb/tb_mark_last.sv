// tb_mark_last: checks the marking of the last tuple of every group.
//
// A random stream sorted by group is sent in batches with random gaps, the
// final batch flagged with in_end. The marked batches must come out in order,
// unchanged, with last set exactly where the next tuple of the stream has
// another group (and on the stream's final tuple). A batch leaves one cycle
// after the next batch enters; the end batch one cycle after it enters.
module tb_mark_last;
  import enthuse_pkg::*;
  localparam int unsigned P = 4, NB = 50, NT = NB * P;

  logic    clk = 0, rst_n = 0, in_valid = 0, in_end = 0;
  ctuple_t in_data [P];
  logic    out_valid, out_end;
  ctuple_t out_data [P];
  logic    out_last [P];

  mark_last #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, ob = 0;
  group_t tg [NT];
  key_t   tk [NT];

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int i = 0; i < P; i++) begin
      automatic int t = ob * P + i;
      automatic logic el = (t == NT - 1) || (tg[t] != tg[t+1 < NT ? t+1 : t]);
      checks++;
      if (out_data[i].group != tg[t] || out_data[i].key != tk[t] || out_last[i] != el) begin
        failures++;
        $display("tuple %0d: got (%0d,%0d,%0b) exp (%0d,%0d,%0b)", t, out_data[i].group,
                 out_data[i].key, out_last[i], tg[t], tk[t], el);
      end
    end
    checks++;
    if (out_end != (ob == NB - 1)) begin
      failures++;
      $display("out_end wrong at batch %0d", ob);
    end
    ob++;
  end

  initial begin
    automatic group_t g = '0;
    for (int t = 0; t < NT; t++) begin
      if ($urandom_range(0, 3) == 0) g += group_t'($urandom_range(1, 2));
      tg[t] = g;
      tk[t] = key_t'($urandom);
    end
    for (int i = 0; i < P; i++) in_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      in_valid = 1;
      in_end   = (b == NB - 1);
      for (int i = 0; i < P; i++) in_data[i] = '{group: tg[b*P+i], key: tk[b*P+i], card: '0};
      @(negedge clk);
      in_valid = 0;
      in_end   = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (ob != NB) begin
      failures++;
      $display("%0d batches out, expected %0d", ob, NB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
