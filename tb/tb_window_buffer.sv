// tb_window_buffer: checks window generation and backpressure.
//
// The input stream is tuples numbered 0, 1, 2, ... (key = number). For several
// (ws, wa) settings and with a randomly stalling consumer, window w must be
// exactly tuples w*wa .. w*wa+ws-1 in order, with out_win_last on the final
// batch of each window. A small buffer (WS_MAX = 64, 128 tuples) makes in_ready
// drop; the test counts that this happened and that no tuple was lost.
module tb_window_buffer;
  import enthuse_pkg::*;
  localparam int unsigned P = 4, WS_MAX = 64;

  logic   clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, out_win_last;
  logic [$clog2(WS_MAX):0] ws, wa;
  tuple_t in_data [P], out_data [P];

  window_buffer #(.P(P), .WS_MAX(WS_MAX)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, stalls = 0;
  int win, pos, sent;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) stalls++;
    if (in_valid && in_ready) sent++;
    if (out_valid && out_ready) begin
      for (int i = 0; i < P; i++) begin
        checks++;
        if (out_data[i].key != key_t'(win * int'(wa) + pos + i)) begin
          failures++;
          $display("ws=%0d wa=%0d win %0d pos %0d: got %0d", ws, wa, win, pos + i, out_data[i].key);
        end
      end
      checks++;
      if (out_win_last != (pos + P == int'(ws))) begin
        failures++;
        $display("out_win_last wrong at win %0d pos %0d", win, pos);
      end
      pos += P;
      if (pos == int'(ws)) begin pos = 0; win++; end
    end
  end

  task automatic run(input int cws, input int cwa, input int nt);
    int st0 = stalls;
    rst_n = 0; ws = 7'(cws); wa = 7'(cwa); win = 0; pos = 0; sent = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      begin
        for (int t = 0; t < nt; t += P) begin
          @(negedge clk);
          in_valid = 1;
          for (int i = 0; i < P; i++) in_data[i] = '{group: '0, key: key_t'(t + i)};
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        repeat (nt * 8) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join
    checks++;
    if (win != (nt - cws) / cwa + 1) begin
      failures++;
      $display("ws=%0d wa=%0d: %0d windows, expected %0d", cws, cwa, win, (nt - cws) / cwa + 1);
    end
    checks++;
    if (sent != nt / P) begin
      failures++;
      $display("sent %0d batches", sent);
    end
    if (cwa < cws) begin
      checks++;
      if (stalls == st0) begin failures++; $display("no backpressure"); end
    end
  endtask

  initial begin
    for (int i = 0; i < P; i++) in_data[i] = '0;
    run(16, 4, 400);
    run(64, 64, 512);
    run(64, 4, 256);
    run(8, 8, 64);
    run(32, 12, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
