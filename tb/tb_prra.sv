// tb_prra: checks round-robin compaction.
//
// Random batches with random valid bits go in; reading the valid output ports
// round-robin from port 0 must give exactly the valid input tuples in input
// order, and every output batch must use the next ports in round-robin order.
// Latency: 2 log2(P) cycles.
module tb_prra;
  import enthuse_pkg::*;
  localparam int unsigned P = 4, L = $clog2(P);

  logic clk = 0, rst_n = 0, in_valid = 0, in_end = 0;
  res_t in_res [P];
  logic in_vld [P];
  logic out_valid, out_end;
  res_t out_res [P];
  logic out_vld [P];

  prra #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, ptr = 0;
  int unsigned cyc = 0, in_cyc [$];
  res_t expq [$];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int n = 0;
    automatic int unsigned c0 = in_cyc.pop_front();
    checks++;
    if (cyc - c0 != 2 * L) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - c0, 2 * L);
    end
    for (int i = 0; i < P; i++) n += int'(out_vld[i]);
    for (int j = 0; j < n; j++) begin
      automatic int port = (ptr + j) % P;
      automatic res_t e = expq.pop_front();
      checks++;
      if (!out_vld[port] || out_res[port] != e) begin
        failures++;
        $display("port %0d: got %0h exp %0h", port, out_res[port], e);
      end
    end
    ptr = (ptr + n) % P;
  end

  initial begin
    for (int i = 0; i < P; i++) begin in_res[i] = '0; in_vld[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < P; i++) begin
        in_res[i] = '{group: group_t'($urandom), result: result_t'($urandom)};
        in_vld[i] = 1'($urandom_range(0, 1));
        if (in_valid && in_vld[i]) expq.push_back(in_res[i]);
      end
      if (in_valid) in_cyc.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (2 * L + 3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d tuples missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
