// tb_reverse_butterfly: checks the reverse butterfly on rotated compactions.
//
// Every batch has a random set of valid tuples; the n-th valid tuple is sent to
// port (offset + n) mod P, with a rolling offset. The output must hold each
// valid tuple on its destination port, nothing on the others, log2(P) cycles
// later. Run for P = 8 so that three switch stages are exercised.
module tb_reverse_butterfly;
  import enthuse_pkg::*;
  localparam int unsigned P = 8, L = $clog2(P);

  logic clk = 0, rst_n = 0, in_valid = 0, in_end = 0;
  res_t in_res [P];
  logic in_vld [P];
  logic [L-1:0] in_idx [P];
  logic out_valid, out_end;
  res_t out_res [P];
  logic out_vld [P];

  reverse_butterfly #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  typedef res_t [P-1:0] rrow_t;
  rrow_t          exp_res [$];
  logic [P-1:0]   exp_vld [$];

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic rrow_t        er = exp_res.pop_front();
    automatic logic [P-1:0] ev;
    ev = exp_vld.pop_front();
    for (int i = 0; i < P; i++) begin
      checks++;
      if (out_vld[i] != ev[i] || (ev[i] && out_res[i] != er[i])) begin
        failures++;
        $display("port %0d: got %0b/%0h exp %0b/%0h", i, out_vld[i], out_res[i], ev[i], er[i]);
      end
    end
  end

  initial begin
    automatic int off = 0;

    for (int i = 0; i < P; i++) begin in_res[i] = '0; in_vld[i] = 0; in_idx[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 300; b++) begin
      automatic rrow_t        er;
      automatic logic [P-1:0] ev;
      automatic int n = 0;
      @(negedge clk);
      for (int i = 0; i < P; i++) begin ev[i] = 0; er[i] = '0; end
      for (int i = 0; i < P; i++) begin
        in_res[i] = '{group: group_t'($urandom), result: result_t'($urandom)};
        in_vld[i] = (b % 7 == 0) ? 1'b1 : 1'($urandom_range(0, 1));
        in_idx[i] = L'(off + n);
        if (in_vld[i]) begin
          ev[(off + n) % P] = 1;
          er[(off + n) % P] = in_res[i];
          n++;
        end
      end
      off = (off + n) % P;
      in_valid = 1;
      exp_res.push_back(er);
      exp_vld.push_back(ev);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (L + 3) @(negedge clk);
    checks++;
    if (exp_res.size() != 0) begin
      failures++;
      $display("%0d batches missing", exp_res.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
