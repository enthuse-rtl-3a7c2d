// prra: round-robin stream compaction (prefix scan + reverse butterfly).
//
// The sliding-window engine decides which tuples survive (valid bit) in its
// first, adapted prefix scan; this second, plain rolling prefix scan then counts
// the valid bits to give each surviving tuple its output port, and a reverse
// butterfly network moves it there. A rolling offset (total valid tuples so far,
// modulo P) makes consecutive batches fill the output ports in round-robin order,
// so that port (offset + n) mod P carries the n-th surviving tuple of a batch.
// Reading the ports round-robin from port 0 therefore restores the input order.
//
// Interface: in_valid qualifies a batch, in_vld[i] marks surviving tuples.
// out_vld[i] marks output ports holding a tuple. No backpressure.
// Timing: log2(P) cycles of scan plus log2(P) cycles of butterfly.
// The structure follows the paper (steps (e) and (f) of the sliding-window
// engine); the Kogge-Stone wiring and register placement are this design's own.
module prra
  import enthuse_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_end,
  input  res_t in_res [P],
  input  logic in_vld [P],
  output logic out_valid,
  output logic out_end,
  output res_t out_res [P],
  output logic out_vld [P]
);

  localparam int unsigned L  = $clog2(P);
  localparam int unsigned SW = L + 1;

  typedef struct packed {
    res_t          res;
    logic          vld;
    logic [SW-1:0] cnt;   // inclusive prefix count of valid bits
  } node_t;

  node_t s0 [P];
  always_comb
    for (int i = 0; i < P; i++) s0[i] = '{res: in_res[i], vld: in_vld[i], cnt: SW'(in_vld[i])};

  for (genvar s = 0; s < L; s++) begin : g_stage
    localparam int unsigned D = 1 << s;
    node_t d [P];
    logic  dv, de;
    node_t q [P];
    logic  qv, qe;
    if (s == 0) begin : g_first
      assign d  = s0;
      assign dv = in_valid;
      assign de = in_end;
    end else begin : g_next
      assign d  = g_stage[s-1].q;
      assign dv = g_stage[s-1].qv;
      assign de = g_stage[s-1].qe;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        qv <= 1'b0;
        qe <= 1'b0;
        for (int i = 0; i < P; i++) q[i] <= '0;
      end else begin
        qv <= dv;
        qe <= de;
        for (int i = 0; i < P; i++) begin
          q[i] <= d[i];
          if (i >= D) q[i].cnt <= d[i].cnt + d[i-D].cnt;
        end
      end
    end
  end

  // rolling offset and index of every valid tuple
  logic [L-1:0] rr_off;
  res_t         b_res [P];
  logic         b_vld [P];
  logic [L-1:0] b_idx [P];

  always_comb
    for (int i = 0; i < P; i++) begin
      b_res[i] = g_stage[L-1].q[i].res;
      b_vld[i] = g_stage[L-1].q[i].vld;
      b_idx[i] = rr_off + L'(g_stage[L-1].q[i].cnt - SW'(g_stage[L-1].q[i].vld));
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                  rr_off <= '0;
    else if (g_stage[L-1].qv)    rr_off <= rr_off + L'(g_stage[L-1].q[P-1].cnt);

  reverse_butterfly #(.P(P)) u_rb (
    .clk, .rst_n,
    .in_valid (g_stage[L-1].qv),
    .in_end   (g_stage[L-1].qe),
    .in_res   (b_res),
    .in_vld   (b_vld),
    .in_idx   (b_idx),
    .out_valid, .out_end, .out_res, .out_vld
  );

endmodule
