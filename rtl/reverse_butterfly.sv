// reverse_butterfly: P-port reverse butterfly permutation network.
//
// Each input port carries a result tuple, a valid bit and a destination index.
// The network has log2(P) registered stages of 2x2 switches; stage s pairs the
// ports whose numbers differ only in bit s (distances 1, 2, 4, ...) and moves
// every valid tuple to the port whose bit s equals bit s of its destination.
// For the traffic the Enthuse engines generate - valid tuples in input order
// with consecutive destinations modulo P (a rotated compaction) - no two tuples
// ever ask for the same switch output, so the network is conflict free; an
// assertion checks this. Invalid tuples are dropped.
//
// Interface: in_valid qualifies a batch. out_vld[i] marks the ports that hold a
// result. Timing: log2(P) cycles, one batch per cycle.
// The choice of network follows the paper; the stage order (lowest index bit
// first) and per-stage registers are this design's own.
module reverse_butterfly
  import enthuse_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_end,
  input  res_t                 in_res [P],
  input  logic                 in_vld [P],
  input  logic [$clog2(P)-1:0] in_idx [P],
  output logic                 out_valid,
  output logic                 out_end,
  output res_t                 out_res [P],
  output logic                 out_vld [P]
);

  localparam int unsigned L = $clog2(P);

  typedef struct packed {
    res_t         res;
    logic         vld;
    logic [L-1:0] idx;
  } port_t;

  port_t s0 [P];
  always_comb
    for (int i = 0; i < P; i++) s0[i] = '{res: in_res[i], vld: in_valid && in_vld[i], idx: in_idx[i]};

  for (genvar s = 0; s < L; s++) begin : g_stage
    port_t d [P];
    logic  dv, de;
    port_t q [P];
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
          // keep own tuple if it wants this side, otherwise take the partner's
          if (d[i].vld && d[i].idx[s] == 1'(i >> s))
            q[i] <= d[i];
          else if (d[i ^ (1 << s)].vld && d[i ^ (1 << s)].idx[s] == 1'(i >> s))
            q[i] <= d[i ^ (1 << s)];
          else
            q[i] <= '0;
        end
      end
    end
    // a switch must never receive two tuples for the same output
    for (genvar i = 0; i < P; i++) begin : g_chk
      if ((i & (1 << s)) == 0) begin : g_pair
        a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
          !(d[i].vld && d[i + (1 << s)].vld && d[i].idx[s] == d[i + (1 << s)].idx[s]));
      end
    end
  end

  always_comb begin
    out_valid = g_stage[L-1].qv;
    out_end   = g_stage[L-1].qe;
    for (int i = 0; i < P; i++) begin
      out_res[i] = g_stage[L-1].q[i].res;
      out_vld[i] = g_stage[L-1].q[i].vld;
    end
  end

endmodule
