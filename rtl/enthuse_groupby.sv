// enthuse_groupby: the Enthuse group-by aggregation pipeline.
//
// Input is a stream of (group, key) tuples sorted by group (and by key too when
// the distinct count is wanted), P tuples per cycle. The pipeline never stalls:
//   (a)+(b) mark_last holds one batch and marks the last tuple of each group;
//   (c)+(d) agg_scan runs the segmented prefix scan, rolls group state over from
//           batch to batch and writes the aggregate into each marked tuple, while
//           the same scan counts the marked tuples to form their output index;
//   (e)     reverse_butterfly moves the marked tuples to consecutive output ports
//           in round-robin order (the last flag is now the port's valid bit).
// So each group yields exactly one output tuple (group, result), and reading the
// output ports round-robin from port 0 gives the groups in input order.
//
// Interface: in_valid qualifies a full batch; in_end marks the last batch of a
// stream, which closes its final group. fn selects the operator at run time
// (min, max, sum, count, distinct count, average). out_vld[i] marks valid ports.
// Timing: 2 log2(P) + 2 cycles from a batch entering until its results appear,
// plus the wait for the next batch (or in_end) that step (a) needs.
// The whole structure follows the paper; stream-end signalling and register
// placement are this design's own.
module enthuse_groupby
  import enthuse_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  fn_e    fn,
  input  logic   in_valid,
  input  logic   in_end,
  input  tuple_t in_data [P],
  output logic   out_valid,
  output logic   out_end,
  output res_t   out_res [P],
  output logic   out_vld [P]
);

  ctuple_t ci [P];
  always_comb
    for (int i = 0; i < P; i++) ci[i] = '{group: in_data[i].group, key: in_data[i].key, card: '0};

  logic    m_valid, m_end;
  ctuple_t m_data [P];
  logic    m_last [P];

  mark_last #(.P(P)) u_mark (
    .clk, .rst_n, .in_valid, .in_end, .in_data(ci),
    .out_valid(m_valid), .out_end(m_end), .out_data(m_data), .out_last(m_last)
  );

  logic                 a_valid, a_end;
  res_t                 a_res [P];
  logic                 a_sel [P];
  logic [$clog2(P)-1:0] a_idx [P];

  agg_scan #(.P(P)) u_scan (
    .clk, .rst_n, .fn,
    .in_valid(m_valid), .in_end(m_end), .in_data(m_data), .in_last(m_last),
    .out_valid(a_valid), .out_end(a_end), .out_res(a_res), .out_sel(a_sel), .out_idx(a_idx)
  );

  reverse_butterfly #(.P(P)) u_rb (
    .clk, .rst_n,
    .in_valid(a_valid), .in_end(a_end), .in_res(a_res), .in_vld(a_sel), .in_idx(a_idx),
    .out_valid, .out_end, .out_res, .out_vld
  );

endmodule
