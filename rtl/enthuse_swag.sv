// enthuse_swag: EnthuseSWAG, the sliding-window aggregation engine.
//
// Computes an aggregate of the last WS tuples every WA tuples, per group or
// over plain numbers, P tuples per cycle. Each window is processed whole, so
// no inverse operator is needed and selection operators such as the median
// work. The steps:
//   (a) window_buffer cuts the input stream into windows of ws tuples that
//       advance by wa tuples, with backpressure (in_ready) when the windows
//       need more cycles than the input;
//   (b) sorter_card sorts each window by {group, key} and appends to every
//       tuple the size of its group within the window;
//   (c)+(d) mark_last and agg_scan: the adapted prefix scan computes each
//       tuple's position inside its group (and the other per-group sums), then
//       the summary step keeps the tuples that carry a result: the last tuple of
//       each group for min, max, sum, count, distinct count and average, or the
//       first, median and last tuple of each group for FN_MINMEDMAX;
//   (e)+(f) prra counts the kept tuples again and compacts them round-robin.
// Per window, every result leaves in sorted group order; reading the output
// ports round-robin from port 0 gives the results of window after window.
//
// Interface: ws, wa, fn and use_groups must be stable while running. With
// use_groups low the group field is ignored (every tuple is in group 0).
// in_valid/in_ready handshake on the input, out_valid/out_vld on the output
// (never stalled), out_end on the batch that ends a window's results.
// The pipeline order and the split into two prefix scans follow the paper.
// Windows of up to K tuples are sorted in one pass, larger ones (up to K*K,
// and at most WS_MAX) in chunks that are merged again. Limit of this
// implementation: the sorter emits one tuple per cycle in its flush and one
// per two cycles in its merge pass, where the paper's emits P per cycle.
module enthuse_swag
  import enthuse_pkg::*;
#(
  parameter int unsigned P      = 4,
  parameter int unsigned K      = 128,
  parameter int unsigned WS_MAX = 16384
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  fn_e                     fn,
  input  logic                    use_groups,
  input  logic [$clog2(WS_MAX):0] ws,
  input  logic [$clog2(WS_MAX):0] wa,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  tuple_t                  in_data [P],
  output logic                    out_valid,
  output logic                    out_end,
  output res_t                    out_res [P],
  output logic                    out_vld [P]
);

  tuple_t gi [P];
  always_comb
    for (int i = 0; i < P; i++)
      gi[i] = '{group: use_groups ? in_data[i].group : '0, key: in_data[i].key};

  // (a) window generation
  logic   w_valid, w_ready, w_last;
  tuple_t w_data [P];

  window_buffer #(.P(P), .WS_MAX(WS_MAX)) u_win (
    .clk, .rst_n, .ws, .wa,
    .in_valid, .in_ready, .in_data(gi),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data), .out_win_last(w_last)
  );

  // (b) sorting and cardinality count
  logic    s_valid, s_end;
  ctuple_t s_data [P];

  sorter_card #(.P(P), .K(K)) u_sort (
    .clk, .rst_n,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data), .in_win_last(w_last),
    .out_valid(s_valid), .out_end(s_end), .out_data(s_data)
  );

  // (c)+(d) marking, adapted prefix scan, summary step
  logic    m_valid, m_end;
  ctuple_t m_data [P];
  logic    m_last [P];

  mark_last #(.P(P)) u_mark (
    .clk, .rst_n, .in_valid(s_valid), .in_end(s_end), .in_data(s_data),
    .out_valid(m_valid), .out_end(m_end), .out_data(m_data), .out_last(m_last)
  );

  logic                 a_valid, a_end;
  res_t                 a_res [P];
  logic                 a_sel [P];
  logic [$clog2(P)-1:0] a_idx [P];   // not used: the PRRA recomputes the index

  agg_scan #(.P(P)) u_scan (
    .clk, .rst_n, .fn,
    .in_valid(m_valid), .in_end(m_end), .in_data(m_data), .in_last(m_last),
    .out_valid(a_valid), .out_end(a_end), .out_res(a_res), .out_sel(a_sel), .out_idx(a_idx)
  );

  // (e)+(f) second prefix scan and round-robin compaction
  prra #(.P(P)) u_prra (
    .clk, .rst_n,
    .in_valid(a_valid), .in_end(a_end), .in_res(a_res), .in_vld(a_sel),
    .out_valid, .out_end, .out_res, .out_vld
  );

endmodule
