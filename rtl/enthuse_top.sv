// enthuse_top: the aggregation accelerator with its two engines.
//
// One input stream of (group, key) tuples, P per cycle, is steered by mode:
//   mode 0 (group-by): the stream is taken as already sorted and goes straight
//     to the Enthuse group-by pipeline, which returns one aggregate per group and
//     never applies backpressure; in_end marks the stream's final batch.
//   mode 1 (sliding window): the stream goes to EnthuseSWAG, which buffers
//     windows of ws tuples advancing by wa, sorts each window, appends group
//     cardinalities and aggregates per group (or over all tuples when use_groups
//     is low); in_ready may drop.
// fn selects the operator at run time. The output ports of the active engine
// are presented on out_res/out_vld; reading valid ports round-robin from port 0
// yields the results in order.
//
// Configuration (mode, fn, use_groups, ws, wa) is given as plain ports and must
// only change while the engine is idle or in reset. The host processor, DMA
// engine, main memory and memory-mapped configuration registers that surround
// the accelerator on the evaluation board are not part of this module.
// The two engines and the bypass of the sorter for group-by follow the paper's
// system; the port-level configuration is this design's own.
module enthuse_top
  import enthuse_pkg::*;
#(
  parameter int unsigned P      = 4,
  parameter int unsigned K      = 128,
  parameter int unsigned WS_MAX = 16384
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    mode,        // 0: group-by, 1: sliding window
  input  fn_e                     fn,
  input  logic                    use_groups,
  input  logic [$clog2(WS_MAX):0] ws,
  input  logic [$clog2(WS_MAX):0] wa,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic                    in_end,
  input  tuple_t                  in_data [P],
  output logic                    out_valid,
  output logic                    out_end,
  output res_t                    out_res [P],
  output logic                    out_vld [P]
);

  logic g_valid, g_end;
  res_t g_res [P];
  logic g_vld [P];

  enthuse_groupby #(.P(P)) u_groupby (
    .clk, .rst_n, .fn,
    .in_valid(in_valid && !mode), .in_end, .in_data,
    .out_valid(g_valid), .out_end(g_end), .out_res(g_res), .out_vld(g_vld)
  );

  logic s_valid, s_end, s_ready;
  res_t s_res [P];
  logic s_vld [P];

  enthuse_swag #(.P(P), .K(K), .WS_MAX(WS_MAX)) u_swag (
    .clk, .rst_n, .fn, .use_groups, .ws, .wa,
    .in_valid(in_valid && mode), .in_ready(s_ready), .in_data,
    .out_valid(s_valid), .out_end(s_end), .out_res(s_res), .out_vld(s_vld)
  );

  always_comb begin
    in_ready  = mode ? s_ready : 1'b1;
    out_valid = mode ? s_valid : g_valid;
    out_end   = mode ? s_end   : g_end;
    for (int i = 0; i < P; i++) begin
      out_res[i] = mode ? s_res[i] : g_res[i];
      out_vld[i] = mode ? s_vld[i] : g_vld[i];
    end
  end

endmodule
