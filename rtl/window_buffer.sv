// window_buffer: sliding-window generation (step (a) of EnthuseSWAG).
//
// Incoming batches of P tuples are written into a circular buffer that holds
// 2*WS_MAX tuples (rows of P tuples, one memory word per row, read synchronously
// so that it maps onto block RAM). A read side replays the buffer as windows:
// each window is ws consecutive tuples starting at the window start, and after
// a window has been read the start advances by wa tuples. With wa < ws the same
// tuples are read more than once, so the output can need more cycles than the
// input; in_ready then applies backpressure. The writer may run ahead of the
// current window start by at most the buffer size, which lets the next window
// (up to one window ahead when wa = ws) be gathered while the current one is
// still being read.
//
// Interface: ws and wa are in tuples, multiples of P, 1 <= wa <= ws <= WS_MAX,
// and must be held stable while the engine runs (change them only in reset).
// in_valid/in_ready and out_valid/out_ready are valid-ready handshakes; a
// transfer happens when both are high. out_win_last marks the final batch of a
// window. Timing: one batch per cycle on each side; a batch can leave the cycle
// after it was written.
// The 2*WS circular buffer in block RAM and the ready signal follow the paper;
// the row organisation, counters and handshake are this design's own.
module window_buffer
  import enthuse_pkg::*;
#(
  parameter int unsigned P      = 4,
  parameter int unsigned WS_MAX = 16384
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(WS_MAX):0]    ws,
  input  logic [$clog2(WS_MAX):0]    wa,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  tuple_t                     in_data [P],
  output logic                       out_valid,
  input  logic                       out_ready,
  output tuple_t                     out_data [P],
  output logic                       out_win_last
);

  localparam int unsigned DR = 2 * WS_MAX / P;   // rows in the circular buffer
  localparam int unsigned AW = $clog2(DR);

  typedef tuple_t [P-1:0] row_t;

  row_t        mem [DR];
  row_t        wrow, rrow;
  logic [31:0] wr_cnt, w_start, r_off;
  logic [31:0] ws_rows, wa_rows, rd_cnt;
  logic        avail, load;

  assign ws_rows  = 32'(ws) / P;
  assign wa_rows  = 32'(wa) / P;
  assign rd_cnt   = w_start + r_off;
  assign avail    = (wr_cnt != rd_cnt);
  assign in_ready = (wr_cnt - w_start) < 32'(DR);
  assign load     = avail && (!out_valid || out_ready);

  always_comb
    for (int i = 0; i < P; i++) wrow[i] = in_data[i];

  // block RAM: one write port, one registered read port
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr_cnt[AW-1:0]] <= wrow;
    if (load)                 rrow <= mem[rd_cnt[AW-1:0]];
  end

  always_comb
    for (int i = 0; i < P; i++) out_data[i] = rrow[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_cnt       <= '0;
      w_start      <= '0;
      r_off        <= '0;
      out_valid    <= 1'b0;
      out_win_last <= 1'b0;
    end else begin
      if (in_valid && in_ready) wr_cnt <= wr_cnt + 32'd1;
      if (load) begin
        out_valid    <= 1'b1;
        out_win_last <= (r_off == ws_rows - 32'd1);
        if (r_off == ws_rows - 32'd1) begin
          r_off   <= '0;
          w_start <= w_start + wa_rows;
        end else begin
          r_off <= r_off + 32'd1;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_no_read_past_write: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_cnt - rd_cnt) <= 32'(DR));

endmodule
