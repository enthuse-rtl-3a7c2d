// sorter_card: window sorter and group-cardinality counter (step (b) of EnthuseSWAG).
//
// A window arrives as batches of P tuples. In the load phase tuple j of every
// batch is inserted into linear sorter j, so P linear sorters of K/P cells each
// fill in parallel at P tuples per cycle and count group sizes as they go. A
// flush then merges the P sorted lists through a binary tree of P-1
// cardinality-combining mergers, so the tuples leave sorted by {group, key},
// each with the size of its group over the whole list.
//
// Sorting mode (window of at most K tuples): the flushed list is the sorted
// window and goes straight to the output.
// Merge mode (window larger than K, up to K*K tuples): every time the linear
// sorters are full, the sorted chunk of K tuples, with its per-chunk group
// sizes, is written into a chunk memory of K*K tuples (block RAM). After the
// last chunk, a merge pass uses one more linear sorter of K cells that holds
// only the current head of every chunk, tagged with its chunk number and
// position. Each step pops the smallest head, sends it out and inserts the
// next tuple of the same chunk, read from the chunk memory. Inserted heads
// bring the cardinality their group has in their chunk, and the linear sorter
// adds these up. When the first tuple of a group is popped, every chunk that
// holds the group has its first tuple of that group in the sorter, so the
// popped head then carries the group's total over the window. That total is
// remembered and given to the rest of the group.
//
// A packer regroups the sorted stream into batches of P for the aggregation
// pipeline and flags the window's final batch with out_end.
//
// Interface: in_valid/in_ready handshake (in_ready is low while flushing and
// merging); a window holds a multiple of P tuples, at most K*K. in_win_last
// marks the window's last batch. The mode is found from the data: a window
// that fills the linear sorters before its last batch is merged. The output
// has no ready: the aggregation pipeline behind it always accepts.
// Timing: loading takes K/P cycles per chunk, a flush one cycle per tuple plus
// about log2(P)+2, and the merge pass two cycles per tuple.
// Follows the paper: linear sorters with cardinality cells feeding a merge tree
// whose mergers sum cardinalities; a sorting mode up to k tuples and a merge
// mode up to k^2 tuples with sorted chunks in block RAM, chunk heads held in
// linear sorter cells together with their memory positions, and cardinalities
// inherited from the stored values. This design's own simplifications: the
// merge tree and the merge pass emit one tuple per cycle (per two cycles in
// the merge pass) instead of P per cycle (no FLiMS network), and loading does
// not overlap flushing or merging.
module sorter_card
  import enthuse_pkg::*;
#(
  parameter int unsigned P = 4,
  parameter int unsigned K = 128
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  tuple_t  in_data [P],
  input  logic    in_win_last,
  output logic    out_valid,
  output logic    out_end,
  output ctuple_t out_data [P]
);

  localparam int unsigned NL = K / P;          // cells per linear sorter
  localparam int unsigned NN = 2 * P - 1;      // nodes of the merge tree
  localparam int unsigned CB = $clog2(K);      // bits of a chunk number or position
  localparam int unsigned TW = 2 * CB;         // merge tag: {chunk, position}

  typedef enum logic [2:0] { LOAD, FLUSH, MINIT, MPOP, MINS } state_e;
  state_e state;

  logic          to_mem;       // this flush goes to the chunk memory
  logic          final_chunk;  // this flush holds the window's last chunk
  logic [CB:0]   nchunks;      // chunks stored so far
  logic [CB:0]   last_len;     // tuples in the last stored chunk
  logic [CB-1:0] widx;         // write position inside the chunk
  logic [CB:0]   init_c;       // chunk whose head is being read

  // streams of the merge tree, heap numbered: node 0 is the root, P-1.. the leaves
  logic    sv [NN];
  ctuple_t sd [NN];
  logic    sl [NN];
  logic    sr [NN];

  logic ld;
  assign in_ready = (state == LOAD);
  assign ld       = in_valid && in_ready;

  for (genvar j = 0; j < P; j++) begin : g_leaf
    ctuple_t             head;
    logic                hv;
    logic [$clog2(NL):0] cnt;
    logic                tag;      // the leaves carry no tag
    linear_sorter_card #(.N(NL)) u_ls (
      .clk, .rst_n,
      .ins_valid (ld),
      .ins_data  ('{group: in_data[j].group, key: in_data[j].key, card: card_t'(1)}),
      .ins_tag   (1'b0),
      .pop       (sr[P-1+j]),
      .head      (head),
      .head_tag  (tag),
      .head_valid(hv),
      .count     (cnt)
    );
    assign sv[P-1+j] = (state == FLUSH) && hv;
    assign sd[P-1+j] = head;
    assign sl[P-1+j] = (cnt == 1);
  end

  for (genvar n = 0; n < P - 1; n++) begin : g_merge
    card_merger u_m (
      .clk, .rst_n,
      .a_valid(sv[2*n+1]), .a_data(sd[2*n+1]), .a_last(sl[2*n+1]), .a_ready(sr[2*n+1]),
      .b_valid(sv[2*n+2]), .b_data(sd[2*n+2]), .b_last(sl[2*n+2]), .b_ready(sr[2*n+2]),
      .out_valid(sv[n]), .out_data(sd[n]), .out_last(sl[n]), .out_ready(sr[n])
    );
  end

  assign sr[0] = 1'b1;    // the packer and the chunk memory always accept

  // chunk memory: block RAM with one write port and one registered read port
  ctuple_t         cmem [K*K];
  ctuple_t         rdat;
  logic            rd_en;
  logic [TW-1:0]   rd_addr;    // {chunk, position}, also the tag of the tuple read
  logic [TW-1:0]   rd_tag_q;

  always_ff @(posedge clk) begin
    if (state == FLUSH && to_mem && sv[0]) cmem[{nchunks[CB-1:0], widx}] <= sd[0];
    if (rd_en) rdat <= cmem[rd_addr];
  end

  // merge pass: a linear sorter holding one head per chunk
  ctuple_t       m_head;
  logic [TW-1:0] m_tag;
  logic          m_hv, m_ins, m_pop;
  logic [CB:0]   m_cnt;

  linear_sorter_card #(.N(K), .TW(TW)) u_heads (
    .clk, .rst_n,
    .ins_valid (m_ins),
    .ins_data  (rdat),
    .ins_tag   (rd_tag_q),
    .pop       (m_pop),
    .head      (m_head),
    .head_tag  (m_tag),
    .head_valid(m_hv),
    .count     (m_cnt)
  );

  logic [CB-1:0] h_chunk, h_pos;
  logic [CB:0]   h_len;
  logic          h_more;       // the popped head's chunk has more tuples
  logic          mem_valid;    // a group total of this window is remembered
  group_t        mem_group;
  card_t         mem_card, h_card;

  always_comb begin
    h_chunk = m_tag[TW-1:CB];
    h_pos   = m_tag[CB-1:0];
    h_len   = ((CB+1)'(h_chunk) == nchunks - 1'b1) ? last_len : (CB+1)'(K);
    h_more  = ((CB+1)'(h_pos) + 1'b1) < h_len;
    h_card  = (mem_valid && mem_group == m_head.group) ? mem_card : m_head.card;
    m_pop   = (state == MPOP) && m_hv;
    m_ins   = (state == MINS) || (state == MINIT && init_c != 0);
    rd_en   = 1'b0;
    rd_addr = '0;
    if (state == MINIT && init_c < nchunks) begin
      rd_en   = 1'b1;
      rd_addr = {init_c[CB-1:0], CB'(0)};
    end else if (m_pop && h_more) begin
      rd_en   = 1'b1;
      rd_addr = {h_chunk, h_pos + 1'b1};
    end
  end

  // packer input: the tree root in sorting mode, the popped head in merge mode
  logic    p_valid, p_last;
  ctuple_t p_data;

  always_comb begin
    p_valid = 1'b0;
    p_last  = 1'b0;
    p_data  = sd[0];
    if (state == FLUSH && !to_mem) begin
      p_valid = sv[0];
      p_last  = sl[0];
    end else if (m_pop) begin
      p_valid     = 1'b1;
      p_data      = m_head;
      p_data.card = h_card;
      p_last      = (m_cnt == 1) && !h_more;
    end
  end

  logic [$clog2(P)-1:0] pos;
  ctuple_t              pk [P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= LOAD;
      to_mem      <= 1'b0;
      final_chunk <= 1'b0;
      nchunks     <= '0;
      last_len    <= '0;
      widx        <= '0;
      init_c      <= '0;
      rd_tag_q    <= '0;
      mem_valid   <= 1'b0;
      mem_group   <= '0;
      mem_card    <= '0;
      pos         <= '0;
      out_valid   <= 1'b0;
      out_end     <= 1'b0;
      for (int i = 0; i < P; i++) begin
        pk[i]       <= '0;
        out_data[i] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (rd_en) rd_tag_q <= rd_addr;

      case (state)
        LOAD: if (ld) begin
          if (in_win_last) begin
            state       <= FLUSH;
            to_mem      <= (nchunks != 0);
            final_chunk <= 1'b1;
          end else if (g_leaf[0].cnt == ($clog2(NL)+1)'(NL - 1)) begin
            state       <= FLUSH;       // linear sorters full: store a chunk
            to_mem      <= 1'b1;
            final_chunk <= 1'b0;
          end
        end
        FLUSH: if (sv[0]) begin
          if (to_mem) widx <= widx + 1'b1;
          if (sl[0]) begin
            widx <= '0;
            if (!to_mem) begin
              state <= LOAD;
            end else begin
              nchunks  <= nchunks + 1'b1;
              last_len <= (CB+1)'(widx) + 1'b1;
              init_c   <= '0;
              state    <= final_chunk ? MINIT : LOAD;
            end
          end
        end
        MINIT: begin
          // one chunk head read per cycle, inserted the cycle after
          mem_valid <= 1'b0;
          if (init_c == nchunks) state <= MPOP;
          else init_c <= init_c + 1'b1;
        end
        MPOP: if (m_pop) begin
          mem_valid <= 1'b1;
          mem_group <= m_head.group;
          mem_card  <= h_card;
          if (h_more) begin
            state <= MINS;
          end else if (m_cnt == 1) begin
            state   <= LOAD;
            nchunks <= '0;
          end
        end
        MINS: state <= MPOP;
        default: state <= LOAD;
      endcase

      if (p_valid) begin
        pk[pos] <= p_data;
        pos     <= pos + 1'b1;
        if (pos == $clog2(P)'(P - 1)) begin
          out_valid <= 1'b1;
          out_end   <= p_last;
          for (int i = 0; i < P - 1; i++) out_data[i] <= pk[i];
          out_data[P-1] <= p_data;
        end
        if (p_last) pos <= '0;
      end
    end
  end

  a_window_fits: assert property (@(posedge clk) disable iff (!rst_n)
    !(ld && nchunks == (CB+1)'(K)));

endmodule
