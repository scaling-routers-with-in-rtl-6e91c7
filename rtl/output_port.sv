// output_port -- output port of an HBM switch: turns the batches that arrive
// from the output cyclical crossbar back into variable-length packets.
//
// Batches arrive as N consecutive 256-byte slices (module 0 first) into a FIFO
// of BATCHES batches; ready_o promises room for one more, grant_i reserves it.
// The unpacker walks each batch as a byte stream through a 512-byte window:
// the 4-byte batch header names the input that built the batch; then 4-byte
// descriptors (packet length) and packet bytes follow. Consecutive batches of
// one output come from different inputs, and a packet may straddle two
// batches of its input, so the unpacker keeps per-input state (bytes still
// missing, a 128-byte assembly word) and writes each input's packet words
// into that input's region of a packet buffer (PKT_WORDS words of 1024 bits
// per input). A completed packet joins a ready queue in completion order.
//
// The sender takes the oldest ready packet, hashes its IPv4 5-tuple
// (pfi_pkg::flow_hash) to pick the egress waveguide (hash mod ALPHA) and
// wavelength, waits until that waveguide's egress FIFO has room for a
// maximum-size packet (lane_space_i), then sends one 128-byte word per cycle on
// line_o with the hash attached. The reference design gives the unpacking and
// the 5-tuple hashing; the per-input reassembly buffer, the batch header and
// the store-and-forward sender are this design's choices.
//
// Throughput: one packet word written per cycle (one descriptor plus up to 128
// bytes), one word sent per cycle; batches are loaded at one slice per cycle.
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected. The slice's destination bits are not needed, since
// every slice reaching this port is for it.
module output_port
  import pfi_pkg::*;
#(
  parameter int N         = 16,
  parameter int BATCHES   = 2,
  parameter int PKT_WORDS = 32,
  parameter int RDY_DEPTH = 64,
  parameter int NLANES    = ALPHA
) (
  input  logic               clk,
  input  logic               rst_n,
  input  slice_t             slice_i,
  input  logic               grant_i,
  output logic               ready_o,
  input  logic [NLANES-1:0]  lane_space_i,
  output line_word_t         line_o,
  output logic [31:0]        pkts_o
);
  localparam int BD  = BATCHES * N;            // slice FIFO depth
  localparam int BDW = $clog2(BD);
  localparam int PWW = $clog2(PKT_WORDS);
  localparam int RQW = $clog2(RDY_DEPTH);
  localparam int SRC_W = $clog2(N);
  localparam int WINB  = 2 * SLICE_BYTES;      // window bytes

  // ---------------- slice FIFO ----------------
  logic [SLICE_W-1:0] bmem [BD];
  logic [BDW-1:0]     b_wp, b_rp;
  logic [BDW:0]       b_cnt;                   // slices present
  logic [$clog2(BATCHES+1)-1:0] resv;          // batches granted, not yet consumed

  // ---------------- unpacker state ----------------
  logic [8*WINB-1:0]  win;
  logic [$clog2(WINB+1)-1:0] wcnt;
  logic               in_batch, hdr_pend;
  logic [$clog2(N+1)-1:0]    sl_left;
  logic [$clog2(N*SLICE_BYTES+1)-1:0] by_left;
  logic [SRC_W-1:0]   src;

  logic [LEN_W-1:0]   rem   [N];
  logic [LEN_W-1:0]   plen  [N];
  logic [LINE_W-1:0]  acc   [N];
  logic [7:0]         accn  [N];
  logic [PWW-1:0]     pw    [N];   // next word to write
  logic [PWW-1:0]     pst   [N];   // first word of the packet being assembled
  logic [PWW:0]       pnw   [N];   // words of that packet written so far
  logic [PWW:0]       pfree [N];   // free words in the region

  logic [LINE_W-1:0]  pbuf [N*PKT_WORDS];

  typedef struct packed {
    logic [SRC_W-1:0] src;
    logic [PWW-1:0]   start;
    logic [PWW:0]     nw;
    logic [LEN_W-1:0] len;
  } rdy_t;
  rdy_t               rq [RDY_DEPTH];
  logic [RQW-1:0]     rq_wp, rq_rp;
  logic [RQW:0]       rq_cnt;

  // ---------------- unpacker step (combinational) ----------------
  logic [8:0]         consumed;     // bytes taken from the window
  logic               do_hdr, do_step, wr_word, pkt_done;
  logic [LEN_W-1:0]   r_cur, r_new, len_new;
  logic [7:0]         c;
  logic [LINE_W-1:0]  acc_new;
  logic [7:0]         accn_new;
  logic               desc;
  logic [LINE_W-1:0]  take_b;       // bytes moved into the assembly word
  logic [8*WINB-1:0]  d;            // window after the descriptor
  logic [15:0]        room, avail;

  always_comb begin
    take_b   = '0;
    d        = '0;
    room     = '0;
    avail    = '0;
    consumed = '0;
    do_hdr   = 1'b0;
    do_step  = 1'b0;
    wr_word  = 1'b0;
    pkt_done = 1'b0;
    desc     = 1'b0;
    c        = '0;
    r_cur    = rem[src];
    r_new    = r_cur;
    len_new  = plen[src];
    acc_new  = acc[src];
    accn_new = accn[src];
    if (in_batch && hdr_pend) begin
      if (wcnt >= 4) begin
        do_hdr   = 1'b1;
        consumed = 9'd4;
      end
    end else if (in_batch && wcnt != '0 && pfree[src] != '0 && rq_cnt < (RQW+1)'(RDY_DEPTH)) begin
      desc = (r_cur == '0);
      if (desc) begin
        len_new = win[15:0];
        r_cur   = pad4(win[15:0]);
      end
      d     = desc ? (win >> 32) : win;
      avail = 16'(wcnt) - (desc ? 16'd4 : 16'd0);
      room  = 16'(LINE_BYTES) - 16'(accn[src]);
      c     = 8'((r_cur < room) ? ((r_cur < avail) ? r_cur : avail)
                                : ((room < avail) ? room : avail));
      for (int b = 0; b < LINE_BYTES; b++)
        take_b[8*b +: 8] = (b < int'(c)) ? d[8*b +: 8] : 8'h00;
      acc_new = acc[src] | (take_b << (8 * accn[src]));
      accn_new = accn[src] + c;
      r_new    = r_cur - LEN_W'(c);
      do_step  = 1'b1;
      consumed = 9'(c) + (desc ? 9'd4 : 9'd0);
      wr_word  = (accn_new == 8'(LINE_BYTES)) || (r_new == '0);
      pkt_done = (r_new == '0);
    end
  end

  // window after consumption, then slice load
  logic [8*WINB-1:0] win_c;
  logic [$clog2(WINB+1)-1:0] wcnt_c;
  logic              load, start_batch;
  always_comb begin
    win_c  = win >> (8 * consumed);
    wcnt_c = wcnt - ($clog2(WINB+1))'(consumed);
    start_batch = !in_batch && (b_cnt != '0);
    load   = ((in_batch && sl_left != '0) || start_batch)
             && (wcnt_c <= ($clog2(WINB+1))'(SLICE_BYTES)) && (b_cnt != '0);
  end

  assign ready_o = (resv < ($clog2(BATCHES+1))'(BATCHES));

  // ---------------- sender ----------------
  logic              busy;
  logic [SRC_W-1:0]  s_src;
  logic [PWW-1:0]    s_ptr;
  logic [PWW:0]      s_left;
  logic [LEN_W-1:0]  s_len, s_sent;
  logic [HASH_W-1:0] s_hash;
  logic [LINE_W-1:0] first_w;
  logic [HASH_W-1:0] h0;
  logic              s_start, s_go;
  rdy_t              head;
  assign head    = rq[rq_rp];
  assign first_w = pbuf[int'(head.src) * PKT_WORDS + int'(head.start)];
  assign h0      = flow_hash(first_w);
  assign s_start = !busy && rq_cnt != '0 && lane_space_i[int'(h0) % NLANES];
  assign s_go    = s_start || busy;

  always_comb begin
    logic [SRC_W-1:0] ss;
    logic [PWW-1:0]   sp;
    logic [LEN_W-1:0] left_b;
    ss = s_start ? head.src : s_src;
    sp = s_start ? head.start : s_ptr;
    left_b = s_start ? head.len : (s_len - s_sent);
    line_o = '0;
    if (s_go) begin
      line_o.valid  = 1'b1;
      line_o.sop    = s_start;
      line_o.eop    = s_start ? (head.nw == (PWW+1)'(1)) : (s_left == (PWW+1)'(1));
      line_o.nbytes = (left_b >= LEN_W'(LINE_BYTES)) ? 8'(LINE_BYTES) : 8'(left_b);
      line_o.len    = s_start ? head.len : s_len;
      line_o.hash   = s_start ? h0 : s_hash;
      line_o.data   = pbuf[int'(ss) * PKT_WORDS + int'(sp)];
    end
  end

  always_ff @(posedge clk) begin
    if (slice_i.valid) bmem[b_wp] <= slice_i.data;
    if (wr_word) pbuf[int'(src) * PKT_WORDS + int'(pw[src])] <= acc_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_wp <= '0; b_rp <= '0; b_cnt <= '0; resv <= '0;
      win <= '0; wcnt <= '0; in_batch <= 1'b0; hdr_pend <= 1'b0;
      sl_left <= '0; by_left <= '0; src <= '0;
      for (int q = 0; q < N; q++) begin
        rem[q] <= '0; plen[q] <= '0; acc[q] <= '0; accn[q] <= '0;
        pw[q] <= '0; pst[q] <= '0; pnw[q] <= '0; pfree[q] <= (PWW+1)'(PKT_WORDS);
      end
      rq_wp <= '0; rq_rp <= '0; rq_cnt <= '0;
      busy <= 1'b0; s_src <= '0; s_ptr <= '0; s_left <= '0; s_len <= '0; s_sent <= '0; s_hash <= '0;
      pkts_o <= '0;
    end else begin
      // slice FIFO
      if (slice_i.valid) b_wp <= (b_wp == BDW'(BD - 1)) ? '0 : b_wp + 1'b1;
      if (load) b_rp <= (b_rp == BDW'(BD - 1)) ? '0 : b_rp + 1'b1;
      b_cnt <= b_cnt + (slice_i.valid ? 1'b1 : 1'b0) - (load ? 1'b1 : 1'b0);

      // window
      win  <= load ? (win_c | ({{SLICE_W{1'b0}}, bmem[b_rp]} << (8 * wcnt_c))) : win_c;
      wcnt <= wcnt_c + (load ? ($clog2(WINB+1))'(SLICE_BYTES) : '0);

      // batch bookkeeping
      if (start_batch && load) begin
        in_batch <= 1'b1;
        hdr_pend <= 1'b1;
        sl_left  <= ($clog2(N+1))'(N - 1);
        by_left  <= ($clog2(N*SLICE_BYTES+1))'(N * SLICE_BYTES);
      end else begin
        if (load) sl_left <= sl_left - 1'b1;
        if (in_batch) begin
          by_left <= by_left - ($clog2(N*SLICE_BYTES+1))'(consumed);
          if (by_left == ($clog2(N*SLICE_BYTES+1))'(consumed) && consumed != '0)
            in_batch <= 1'b0;
        end
      end
      resv <= resv + (grant_i ? 1'b1 : 1'b0)
                   - ((in_batch && consumed != '0 &&
                       by_left == ($clog2(N*SLICE_BYTES+1))'(consumed)) ? 1'b1 : 1'b0);

      if (do_hdr) begin
        src      <= win[SRC_W-1:0];
        hdr_pend <= 1'b0;
      end

      // per-input packet assembly
      if (do_step) begin
        rem[src]  <= r_new;
        acc[src]  <= wr_word ? '0 : acc_new;
        accn[src] <= wr_word ? '0 : accn_new;
        if (desc) begin
          plen[src] <= len_new;
          pst[src]  <= pw[src];
        end
        if (wr_word) pw[src] <= (pw[src] == PWW'(PKT_WORDS - 1)) ? '0 : pw[src] + 1'b1;
        if (pkt_done) pnw[src] <= '0;
        else if (wr_word) pnw[src] <= (desc ? '0 : pnw[src]) + 1'b1;
        else if (desc) pnw[src] <= '0;
      end

      // free words: - written, + sent
      for (int q = 0; q < N; q++)
        pfree[q] <= pfree[q] - ((wr_word && src == SRC_W'(q)) ? 1'b1 : 1'b0)
                             + ((s_go && (s_start ? head.src : s_src) == SRC_W'(q)) ? 1'b1 : 1'b0);

      // ready queue
      if (pkt_done) begin
        rq[rq_wp] <= '{src: src, start: desc ? pw[src] : pst[src],
                       nw: (desc ? '0 : pnw[src]) + 1'b1, len: len_new};
        rq_wp <= rq_wp + 1'b1;
      end
      if (s_start) rq_rp <= rq_rp + 1'b1;
      rq_cnt <= rq_cnt + (pkt_done ? 1'b1 : 1'b0) - (s_start ? 1'b1 : 1'b0);

      // sender
      if (s_start) begin
        busy   <= (head.nw != (PWW+1)'(1));
        s_src  <= head.src;
        s_ptr  <= head.start + 1'b1;
        s_left <= head.nw - 1'b1;
        s_len  <= head.len;
        s_sent <= LEN_W'(LINE_BYTES);
        s_hash <= h0;
        pkts_o <= pkts_o + 1;
      end else if (busy) begin
        s_ptr  <= s_ptr + 1'b1;
        s_left <= s_left - 1'b1;
        s_sent <= s_sent + LEN_W'(LINE_BYTES);
        if (s_left == (PWW+1)'(1)) busy <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    slice_i.valid |-> b_cnt < (BDW+1)'(BD) || load);
endmodule
