// lane_merge -- joins the packet streams of the NL (= alpha = 4) waveguides
// that reach one HBM-switch input into the single 128-byte-per-cycle stream of
// the input port.
//
// Each waveguide delivers, after O/E conversion and the forwarding lookup
// (outside this design), 32-byte words (fiber_word_t) with the packet's
// output port and length on its first word. Per waveguide, four words are
// gathered into one 128-byte word (fewer at the end of a packet) and pushed
// into a FIFO of FIFO_WORDS words. A packet is admitted at its first word
// only if the FIFO can hold all of it, else it is dropped whole (drops_o).
// A round-robin arbiter picks, at packet boundaries, a waveguide whose FIFO
// holds at least one complete packet and forwards that packet one word per
// cycle (store and forward). The reference design only says that the input
// port receives the waveguides' data after O/E conversion; this merge is this
// design's own simplest choice. It sustains the port rate of 4 x 32 bytes
// per cycle for packets of 128 bytes and more.
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected. Only the low bits of the integer lane index and the
// length and hash fields of the header copy are used.
module lane_merge
  import pfi_pkg::*;
#(
  parameter int NL         = ALPHA,
  parameter int FIFO_WORDS = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  fiber_word_t  fib_i [NL],
  output line_word_t   line_o,
  output logic [31:0]  drops_o
);
  localparam int FW  = $clog2(FIFO_WORDS);
  localparam int LW  = (NL > 1) ? $clog2(NL) : 1;
  localparam int GB  = LINE_BYTES / FIBER_BYTES;   // fibre words per line word

  line_word_t          fifo [NL][FIFO_WORDS];
  logic [FW-1:0]       wp [NL], rp [NL];
  logic [FW:0]         used [NL];      // words stored or reserved
  logic [FW:0]         npk [NL];       // complete packets stored
  logic [LINE_W-1:0]   acc [NL];
  logic [7:0]          an [NL];
  logic                keep [NL];      // current packet admitted
  logic                first [NL];     // next pushed word is the packet's first
  logic [DEST_W-1:0]   cdest [NL];
  logic [LEN_W-1:0]    clen [NL];

  logic [NL-1:0]       push, accept;
  line_word_t          pword [NL];
  logic [FW:0]         need [NL];

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      logic [LINE_W-1:0] a;
      logic [7:0] n;
      need[l]   = (FW+1)'((32'(fib_i[l].len) + LINE_BYTES - 1) / LINE_BYTES);
      accept[l] = fib_i[l].valid && fib_i[l].sop && (32'(used[l]) + 32'(need[l]) <= FIFO_WORDS);
      a = (fib_i[l].sop ? '0 : acc[l]) |
          ({{(LINE_W-FIBER_W){1'b0}}, fib_i[l].data} << (8 * (fib_i[l].sop ? 8'd0 : an[l])));
      n = (fib_i[l].sop ? 8'd0 : an[l]) + 8'(fib_i[l].nbytes);
      push[l] = fib_i[l].valid && (fib_i[l].sop ? accept[l] : keep[l]) &&
                (n == 8'(LINE_BYTES) || fib_i[l].eop);
      pword[l]        = '0;
      pword[l].valid  = 1'b1;
      pword[l].sop    = fib_i[l].sop ? 1'b1 : first[l];
      pword[l].eop    = fib_i[l].eop;
      pword[l].nbytes = n;
      pword[l].dest   = fib_i[l].sop ? fib_i[l].dest : cdest[l];
      pword[l].len    = fib_i[l].sop ? fib_i[l].len : clen[l];
      pword[l].data   = a;
    end
  end

  // packets refused this cycle (several lanes may refuse at once)
  logic [LW:0] ndrop;
  always_comb begin
    ndrop = '0;
    for (int l = 0; l < NL; l++)
      if (fib_i[l].valid && fib_i[l].sop && !accept[l]) ndrop = ndrop + 1'b1;
  end

  // arbiter
  logic              busy;
  logic [LW-1:0]     cur, last;
  logic              pick_v;
  logic [LW-1:0]     pick;
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = NL; k >= 1; k--) begin
      int l;
      l = (int'(last) + k) % NL;
      if (npk[l] != '0) begin
        pick_v = 1'b1;
        pick   = LW'(l);
      end
    end
  end
  logic          pop;
  logic [LW-1:0] src;
  assign src = busy ? cur : pick;
  assign pop = busy || pick_v;
  always_comb begin
    line_o = '0;
    if (pop) line_o = fifo[src][rp[src]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NL; l++) begin
        wp[l] <= '0; rp[l] <= '0; used[l] <= '0; npk[l] <= '0;
        acc[l] <= '0; an[l] <= '0; keep[l] <= 1'b0; first[l] <= 1'b0;
        cdest[l] <= '0; clen[l] <= '0;
      end
      busy <= 1'b0; cur <= '0; last <= LW'(NL - 1);
      drops_o <= '0;
    end else begin
      drops_o <= drops_o + 32'(ndrop);
      for (int l = 0; l < NL; l++) begin
        if (fib_i[l].valid) begin
          if (fib_i[l].sop) begin
            keep[l]  <= accept[l] && !fib_i[l].eop;
            cdest[l] <= fib_i[l].dest;
            clen[l]  <= fib_i[l].len;
          end else if (fib_i[l].eop) keep[l] <= 1'b0;
          if (fib_i[l].sop ? accept[l] : keep[l]) begin
            if (push[l]) begin
              an[l] <= '0; acc[l] <= '0; first[l] <= 1'b0;
            end else begin
              an[l]  <= pword[l].nbytes;
              acc[l] <= pword[l].data;
              first[l] <= fib_i[l].sop ? 1'b1 : first[l];
            end
          end
        end
        if (push[l]) begin
          fifo[l][wp[l]] <= pword[l];
          wp[l] <= wp[l] + 1'b1;
        end
        used[l] <= used[l] + (accept[l] ? need[l] : '0) - ((pop && src == LW'(l)) ? 1'b1 : 1'b0);
        npk[l]  <= npk[l] + ((push[l] && pword[l].eop) ? 1'b1 : 1'b0)
                          - ((pop && src == LW'(l) && fifo[l][rp[l]].eop) ? 1'b1 : 1'b0);
        if (pop && src == LW'(l)) rp[l] <= rp[l] + 1'b1;
      end
      if (pop) begin
        busy <= !line_o.eop;
        cur  <= src;
        if (!busy) last <= src;
      end
    end
  end

  if (GB * FIBER_BYTES != LINE_BYTES) begin : g_bad_width
    $error("lane_merge: line word must hold whole fibre words");
  end
endmodule
