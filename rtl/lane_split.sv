// lane_split -- spreads the packets of one HBM-switch output over its NL
// (= alpha = 4) egress waveguides and W wavelengths, as ECMP/LAG would.
//
// Each packet arrives from the output port as 128-byte words with its flow
// hash. Waveguide = hash mod NL, wavelength = (hash div NL) mod W; all packets
// of a flow therefore leave on the same waveguide and wavelength and stay in
// order. Words are queued in that waveguide's FIFO (FIFO_WORDS words) and
// serialised into 32-byte waveguide words (fiber_word_t), one per cycle, with
// the wavelength in the lambda field for the E/O stage. space_o[l] tells the
// output port that a maximum-size packet fits in FIFO l; the output port only
// starts a packet when it does, so no word is ever refused. The reference
// design gives the 5-tuple hashing over waveguides and wavelengths; FIFO sizes
// and the serialiser are this design's choices.
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected. Of the line word held for a packet only data, framing,
// length and hash are used; the other bits are unused by design.
module lane_split
  import pfi_pkg::*;
#(
  parameter int NL         = ALPHA,
  parameter int W          = W_LAMBDA,
  parameter int FIFO_WORDS = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  line_word_t   line_i,
  output logic [NL-1:0] space_o,
  output fiber_word_t  fib_o [NL],
  output logic [31:0]  words_o
);
  localparam int FW  = $clog2(FIFO_WORDS);
  localparam int LW  = (NL > 1) ? $clog2(NL) : 1;
  localparam int MAXW = MAX_PKT / LINE_BYTES;
  localparam int PPW = LINE_BYTES / FIBER_BYTES;   // pieces per line word

  line_word_t     fifo [NL][FIFO_WORDS];
  logic [FW-1:0]  wp [NL], rp [NL];
  logic [FW:0]    cnt [NL];
  logic [LW-1:0]  cur;                     // waveguide of the packet in flight
  logic [3:0]     lam [NL];                // wavelength per queued word
  logic [3:0]     lam_fifo [NL][FIFO_WORDS];
  logic [$clog2(PPW+1)-1:0] piece [NL];    // next piece of the head word

  logic [LW-1:0]  lane;
  assign lane = line_i.sop ? LW'(int'(line_i.hash) % NL) : cur;

  always_comb
    for (int l = 0; l < NL; l++)
      space_o[l] = (32'(cnt[l]) + MAXW) <= FIFO_WORDS;

  logic [NL-1:0] pop;
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      line_word_t h;
      logic [7:0] left;
      h = fifo[l][rp[l]];
      lam[l] = lam_fifo[l][rp[l]];
      left = h.nbytes - 8'(32'(piece[l]) * FIBER_BYTES);
      fib_o[l] = '0;
      pop[l] = 1'b0;
      if (cnt[l] != '0) begin
        fib_o[l].valid  = 1'b1;
        fib_o[l].sop    = h.sop && piece[l] == '0;
        fib_o[l].eop    = h.eop && left <= 8'(FIBER_BYTES);
        fib_o[l].nbytes = (left >= 8'(FIBER_BYTES)) ? 6'(FIBER_BYTES) : 6'(left);
        fib_o[l].len    = h.len;
        fib_o[l].lambda = lam[l];
        fib_o[l].data   = h.data[FIBER_W * int'(piece[l]) +: FIBER_W];
        pop[l]          = left <= 8'(FIBER_BYTES);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NL; l++) begin
        wp[l] <= '0; rp[l] <= '0; cnt[l] <= '0; piece[l] <= '0;
      end
      cur <= '0;
      words_o <= '0;
    end else begin
      if (line_i.valid) begin
        fifo[lane][wp[lane]]     <= line_i;
        lam_fifo[lane][wp[lane]] <= 4'((int'(line_i.hash) / NL) % W);
        wp[lane] <= wp[lane] + 1'b1;
        if (line_i.sop) cur <= lane;
        words_o <= words_o + 1;
      end
      for (int l = 0; l < NL; l++) begin
        cnt[l] <= cnt[l] + ((line_i.valid && lane == LW'(l)) ? 1'b1 : 1'b0) - (pop[l] ? 1'b1 : 1'b0);
        if (pop[l]) begin
          rp[l] <= rp[l] + 1'b1;
          piece[l] <= '0;
        end else if (cnt[l] != '0) piece[l] <= piece[l] + 1'b1;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    line_i.valid |-> cnt[lane] < (FW+1)'(FIFO_WORDS));
endmodule
