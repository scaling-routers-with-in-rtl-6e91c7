// voq_sram -- one SRAM module holding NQ first-in first-out queues, each a
// static circular region of DEPTH words of width W.
//
// One write (into queue wr_q) and one read (from queue rd_q) per cycle; read
// data is registered and appears the cycle after rd_en. Queues are used as the
// per-output queues of one tail SRAM module and of one head SRAM module. The
// module keeps only the pointers; the owner of the module keeps the occupancy
// accounting (space reservation) and must never write a full queue or read an
// empty one, which the assertions check. Static regions are this design's
// choice; the reference design only says each module is divided into N
// logical areas.
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected.
module voq_sram #(
  parameter int NQ    = 16,
  parameter int DEPTH = 256,
  parameter int W     = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(NQ)-1:0]    wr_q,
  input  logic [W-1:0]             wdata,
  input  logic                     rd_en,
  input  logic [$clog2(NQ)-1:0]    rd_q,
  output logic [W-1:0]             rdata,
  output logic [NQ-1:0]            empty
);
  localparam int AW = $clog2(DEPTH);
  localparam int QW = $clog2(NQ);

  logic [W-1:0]  mem [NQ*DEPTH];
  logic [AW-1:0] wptr [NQ];
  logic [AW-1:0] rptr [NQ];
  logic [AW:0]   cnt  [NQ];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wr_q) * DEPTH + int'(wptr[wr_q])] <= wdata;
    if (rd_en) rdata <= mem[int'(rd_q) * DEPTH + int'(rptr[rd_q])];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) begin
        wptr[q] <= '0;
        rptr[q] <= '0;
        cnt[q]  <= '0;
      end
    end else begin
      if (wr_en) wptr[wr_q] <= inc(wptr[wr_q]);
      if (rd_en) rptr[rd_q] <= inc(rptr[rd_q]);
      for (int q = 0; q < NQ; q++)
        cnt[q] <= cnt[q] + ((wr_en && wr_q == QW'(q)) ? 1'b1 : 1'b0)
                         - ((rd_en && rd_q == QW'(q)) ? 1'b1 : 1'b0);
    end
  end

  always_comb
    for (int q = 0; q < NQ; q++) empty[q] = (cnt[q] == '0);

  // A read of an empty queue or a write into a full one is a controller bug.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> cnt[rd_q] != '0);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (cnt[wr_q] != (AW+1)'(DEPTH)) || (rd_en && rd_q == wr_q));
endmodule
