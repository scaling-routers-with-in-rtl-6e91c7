// head_sram -- head SRAM of an HBM switch: N SRAM modules that receive the
// frames read from the HBM and hand them to the outputs batch by batch.
//
// Every beat returned by the HBM carries one 2048-bit word per module (module m
// owns channels m*8 .. m*8+7), and beat k of a frame is slice m of batch k of
// that frame in module m. Each beat is therefore written to the per-output
// queue of the frame's output in all modules at once, and makes one more whole
// batch available for that output.
//
// Towards the outputs the modules are read in the staggered pattern of the
// output cyclical crossbar: module 0 reads, in the cycle with phase ph, for
// output (-(ph+1)) mod N, so that its slice reaches that output through the
// crossbar in the next cycle; module m repeats the same decision m cycles later.
// A batch is sent only when one is available for that output and the output
// port has room for it (out_ready_i); grant_o tells the output port a batch is
// on its way. The HBM controller reserves room for a whole frame before it
// reads one (resv_i), and space_o[o] says such room exists. Queue depth
// (Q_FRAMES frames per output) is this design's choice; the reference design
// bounds the whole head SRAM at (N+1)/2 frames.
//
// Lint notes: the parameter FRAME_BATCHES shares its name with the package
// constant that is its default; the parameter is the one used. The VOQ SRAMs'
// empty flags are left unconnected on purpose: this module keeps its own
// per-queue counts.
module head_sram
  import pfi_pkg::*;
#(
  parameter int N             = 16,
  parameter int FRAME_BATCHES = pfi_pkg::FRAME_BATCHES,
  parameter int Q_FRAMES      = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(N)-1:0] ph_i,
  input  logic                 wr_en_i,
  input  logic [DEST_W-1:0]    wr_dest_i,
  input  logic [SLICE_W-1:0]   wdata_i  [N],
  input  logic                 resv_i,
  input  logic [DEST_W-1:0]    resv_dest_i,
  output logic [N-1:0]         space_o,
  input  logic [N-1:0]         out_ready_i,
  output logic [N-1:0]         grant_o,
  output slice_t               rd_o     [N]
);
  localparam int DEPTH = Q_FRAMES * FRAME_BATCHES;
  localparam int CW    = $clog2(DEPTH) + 1;
  localparam int PW    = $clog2(N);

  logic [CW-1:0]     avail [N];     // whole batches present per output
  logic [CW-1:0]     occ   [N];     // batches reserved or present per output
  logic              gv [N];        // read issue per module
  logic [DEST_W-1:0] gd [N];
  logic              gsv [N];       // grant delay line (index 0 unused)
  logic [DEST_W-1:0] gsd [N];
  logic              rv_q [N];
  logic [DEST_W-1:0] rd_q [N];
  logic [SLICE_W-1:0] rdata [N];

  logic [PW-1:0]     o0;
  logic              grant;
  assign o0    = PW'(N - 1) - ph_i;             // (-(ph+1)) mod N
  assign grant = (avail[o0] != '0) && out_ready_i[o0];

  always_comb begin
    grant_o = '0;
    grant_o[o0] = grant;
    for (int m = 0; m < N; m++) begin
      gv[m] = (m == 0) ? grant : gsv[m];
      gd[m] = (m == 0) ? DEST_W'(o0) : gsd[m];
    end
  end

  for (genvar m = 0; m < N; m++) begin : g_mod
    voq_sram #(.NQ(N), .DEPTH(DEPTH), .W(SLICE_W)) u_mod (
      .clk, .rst_n,
      .wr_en (wr_en_i), .wr_q (wr_dest_i), .wdata (wdata_i[m]),
      .rd_en (gv[m]), .rd_q (gd[m]), .rdata (rdata[m]),
      .empty ()
    );
    always_comb begin
      rd_o[m]       = '0;
      rd_o[m].valid = rv_q[m];
      rd_o[m].last  = (m == N - 1);
      rd_o[m].dest  = rd_q[m];
      rd_o[m].data  = rdata[m];
    end
  end

  always_comb
    for (int q = 0; q < N; q++) space_o[q] = (32'(occ[q]) + FRAME_BATCHES) <= DEPTH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < N; q++) begin
        avail[q] <= '0; occ[q] <= '0;
        rv_q[q] <= 1'b0; rd_q[q] <= '0;
      end
      for (int m = 0; m < N; m++) begin
        gsv[m] <= 1'b0; gsd[m] <= '0;
      end
    end else begin
      for (int m = 1; m < N; m++) begin
        gsv[m] <= gv[m-1];
        gsd[m] <= gd[m-1];
      end
      for (int m = 0; m < N; m++) begin
        rv_q[m] <= gv[m];
        rd_q[m] <= gd[m];
      end
      for (int q = 0; q < N; q++) begin
        avail[q] <= avail[q] + ((wr_en_i && wr_dest_i == DEST_W'(q)) ? CW'(1) : CW'(0))
                             - ((grant && o0 == PW'(q)) ? CW'(1) : CW'(0));
        occ[q]   <= occ[q] + ((resv_i && resv_dest_i == DEST_W'(q)) ? CW'(FRAME_BATCHES) : CW'(0))
                           - ((gv[N-1] && gd[N-1] == DEST_W'(q)) ? CW'(1) : CW'(0));
      end
    end
  end

  a_resv_room: assert property (@(posedge clk) disable iff (!rst_n) resv_i |-> space_o[resv_dest_i]);
endmodule
