// sps_router -- the split-parallel switch (SPS): a router in one package made
// of H parallel N x N HBM switches.
//
// Each of the N input fibre ribbons has F fibres; the fibres are coupled
// passively (no processing, no OEO) to waveguides, and a pseudo-random set of
// alpha = F/H of them goes to each HBM switch, where they form that switch's
// input port for this ribbon. At the egress, each switch drives alpha
// fibres of every output ribbon, again a pseudo-random set. The split is fixed
// wiring, computed here at elaboration from a linear congruential generator
// and a Fisher-Yates shuffle per ribbon (SEED selects the pattern); a packet
// therefore meets exactly one HBM switch. Fibre traffic enters and leaves as
// 32-byte words per cycle (the electrical side of the O/E and E/O stages, with
// the forwarding lookup's output port already attached), and the HBM stacks
// of every switch are reached through the hbm_* ports.
//
// The reference design has N = 16 ribbons of F = 64 fibres, H = 16 switches,
// alpha = 4: 1024 fibres of 16 x 40 Gb/s, 655 Tb/s each way.
//
// Lint notes: rst_n is used synchronously by the logic and in the 'disable
// iff' of the assertions, which a linter reports as a net used both
// synchronously and asynchronously; assertions are not synthesised, so the
// hardware uses rst_n synchronously only. The frame counters of each switch
// are left unconnected at the top (test benches read them hierarchically).
// The fibre-split function runs at elaboration time on integers of which only
// the low bits matter.
module sps_router
  import pfi_pkg::*;
#(
  parameter int N        = N_PORTS,
  parameter int F        = F_FIBERS,
  parameter int H        = H_SWITCHES,
  parameter int SEG      = pfi_pkg::SEG_CYC,
  parameter int ROW_BITS = 14,
  parameter int IN_Q_BATCHES = 2,
  parameter int SEED     = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fiber_word_t     rx_i [N][F],
  output fiber_word_t     tx_o [N][F],
  output hbm_row_cmd_t    hbm_row_o   [H],
  output hbm_col_cmd_t    hbm_col_o   [H],
  output logic [CH_W-1:0] hbm_wdata_o [H][N*CH_PER_MOD],
  input  logic [CH_W-1:0] hbm_rdata_i [H][N*CH_PER_MOD],
  input  logic            hbm_rvalid_i[H],
  output logic [31:0]     drops_o     [H],
  output logic [31:0]     pkts_out_o  [H]
);
  localparam int A = F / H;   // alpha

  // position p of the pseudo-random permutation of the F fibres of ribbon r
  function automatic int perm(input int r, input int p, input int seed);
    int idx [F];
    int x, j, t;
    for (int k = 0; k < F; k++) idx[k] = k;
    x = (seed * 7919 + r * 104729 + 1) & 32'h7fffffff;
    for (int k = F - 1; k > 0; k--) begin
      x = (x * 1103515245 + 12345) & 32'h7fffffff;
      j = (x >> 8) % (k + 1);
      t = idx[k]; idx[k] = idx[j]; idx[j] = t;
    end
    return idx[p];
  endfunction

  if (A * H != F) begin : g_bad_split
    $error("sps_router: F must be a multiple of H");
  end

  for (genvar h = 0; h < H; h++) begin : g_sw
    fiber_word_t sw_in  [N][A];
    fiber_word_t sw_out [N][A];
    for (genvar r = 0; r < N; r++) begin : g_rib
      for (genvar a = 0; a < A; a++) begin : g_fib
        localparam int FI = perm(r, h * A + a, SEED);
        localparam int FO = perm(r, h * A + a, SEED + 7777);
        assign sw_in[r][a] = rx_i[r][FI];
        assign tx_o[r][FO] = sw_out[r][a];
      end
    end
    hbm_switch #(.N(N), .NL(A), .SEG(SEG), .ROW_BITS(ROW_BITS), .IN_Q_BATCHES(IN_Q_BATCHES)) u_sw (
      .clk, .rst_n, .fib_i (sw_in), .fib_o (sw_out),
      .hbm_row_o (hbm_row_o[h]), .hbm_col_o (hbm_col_o[h]),
      .hbm_wdata_o (hbm_wdata_o[h]), .hbm_rdata_i (hbm_rdata_i[h]), .hbm_rvalid_i (hbm_rvalid_i[h]),
      .drops_o (drops_o[h]), .frames_wr_o (), .frames_rd_o (), .pkts_out_o (pkts_out_o[h]));
  end
endmodule
