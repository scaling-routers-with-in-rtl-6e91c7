// cyclic_xbar -- N x N cyclical crossbar of the HBM switch.
//
// The connection pattern is a rotation that advances by one every cycle, so
// no scheduler is needed: each output is a single N:1 multiplexer whose select
// is derived from the shared phase counter ph_i (0..N-1), as the reference
// design proposes. DIR = 0 is the input-side crossbar: output m (tail SRAM
// module m) carries input (m - ph) mod N, so input i reaches module 0 at the
// phase where (i + ph) mod N = 0 and modules 1..N-1 in the N-1 cycles that
// follow. DIR = 1 is the output-side crossbar: output o (output port o)
// carries input (o + ph) mod N, i.e. head SRAM module m reaches output
// (m - ph) mod N, again module 0 first. Purely combinational.
module cyclic_xbar
  import pfi_pkg::*;
#(
  parameter int N   = 16,
  parameter bit DIR = 1'b0
) (
  input  logic [$clog2(N)-1:0] ph_i,
  input  slice_t               in_i  [N],
  output slice_t               out_o [N]
);
  localparam int PW = $clog2(N);

  always_comb begin
    for (int o = 0; o < N; o++) begin
      logic [PW:0] s;
      if (DIR == 1'b0) s = (PW+1)'(o) + (PW+1)'(N) - (PW+1)'(ph_i);
      else             s = (PW+1)'(o) + (PW+1)'(ph_i);
      if (s >= (PW+1)'(N)) s = s - (PW+1)'(N);
      out_o[o] = in_i[s[PW-1:0]];
    end
  end
endmodule
