// tb_cyclic_xbar -- checks both crossbar directions for every phase with
// random slices: input side out[m] = in[(m - ph) mod N], output side
// out[o] = in[(o + ph) mod N]; also checks that over N phases every input
// meets every output exactly once.
module tb_cyclic_xbar;
  import pfi_pkg::*;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic [3:0] ph;
  slice_t in_s [N], o0 [N], o1 [N];
  int seen [N][N];

  cyclic_xbar #(.N(N), .DIR(1'b0)) u0 (.ph_i (ph), .in_i (in_s), .out_o (o0));
  cyclic_xbar #(.N(N), .DIR(1'b1)) u1 (.ph_i (ph), .in_i (in_s), .out_o (o1));

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) seen[i][j] = 0;
    for (int rep = 0; rep < 3; rep++)
      for (int p = 0; p < N; p++) begin
        ph = 4'(p);
        for (int i = 0; i < N; i++) begin
          in_s[i] = '0;
          in_s[i].valid = 1'b1;
          in_s[i].dest  = 4'(i);
          in_s[i].data  = {64{$urandom()}};
        end
        #1;
        for (int m = 0; m < N; m++) begin
          int ei0, ei1;
          ei0 = (m - p + N) % N;
          ei1 = (m + p) % N;
          checks += 2;
          if (o0[m] !== in_s[ei0]) begin failures++; $display("FAIL in-side ph=%0d out=%0d", p, m); end
          if (o1[m] !== in_s[ei1]) begin failures++; $display("FAIL out-side ph=%0d out=%0d", p, m); end
          if (rep == 0) seen[int'(o0[m].dest)][m]++;
        end
      end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++;
      if (seen[i][j] != 1) begin failures++; $display("FAIL input %0d met output %0d %0d times", i, j, seen[i][j]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
