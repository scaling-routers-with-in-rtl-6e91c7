// tb_sps_router -- end-to-end test of the split-parallel router, reduced to
// N = 2 ribbons of F = 8 fibres over H = 2 HBM switches (alpha = 4), 4-cycle
// segments, one behavioural HBM model per switch. Input queues are set to 16
// batches of 512 bytes, the same 8 KB per output as the full-size default.
// Phase 1 sends tagged packets on all 16 ingress fibres to random output
// ribbons; phase 2 sends filler until every tagged packet is out; phase 3
// overloads one output ribbon. Checked: each tagged packet leaves once,
// unchanged, on its output ribbon, through the HBM switch its ingress fibre
// is wired to (the fibre split, recomputed here independently), in order per
// ingress fibre and egress fibre; no HBM timing error in either switch.
// Mechanisms counted (each must occur): traffic through every switch, frames
// written and read in every switch, HBM ACT/PRE/WR/RD, all egress fibres
// used, drops under overload.
module tb_sps_router;
  import pfi_pkg::*;
  localparam int N = 2, F = 8, H = 2, A = F / H, SEG = 4, T = N * CH_PER_MOD, SEED = 1;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fiber_word_t     rx [N][F];
  fiber_word_t     tx [N][F];
  hbm_row_cmd_t    row [H];
  hbm_col_cmd_t    col [H];
  logic [CH_W-1:0] wdata [H][T];
  logic [CH_W-1:0] rdata [H][T];
  logic            rvalid [H];
  logic [31:0]     drops [H], pkts [H];

  sps_router #(.N(N), .F(F), .H(H), .SEG(SEG), .ROW_BITS(6), .IN_Q_BATCHES(16), .SEED(SEED)) dut (
    .clk, .rst_n, .rx_i (rx), .tx_o (tx),
    .hbm_row_o (row), .hbm_col_o (col), .hbm_wdata_o (wdata),
    .hbm_rdata_i (rdata), .hbm_rvalid_i (rvalid), .drops_o (drops), .pkts_out_o (pkts));

  for (genvar h = 0; h < H; h++) begin : g_mem
    hbm_model #(.T(T), .RL(6), .TRCD(SEG), .TRP(SEG), .TFAW(4 * SEG)) mem (
      .clk, .rst_n, .row_i (row[h]), .col_i (col[h]), .wdata_i (wdata[h]),
      .rdata_o (rdata[h]), .rvalid_o (rvalid[h]));
  end

  // the fibre split, written out again: position p of ribbon r's shuffle
  function automatic int perm(int r, int p, int seed);
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
  int sw_in [N][F], sw_out [N][F];

  // packet bytes: 9 protocol, 12..23 flow, 24 kind (1 checked, 2 filler),
  // 25 ingress ribbon, 26 ingress fibre, 27..28 seq, 29 output ribbon
  byte sent [string][$];
  int  nsent = 0, nrecv = 0, nfill = 0, done_n = 0;
  int  last_seq [string];
  int  fib_used [N][F];
  int  sw_pkts [H];

  function automatic string key_of(byte b [$]);
    return $sformatf("%0d/%0d/%0d", b[25], b[26], {b[28], b[27]});
  endfunction

  task automatic fib_src(int r, int f, int npk, int kind, int fixed_dest);
    int flows [4][3];
    for (int i = 0; i < 4; i++) for (int k = 0; k < 3; k++) flows[i][k] = $urandom();
    for (int k = 0; k < npk; k++) begin
      byte b [$];
      int len, d, words, fl;
      d = (fixed_dest >= 0) ? fixed_dest : $urandom() % N;
      len = (kind == 1) ? 64 + $urandom() % 1400 : (fixed_dest >= 0 ? 64 : 1000);
      fl = $urandom() % 4;
      for (int i = 0; i < len; i++) b.push_back(byte'($urandom()));
      b[9] = 8'd6;
      for (int i = 0; i < 12; i++) b[12 + i] = byte'(flows[fl][i / 4] >> (8 * (i % 4)));
      b[24] = byte'(kind); b[25] = byte'(r); b[26] = byte'(f);
      b[27] = byte'(k); b[28] = byte'(k >> 8); b[29] = byte'(d);
      if (kind == 1) begin sent[key_of(b)] = b; nsent++; end
      words = (len + FIBER_BYTES - 1) / FIBER_BYTES;
      for (int w = 0; w < words; w++) begin
        rx[r][f] = '0;
        rx[r][f].valid = 1; rx[r][f].sop = (w == 0); rx[r][f].eop = (w == words - 1);
        rx[r][f].nbytes = 6'((w == words - 1) ? len - w * FIBER_BYTES : FIBER_BYTES);
        rx[r][f].dest = DEST_W'(d); rx[r][f].len = LEN_W'(len);
        for (int i = 0; i < FIBER_BYTES; i++)
          rx[r][f].data[8*i +: 8] = (w * FIBER_BYTES + i < len) ? b[w * FIBER_BYTES + i] : 8'h00;
        @(negedge clk);
      end
      rx[r][f] = '0;
      if (kind == 1) repeat ($urandom() % 60) @(negedge clk);
      if (kind == 2 && fixed_dest < 0) repeat (20) @(negedge clk);
    end
  endtask

  // egress monitor
  byte cur [N][F][$];
  int  clen [N][F];
  always @(posedge clk)
    if (rst_n)
      for (int o = 0; o < N; o++)
        for (int g = 0; g < F; g++)
          if (tx[o][g].valid) begin
            if (tx[o][g].sop) begin cur[o][g].delete(); clen[o][g] = int'(tx[o][g].len); end
            for (int i = 0; i < int'(tx[o][g].nbytes); i++) cur[o][g].push_back(tx[o][g].data[8*i +: 8]);
            if (tx[o][g].eop) begin
              byte b [$];
              b = cur[o][g];
              checks++;
              if (b.size() != clen[o][g] || b.size() < 30) begin failures++; $display("FAIL malformed packet"); end
              else begin
                checks++;
                if (int'(b[29]) != o) begin failures++; $display("FAIL packet for ribbon %0d left on %0d", b[29], o); end
                checks++;
                if (sw_in[b[25]][b[26]] != sw_out[o][g]) begin
                  failures++; $display("FAIL packet crossed switch %0d but left through %0d", sw_in[b[25]][b[26]], sw_out[o][g]);
                end
                fib_used[o][g]++;
                sw_pkts[sw_out[o][g]]++;
                if (b[24] == 1) begin
                  string k, ok;
                  int seq;
                  k = key_of(b);
                  seq = int'({b[28], b[27]});
                  checks++;
                  if (!sent.exists(k)) begin failures++; $display("FAIL unknown or duplicate packet %s", k); end
                  else begin
                    if (sent[k] != b) begin failures++; $display("FAIL packet %s corrupted", k); end
                    sent.delete(k);
                  end
                  ok = $sformatf("%0d/%0d/%0d/%0d", b[25], b[26], o, g);
                  checks++;
                  if (last_seq.exists(ok) && last_seq[ok] >= seq) begin failures++; $display("FAIL order %s", ok); end
                  last_seq[ok] = seq;
                  nrecv++;
                end else nfill++;
              end
            end
          end

  task automatic run_all(int npk, int kind, int fixed_dest);
    done_n = 0;
    for (int r = 0; r < N; r++)
      for (int f = 0; f < F; f++)
        fork
          automatic int rr = r, ff = f;
          begin fib_src(rr, ff, npk, kind, fixed_dest); done_n++; end
        join_none
    wait (done_n == N * F);
  endtask

  initial begin
    int nfib, fw [H], fr [H], errs, dsum;
    for (int r = 0; r < N; r++)
      for (int p = 0; p < F; p++) begin
        sw_in[r][perm(r, p, SEED)] = p / A;
        sw_out[r][perm(r, p, SEED + 7777)] = p / A;
      end
    for (int r = 0; r < N; r++) for (int f = 0; f < F; f++) rx[r][f] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run_all(50, 1, -1);
    for (int k = 0; k < 40 && sent.size() > 0; k++) begin
      run_all(4, 2, -1);
      repeat (500) @(negedge clk);
    end
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d tagged packets never left", sent.size()); end
    dsum = 0;
    for (int h = 0; h < H; h++) dsum += int'(drops[h]);
    checks++;
    if (dsum != 0) begin failures++; $display("FAIL %0d drops at moderate load", dsum); end
    run_all(300, 2, 1);
    repeat (2000) @(negedge clk);

    fw[0] = int'(dut.g_sw[0].u_sw.frames_wr_o); fr[0] = int'(dut.g_sw[0].u_sw.frames_rd_o);
    fw[1] = int'(dut.g_sw[1].u_sw.frames_wr_o); fr[1] = int'(dut.g_sw[1].u_sw.frames_rd_o);
    errs = g_mem[0].mem.errors + g_mem[1].mem.errors;
    nfib = 0;
    for (int o = 0; o < N; o++) for (int g = 0; g < F; g++) if (fib_used[o][g] > 0) nfib++;
    dsum = 0;
    for (int h = 0; h < H; h++) dsum += int'(drops[h]);
    $display("MECH sw0: pkts=%0d frames_wr=%0d frames_rd=%0d act=%0d pre=%0d wr=%0d rd=%0d",
             pkts[0], fw[0], fr[0], g_mem[0].mem.n_act, g_mem[0].mem.n_pre, g_mem[0].mem.n_wr, g_mem[0].mem.n_rd);
    $display("MECH sw1: pkts=%0d frames_wr=%0d frames_rd=%0d act=%0d pre=%0d wr=%0d rd=%0d",
             pkts[1], fw[1], fr[1], g_mem[1].mem.n_act, g_mem[1].mem.n_pre, g_mem[1].mem.n_wr, g_mem[1].mem.n_rd);
    $display("MECH tagged=%0d/%0d filler=%0d egress_fibres=%0d/%0d drops=%0d hbm_errors=%0d",
             nrecv, nsent, nfill, nfib, N * F, dsum, errs);
    for (int h = 0; h < H; h++) begin
      checks++;
      if (sw_pkts[h] == 0 || fw[h] == 0 || fr[h] == 0) begin failures++; $display("FAIL switch %0d idle", h); end
    end
    checks++;
    if (g_mem[0].mem.n_act == 0 || g_mem[1].mem.n_act == 0 || g_mem[0].mem.n_rd == 0 || g_mem[1].mem.n_rd == 0)
      begin failures++; $display("FAIL HBM unused"); end
    checks++; if (nfib != N * F) begin failures++; $display("FAIL egress fibres unused"); end
    checks++; if (dsum == 0) begin failures++; $display("FAIL no drop under overload"); end
    checks++; if (errs != 0) begin failures++; $display("FAIL HBM timing errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d tagged packets outstanding", sent.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
