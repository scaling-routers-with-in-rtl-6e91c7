// tb_hbm_switch -- end-to-end test of one HBM switch (N = 4 ports, 4
// waveguides per port, 4-cycle segments so a frame is 16 batches) with the
// behavioural HBM model. Input queues are set to 8 batches (IN_Q_BATCHES):
// at N = 4 a batch is 1 KB, so this is the same 8 KB per output as the
// full-size default of 2 batches of 4 KB.
// Phase 1 sends tagged packets of random length on all 16 ingress waveguides
// at moderate load to random outputs; phase 2 pushes filler packets to every
// output so that the last partial batches and frames of phase 1 complete;
// phase 3 overloads one output so that packets are dropped. Checked: every
// phase-1 packet leaves exactly once, unchanged, on the output it was sent to,
// on waveguide hash mod 4 and wavelength (hash div 4) mod 16 of its flow
// hash, and in order per ingress waveguide and egress waveguide; the HBM model
// sees no timing violation and never more than GAMMA open banks. Each
// mechanism is counted and must have happened at least once: lane merge,
// batching, frame formation, HBM frame writes and reads (ACT, PRE, WR, RD),
// several bank groups, head SRAM delivery, unpacking, egress spreading over
// all waveguides and several wavelengths, and drops under overload.
module tb_hbm_switch;
  import pfi_pkg::*;
  localparam int N = 4, NL = 4, SEG = 4, T = N * CH_PER_MOD;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fiber_word_t     fi [N][NL];
  fiber_word_t     fo [N][NL];
  hbm_row_cmd_t    row;
  hbm_col_cmd_t    col;
  logic [CH_W-1:0] wdata [T];
  logic [CH_W-1:0] rdata [T];
  logic            rvalid;
  logic [31:0]     drops, frames_wr, frames_rd, pkts_out;

  hbm_switch #(.N(N), .NL(NL), .SEG(SEG), .ROW_BITS(6), .IN_Q_BATCHES(8)) dut (
    .clk, .rst_n, .fib_i (fi), .fib_o (fo),
    .hbm_row_o (row), .hbm_col_o (col), .hbm_wdata_o (wdata),
    .hbm_rdata_i (rdata), .hbm_rvalid_i (rvalid),
    .drops_o (drops), .frames_wr_o (frames_wr), .frames_rd_o (frames_rd), .pkts_out_o (pkts_out));

  hbm_model #(.T(T), .RL(6), .TRCD(SEG), .TRP(SEG), .TFAW(4 * SEG)) mem (
    .clk, .rst_n, .row_i (row), .col_i (col), .wdata_i (wdata), .rdata_o (rdata), .rvalid_o (rvalid));

  // packet bytes: 9 protocol, 12..23 addresses and ports (flow), 24 kind
  // (1 = checked, 2 = filler), 25 ingress port, 26 ingress lane, 27..28 seq,
  // 29 destination
  typedef struct { byte b [$]; int dest; } pkt_t;
  pkt_t sent [string];
  int   nsent = 0, nrecv = 0, nfill = 0, phase = 1, lanes_done = 0;
  int   last_seq [string];
  int   lane_used [N][NL], lam_seen [16];
  int   groups_wr [16];

  function automatic string key_of(byte b [$]);
    return $sformatf("%0d/%0d/%0d", b[25], b[26], {b[28], b[27]});
  endfunction

  task automatic lane_src(int p, int l, int npk, int kind, int fixed_dest);
    int flows [4][3];
    for (int f = 0; f < 4; f++) for (int k = 0; k < 3; k++) flows[f][k] = $urandom();
    for (int k = 0; k < npk; k++) begin
      byte b [$];
      int len, d, words, f;
      d = (fixed_dest >= 0) ? fixed_dest : $urandom() % N;
      len = (kind == 1) ? 64 + $urandom() % 1400 : (fixed_dest >= 0 ? 64 : 1000);
      f = $urandom() % 4;
      for (int i = 0; i < len; i++) b.push_back(byte'($urandom()));
      b[9] = 8'd17;
      for (int i = 0; i < 12; i++) b[12 + i] = byte'(flows[f][i / 4] >> (8 * (i % 4)));
      b[24] = byte'(kind); b[25] = byte'(p); b[26] = byte'(l);
      b[27] = byte'(k); b[28] = byte'(k >> 8); b[29] = byte'(d);
      if (kind == 1) begin
        pkt_t e;
        e.b = b; e.dest = d;
        sent[key_of(b)] = e;
        nsent++;
      end
      words = (len + FIBER_BYTES - 1) / FIBER_BYTES;
      for (int w = 0; w < words; w++) begin
        fi[p][l] = '0;
        fi[p][l].valid = 1; fi[p][l].sop = (w == 0); fi[p][l].eop = (w == words - 1);
        fi[p][l].nbytes = 6'((w == words - 1) ? len - w * FIBER_BYTES : FIBER_BYTES);
        fi[p][l].dest = DEST_W'(d); fi[p][l].len = LEN_W'(len);
        for (int i = 0; i < FIBER_BYTES; i++)
          fi[p][l].data[8*i +: 8] = (w * FIBER_BYTES + i < len) ? b[w * FIBER_BYTES + i] : 8'h00;
        @(negedge clk);
      end
      fi[p][l] = '0;
      if (kind == 1) repeat ($urandom() % 60) @(negedge clk);
      if (kind == 2 && fixed_dest < 0) repeat (20) @(negedge clk);
    end
  endtask

  // egress monitor
  byte cur [N][NL][$];
  int  clen [N][NL];
  always @(posedge clk)
    if (rst_n)
      for (int o = 0; o < N; o++)
        for (int l = 0; l < NL; l++)
          if (fo[o][l].valid) begin
            if (fo[o][l].sop) begin cur[o][l].delete(); clen[o][l] = int'(fo[o][l].len); end
            for (int i = 0; i < int'(fo[o][l].nbytes); i++) cur[o][l].push_back(fo[o][l].data[8*i +: 8]);
            if (fo[o][l].eop) begin
              byte b [$];
              logic [LINE_W-1:0] w0;
              logic [HASH_W-1:0] h;
              b = cur[o][l];
              w0 = '0;
              for (int i = 0; i < LINE_BYTES && i < b.size(); i++) w0[8*i +: 8] = b[i];
              h = flow_hash(w0);
              checks++;
              if (b.size() != clen[o][l] || b.size() < 30) begin failures++; $display("FAIL malformed packet at output %0d", o); end
              else begin
                checks++;
                if (int'(h) % NL != l || int'(fo[o][l].lambda) != (int'(h) / NL) % 16) begin
                  failures++; $display("FAIL egress lane/wavelength");
                end
                lane_used[o][l]++;
                lam_seen[fo[o][l].lambda]++;
                checks++;
                if (int'(b[29]) != o) begin failures++; $display("FAIL packet for %0d left on %0d", b[29], o); end
                if (b[24] == 1) begin
                  string k, ok;
                  int seq;
                  k = key_of(b);
                  seq = int'({b[28], b[27]});
                  checks++;
                  if (!sent.exists(k)) begin failures++; $display("FAIL unknown or duplicate packet %s", k); end
                  else begin
                    if (sent[k].b != b) begin failures++; $display("FAIL packet %s corrupted", k); end
                    sent.delete(k);
                  end
                  ok = $sformatf("%0d/%0d/%0d/%0d", b[25], b[26], o, l);
                  checks++;
                  if (last_seq.exists(ok) && last_seq[ok] >= seq) begin failures++; $display("FAIL order %s", ok); end
                  last_seq[ok] = seq;
                  nrecv++;
                end else nfill++;
              end
            end
          end

  always @(posedge clk)
    if (rst_n && col.op == COL_WR) groups_wr[col.bank / GAMMA]++;

  initial begin
    int ngroups, nlam, nlanes;
    for (int p = 0; p < N; p++) for (int l = 0; l < NL; l++) fi[p][l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: checked traffic
    for (int p = 0; p < N; p++)
      for (int l = 0; l < NL; l++)
        fork
          automatic int pp = p, ll = l;
          begin lane_src(pp, ll, 60, 1, -1); lanes_done++; end
        join_none
    wait (lanes_done == N * NL);
    // phase 2: filler until every checked packet has come out
    phase = 2; lanes_done = 0;
    for (int r = 0; r < 40 && sent.size() > 0; r++) begin
      for (int p = 0; p < N; p++)
        for (int l = 0; l < NL; l++)
          fork
            automatic int pp = p, ll = l;
            begin lane_src(pp, ll, 4, 2, -1); lanes_done++; end
          join_none
      wait (lanes_done == N * NL);
      lanes_done = 0;
      repeat (500) @(negedge clk);
    end
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d checked packets never left (drops %0d)", sent.size(), drops); end
    checks++;
    if (drops != 0) begin failures++; $display("FAIL %0d drops at moderate load", drops); end
    // phase 3: overload output 0 from every waveguide
    phase = 3;
    for (int p = 0; p < N; p++)
      for (int l = 0; l < NL; l++)
        fork
          automatic int pp = p, ll = l;
          begin lane_src(pp, ll, 300, 2, 0); lanes_done++; end
        join_none
    wait (lanes_done == N * NL);
    repeat (2000) @(negedge clk);

    ngroups = 0; nlam = 0; nlanes = 0;
    foreach (groups_wr[g]) if (groups_wr[g] > 0) ngroups++;
    foreach (lam_seen[w]) if (lam_seen[w] > 0) nlam++;
    for (int o = 0; o < N; o++) for (int l = 0; l < NL; l++) if (lane_used[o][l] > 0) nlanes++;
    $display("MECH frames_written=%0d frames_read=%0d act=%0d pre=%0d wr=%0d rd=%0d bank_groups=%0d",
             frames_wr, frames_rd, mem.n_act, mem.n_pre, mem.n_wr, mem.n_rd, ngroups);
    $display("MECH packets_out=%0d checked=%0d filler=%0d drops=%0d egress_lanes=%0d wavelengths=%0d max_open_banks=%0d",
             pkts_out, nrecv, nfill, drops, nlanes, nlam, mem.max_open);
    checks++; if (frames_wr == 0)  begin failures++; $display("FAIL no frame written"); end
    checks++; if (frames_rd == 0)  begin failures++; $display("FAIL no frame read"); end
    checks++; if (mem.n_act == 0 || mem.n_pre == 0 || mem.n_wr == 0 || mem.n_rd == 0) begin failures++; $display("FAIL HBM command missing"); end
    checks++; if (ngroups < 2)     begin failures++; $display("FAIL one bank group only"); end
    checks++; if (nrecv == 0)      begin failures++; $display("FAIL nothing delivered"); end
    checks++; if (nlanes != N * NL) begin failures++; $display("FAIL egress waveguides unused"); end
    checks++; if (nlam < 2)        begin failures++; $display("FAIL one wavelength only"); end
    checks++; if (drops == 0)      begin failures++; $display("FAIL no drop under overload"); end
    checks++; if (mem.errors != 0) begin failures++; $display("FAIL %0d HBM timing errors", mem.errors); end
    checks++; if (mem.max_open > GAMMA) begin failures++; $display("FAIL %0d banks open", mem.max_open); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d checked packets outstanding", sent.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

