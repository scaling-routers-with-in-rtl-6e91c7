// tb_hbm_ctrl -- PFI controller against the HBM model, with a scripted tail
// SRAM (frames of known content) and a recording head SRAM.
// Checks: every frame read back equals what was written, per output in
// write order; each write beat goes to bank (n mod G)*GAMMA + segment of the
// frame's number n for its output; no HBM bank-rule violation; with frames
// always waiting, one frame is written every CYC cycles; outputs get their
// read turns cyclically; at most GAMMA ACTs per SEG*GAMMA window.
module tb_hbm_ctrl;
  import pfi_pkg::*;
  localparam int N = 2, SEG = 4, ROW_BITS = 6, T = N * CH_PER_MOD;
  localparam int PH = GAMMA * SEG, CYC = 2 * PH + 4, G = L_BANKS / GAMMA;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic fr_valid, fr_pop, tail_rd_en, fr_done, head_resv, head_wr_en, rvalid;
  logic [DEST_W-1:0] fr_dest, tail_rd_dest, fr_done_dest, head_resv_dest, head_wr_dest;
  logic [SLICE_W-1:0] tail_rdata [N], head_wdata [N];
  logic [N-1:0] head_space;
  hbm_row_cmd_t row; hbm_col_cmd_t col;
  logic [CH_W-1:0] wdata [T], rdata [T];
  logic [31:0] fwr, frd, idle;

  hbm_ctrl #(.N(N), .SEG(SEG), .ROW_BITS(ROW_BITS)) dut (
    .clk, .rst_n, .fr_valid_i (fr_valid), .fr_dest_i (fr_dest), .fr_pop_o (fr_pop),
    .tail_rd_en_o (tail_rd_en), .tail_rd_dest_o (tail_rd_dest), .tail_rdata_i (tail_rdata),
    .fr_done_o (fr_done), .fr_done_dest_o (fr_done_dest),
    .head_space_i (head_space), .head_resv_o (head_resv), .head_resv_dest_o (head_resv_dest),
    .head_wr_en_o (head_wr_en), .head_wr_dest_o (head_wr_dest), .head_wdata_o (head_wdata),
    .hbm_row_o (row), .hbm_col_o (col), .hbm_wdata_o (wdata), .hbm_rdata_i (rdata), .hbm_rvalid_i (rvalid),
    .frames_wr_o (fwr), .frames_rd_o (frd), .idle_turns_o (idle));

  hbm_model #(.T(T), .TRCD(SEG), .TRP(SEG), .TFAW(4 * SEG)) mem (.clk, .rst_n, .row_i (row), .col_i (col), .wdata_i (wdata), .rdata_o (rdata), .rvalid_o (rvalid));

  // scripted tail: frame i has output pattern dst[i], content word(uid, m, beat)
  int nfr = 40;
  int dst [64];
  int fq_head = 0;                 // next frame to offer
  int wq [$];                      // frames being written (uids)
  int wbeat = 0;
  int wframe_n [64];               // frame number per output of each uid
  int nwr [N];
  int rd_expect [N][$];            // uids per output in write order
  int rbeat = 0, cur_r = -1;
  int last_pop = -1, pops = 0, gap_ok = 0, gap_bad = 0;
  int cyc = 0;
  int last_turn [N];
  int exp_bank_q [$];

  function automatic logic [SLICE_W-1:0] word(int uid, int m, int beat);
    return {64{uid[7:0], 8'(m), 16'(beat)}};
  endfunction

  assign fr_valid = (fq_head < nfr);
  assign fr_dest  = DEST_W'(dst[fq_head % 64]);

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (fr_pop) begin
        wframe_n[fq_head] = nwr[dst[fq_head]];
        nwr[dst[fq_head]]++;
        wq.push_back(fq_head);
        if (last_pop >= 0) begin
          if (cyc - last_pop == CYC) gap_ok++; else gap_bad++;
        end
        last_pop = cyc;
        fq_head++;
      end
      if (tail_rd_en) begin
        for (int m = 0; m < N; m++) tail_rdata[m] <= word(wq[0], m, wbeat);
        if (int'(tail_rd_dest) != dst[wq[0]]) begin failures++; $display("FAIL tail read dest"); end
        exp_bank_q.push_back((wframe_n[wq[0]] % G) * GAMMA + wbeat / SEG);
        wbeat++;
        if (wbeat == PH) begin
          rd_expect[dst[wq[0]]].push_back(wq[0]);
          wq.pop_front(); wbeat = 0;
        end
      end
      if (col.op == COL_WR) begin
        checks++;
        if (exp_bank_q.size() == 0 || int'(col.bank) != exp_bank_q[0]) begin
          failures++; $display("FAIL write bank %0d", col.bank);
        end
        if (exp_bank_q.size() != 0) void'(exp_bank_q.pop_front());
      end
      if (head_resv) begin
        int o;
        o = int'(head_resv_dest);
        if (last_turn[o] >= 0) begin
          checks++;
          if ((cyc - last_turn[o]) % (N * CYC) != 0) begin failures++; $display("FAIL read turn of output %0d not cyclic", o); end
        end
        last_turn[o] = cyc;
      end
      if (head_wr_en) begin
        int o, u;
        o = int'(head_wr_dest);
        u = rd_expect[o][0];
        for (int m = 0; m < N; m++) begin
          checks++;
          if (head_wdata[m] !== word(u, m, rbeat)) begin
            failures++; $display("FAIL read data output %0d frame %0d beat %0d module %0d", o, u, rbeat, m);
          end
        end
        rbeat++;
        if (rbeat == PH) begin rbeat = 0; void'(rd_expect[o].pop_front()); end
      end
    end
  end

  initial begin
    for (int i = 0; i < 64; i++) dst[i] = (i < 20) ? (i % 3 == 0 ? 1 : 0) : ($urandom() % N);
    for (int j = 0; j < N; j++) begin nwr[j] = 0; last_turn[j] = -1; end
    head_space = '1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (fq_head == nfr);
    repeat (CYC * (2 * N + 4) * 4) @(posedge clk);
    // all frames read back
    for (int j = 0; j < N; j++) begin
      checks++;
      if (rd_expect[j].size() != 0) begin failures++; $display("FAIL output %0d has %0d frames not read", j, rd_expect[j].size()); end
    end
    checks++; if (fwr != 32'(nfr)) begin failures++; $display("FAIL frames written %0d", fwr); end
    checks++; if (frd != 32'(nfr)) begin failures++; $display("FAIL frames read %0d", frd); end
    checks++; if (mem.errors != 0) begin failures++; $display("FAIL %0d HBM rule violations", mem.errors); end
    checks++; if (gap_bad != 0 || gap_ok < 10) begin failures++; $display("FAIL write cadence ok=%0d bad=%0d", gap_ok, gap_bad); end
    checks++; if (mem.max_open > GAMMA) begin failures++; $display("FAIL %0d banks open at once", mem.max_open); end
    checks++; if (idle == 0) begin failures++; $display("FAIL no idle read turn seen"); end
    $display("frames wr=%0d rd=%0d idle turns=%0d ACT=%0d maxopen=%0d", fwr, frd, idle, mem.n_act, mem.max_open);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
