// tb_crisp_controller: the controller against a random shared-memory image
// (a one-cycle-latency memory model here). For jobs with N = 1, 2, 3, one or
// two block-rows and column groups and various block counts, it predicts
// every register-file write (core, byte address, the 64 activations of the
// block the Blocked-Ellpack index names) and every weight window (values,
// 2-bit offsets taken from the right quarter of the offset word, group base,
// group count, last flag, tag) in order, and checks the job's cycle count:
// 6 per gathered block, one per window, plus 5.
module tb_crisp_controller;
  import crisp_pkg::*;

  localparam int unsigned SEG   = BLOCK;
  localparam int unsigned NC    = NUM_CORES;
  localparam int unsigned DEPTH = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  start = 0;
  job_t  job;
  logic  busy, done;
  logic  re_a, re_b;
  addr_t addr_a, addr_b;
  word_t rdata_a, rdata_b;
  logic  rf_we [NC];
  logic [$clog2(RF_BYTES)-1:0] rf_waddr;
  data_t rf_wdata [SEG];
  logic  cv_valid, cv_last;
  logic [31:0] cv_tag;
  nm_mode_t cv_nm_n;
  logic [$clog2(RF_BYTES/NM_M)-1:0] cv_grp_base;
  logic [$clog2(LANES+1)-1:0] cv_grp_cnt;
  data_t cv_w_val [LANES];
  idx_t  cv_w_idx [LANES];

  crisp_controller dut (.*);

  word_t mem [DEPTH];
  always @(posedge clk) begin
    if (re_a) rdata_a <= mem[addr_a % DEPTH];
    if (re_b) rdata_b <= mem[addr_b % DEPTH];
  end

  int checks = 0, failures = 0;

  // expected events
  typedef struct {
    bit  is_win;
    int  core, dst, src_addr, src_off;      // register-file write
    int  wc, gbase, gcnt, last, tag, nn;    // weight window
  } ev_t;
  ev_t evq [$];
  int  m_base_q, w_base_q;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NC; c++) if (rf_we[c]) begin
        ev_t e;
        bit bad;
        checks++;
        bad = (evq.size() == 0);
        if (!bad) begin
          e = evq.pop_front();
          bad = e.is_win || e.core != c || e.dst != int'(rf_waddr);
          for (int i = 0; i < SEG && !bad; i++)
            if (rf_wdata[i] != data_t'(mem[e.src_addr][8 * (e.src_off + i) +: 8])) bad = 1;
        end
        if (bad) begin failures++; if (failures < 6) $display("bad register-file write core %0d addr %0d", c, rf_waddr); end
      end
      if (cv_valid) begin
        ev_t e;
        bit bad;
        checks++;
        bad = (evq.size() == 0);
        if (!bad) begin
          e = evq.pop_front();
          bad = !e.is_win || int'(cv_grp_base) != e.gbase || int'(cv_grp_cnt) != e.gcnt ||
                int'(cv_last) != e.last || int'(cv_tag) != e.tag || int'(cv_nm_n) != e.nn;
          for (int k = 0; k < LANES && !bad; k++) begin
            if (cv_w_val[k] != data_t'(mem[w_base_q + e.wc][8*k +: 8])) bad = 1;
            if (cv_w_idx[k] != idx_t'(mem[m_base_q + e.wc / 4][128 * (e.wc % 4) + 2*k +: 2])) bad = 1;
          end
        end
        if (bad) begin
          failures++;
          if (failures < 6) $display("bad window: base %0d cnt %0d last %0d tag %h (expected base %0d cnt %0d last %0d tag %h)",
                                     cv_grp_base, cv_grp_cnt, cv_last, cv_tag, e.gbase, e.gcnt, e.last, e.tag);
        end
      end
    end
  end

  task automatic run_job(input int nn, input int nbr, input int ncg, input int kbnz, input int kw);
    int g = LANES / nn, gt = kbnz * SEG / 4;
    int wpr = (gt + g - 1) / g;
    int b_base = 0, m_base = 8, w_base = 300, a_base = 2000;
    int cycles = 0, expect_cycles;
    for (int a = 0; a < DEPTH; a++)
      for (int i = 0; i < WORD_BYTES / 4; i++) mem[a][32*i +: 32] = $urandom;
    // valid block indices
    for (int bc = 0; bc < nbr * kbnz; bc++)
      mem[b_base + bc / 32][16 * (bc % 32) +: 16] = 16'($urandom_range(kw * WORD_BYTES / SEG - 1));
    m_base_q = m_base;
    w_base_q = w_base;
    for (int cg = 0; cg < ncg; cg++) begin
      int wc = 0;
      for (int rb = 0; rb < nbr; rb++) begin
        for (int j = 0; j < kbnz; j++) begin
          int bc = rb * kbnz + j;
          int bidx = int'(mem[b_base + bc / 32][16 * (bc % 32) +: 16]);
          for (int c = 0; c < NC; c++) begin
            ev_t e;
            e.is_win = 0; e.core = c; e.dst = j * SEG;
            e.src_addr = a_base + (cg * NC + c) * kw + bidx * SEG / WORD_BYTES;
            e.src_off = (bidx * SEG) % WORD_BYTES;
            evq.push_back(e);
          end
        end
        for (int r = 0; r < SEG; r++)
          for (int win = 0; win < wpr; win++) begin
            ev_t e;
            e.is_win = 1; e.wc = wc; e.gbase = win * g;
            e.gcnt = (gt - win * g < g) ? gt - win * g : g;
            e.last = (win == wpr - 1); e.tag = (cg << 16) | (rb * SEG + r); e.nn = nn;
            evq.push_back(e);
            wc++;
          end
      end
    end
    job = '0;
    job.nm_n = nm_mode_t'(nn);
    job.n_blkrows = 16'(nbr);
    job.n_colgrps = 16'(ncg);
    job.kb_nz = 8'(kbnz);
    job.k_words = 16'(kw);
    job.w_base = addr_t'(w_base);
    job.m_base = addr_t'(m_base);
    job.b_base = addr_t'(b_base);
    job.a_base = addr_t'(a_base);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) begin
      if (busy) cycles++;
      @(negedge clk);
    end
    cycles++;
    expect_cycles = ncg * nbr * (6 * kbnz + SEG * wpr) + 5;
    checks += 2;
    if (cycles != expect_cycles) begin failures++; $display("cycles %0d expected %0d", cycles, expect_cycles); end
    if (evq.size() != 0) begin failures++; $display("%0d events missing", evq.size()); evq.delete(); end
  endtask

  initial begin
    void'($urandom(29));
    job = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_job(2, 1, 1, 2, 4);
    run_job(1, 2, 2, 3, 8);
    run_job(3, 2, 1, 5, 16);
    run_job(2, 1, 2, 16, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
