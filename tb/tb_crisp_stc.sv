// tb_crisp_stc: end-to-end test of the CRISP sparse tensor core at its
// default sizes (four cores, 64 MACs, 1 KB register files, 256 KB shared
// memory, 64 x 64 blocks).
//
// Each job builds a random weight matrix in the hybrid format (kb_nz
// surviving blocks per block-row at random block columns, N random non-zeros
// in every group of 4 inside them) and a random activation matrix, packs
// both into the shared-memory layout the controller expects, runs the job
// and compares every streamed result with a dense matrix product computed
// here. It also checks the job's cycle count against the controller's
// schedule: 6 cycles per gathered block and W = ceil(groups / (64/N))
// cycles per weight row, plus 5. The jobs switch N between 1, 2 and 3, fill
// the register file completely, use several block-rows and column groups,
// and end rows with partly filled windows; each of these is counted and
// must occur.
module tb_crisp_stc;
  import crisp_pkg::*;

  localparam int unsigned SEG    = BLOCK;
  localparam int unsigned NC     = NUM_CORES;
  localparam int unsigned DEPTH  = SMEM_BYTES / WORD_BYTES;
  localparam int unsigned MAXS   = 256;   // weight rows
  localparam int unsigned MAXK   = 2048;  // reduction length
  localparam int unsigned MAXN   = 8;     // activation columns

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  mem_we = 0;
  addr_t mem_waddr = '0;
  word_t mem_wdata = '0;
  logic  start = 0;
  job_t  job;
  logic  busy, done, out_valid;
  logic [15:0] out_row, out_col;
  acc_t  out_data [NC];

  crisp_stc dut (.*);

  int checks = 0, failures = 0;
  int n_mode [4];
  int n_partial = 0, n_multiwin = 0, n_multirow = 0, n_multicg = 0, n_fullrf = 0;
  int n_idle_lane = 0;

  // reference data
  int          wmat [MAXS][MAXK];
  int          amat [MAXK][MAXN];
  int          bcols [MAXS/64][16];
  word_t       img [DEPTH];
  int          got [MAXS][MAXN];
  bit          seen [MAXS][MAXN];

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results
  always @(posedge clk) begin
    if (out_valid) begin
      for (int c = 0; c < NC; c++) begin
        got[out_row][out_col + c]  = out_data[c];
        seen[out_row][out_col + c] = 1;
      end
    end
  end

  // mechanism probes
  always @(posedge clk) begin
    if (dut.cv_valid) begin
      if (int'(dut.cv_grp_cnt) < int'(groups_per_window(dut.cv_nm_n, LANES))) n_partial++;
      if (dut.cv_nm_n == NM_3_4) n_idle_lane++;
    end
  end

  task automatic run_job(input int nn, input int nbr, input int ncg, input int kbnz, input int kw);
    int s_rows = nbr * SEG;
    int ncols  = ncg * NC;
    int kk     = kw * WORD_BYTES;
    int nblkc  = kk / SEG;
    int gt     = kbnz * SEG / 4;
    int g      = LANES / nn;
    int wpr    = (gt + g - 1) / g;
    int b_base, m_base, w_base, a_base, nwin;
    int cycles, expect_cycles;
    int pos [4];
    automatic int errs = 0;

    // weights in the hybrid format
    for (int s = 0; s < s_rows; s++) for (int k = 0; k < kk; k++) wmat[s][k] = 0;
    for (int rb = 0; rb < nbr; rb++) begin
      // kbnz distinct block columns, in increasing order
      int pick = 0;
      for (int b = 0; b < nblkc; b++) begin
        if ((nblkc - b) == (kbnz - pick) || (pick < kbnz && $urandom_range(nblkc - 1) < kbnz)) begin
          bcols[rb][pick] = b;
          pick++;
        end
        if (pick == kbnz) break;
      end
      for (int r = 0; r < SEG; r++)
        for (int j = 0; j < kbnz; j++)
          for (int q = 0; q < SEG / 4; q++) begin
            int chosen = 0;
            for (int p = 0; p < 4; p++) begin
              if ((4 - p) == (nn - chosen) || (chosen < nn && $urandom_range(3) < nn)) begin
                wmat[rb*SEG + r][bcols[rb][j]*SEG + 4*q + p] = $urandom_range(255) - 128;
                chosen++;
              end
            end
          end
    end
    for (int k = 0; k < kk; k++) for (int n = 0; n < ncols; n++) amat[k][n] = $urandom_range(255) - 128;

    // shared-memory image
    for (int a = 0; a < DEPTH; a++) img[a] = '0;
    nwin   = s_rows * wpr;
    b_base = 0;
    m_base = b_base + (nbr * kbnz + 31) / 32;
    w_base = m_base + (nwin + 3) / 4;
    a_base = w_base + nwin;
    if (a_base + ncols * kw > DEPTH) $fatal(1, "job too large for the shared memory");
    for (int bc = 0; bc < nbr * kbnz; bc++)
      img[b_base + bc/32][16*(bc%32) +: 16] = 16'(bcols[bc / kbnz][bc % kbnz]);
    for (int s = 0; s < s_rows; s++)
      for (int win = 0; win < wpr; win++) begin
        int wc = s * wpr + win;
        for (int k = 0; k < LANES; k++) begin
          int gg = win * g + k / nn;
          if (k < nn * g && gg < gt) begin
            int j = gg / (SEG/4), q = gg % (SEG/4), np = 0, col;
            for (int p = 0; p < 4; p++) pos[p] = 0;
            // positions of the non-zeros of this group in increasing order;
            // a value of zero still occupies its slot
            col = bcols[s / SEG][j] * SEG + 4*q;
            begin
              int cnt = 0;
              for (int p = 0; p < 4; p++)
                if (wmat[s][col + p] != 0) begin pos[cnt] = p; cnt++; end
              np = cnt;
            end
            if (k % nn < np) begin
              img[w_base + wc][8*k +: 8] = 8'(wmat[s][col + pos[k % nn]]);
              img[m_base + wc/4][128*(wc%4) + 2*k +: 2] = 2'(pos[k % nn]);
            end
          end
        end
      end
    for (int n = 0; n < ncols; n++)
      for (int k = 0; k < kk; k++)
        img[a_base + n*kw + k/64][8*(k%64) +: 8] = 8'(amat[k][n]);

    // load
    for (int a = 0; a < a_base + ncols * kw; a++) begin
      @(negedge clk);
      mem_we = 1; mem_waddr = addr_t'(a); mem_wdata = img[a];
    end
    @(negedge clk) mem_we = 0;
    for (int s = 0; s < s_rows; s++) for (int n = 0; n < ncols; n++) seen[s][n] = 0;

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
    start = 1;
    @(negedge clk) start = 0;
    cycles = 0;
    while (!done) begin
      if (busy) cycles++;
      @(negedge clk);
    end
    cycles++;  // the done cycle
    @(negedge clk);

    for (int s = 0; s < s_rows; s++)
      for (int n = 0; n < ncols; n++) begin
        int ref_v = 0;
        for (int k = 0; k < kk; k++) ref_v += wmat[s][k] * amat[k][n];
        checks++;
        if (!seen[s][n] || got[s][n] != ref_v) begin
          failures++;
          if (errs++ < 5) $display("MISMATCH N=%0d row %0d col %0d: got %0d (seen %0d) expected %0d",
                                   nn, s, n, got[s][n], seen[s][n], ref_v);
        end
      end
    expect_cycles = ncg * nbr * (6 * kbnz + SEG * wpr) + 5;
    checks++;
    if (cycles != expect_cycles) begin
      failures++;
      $display("CYCLES N=%0d: got %0d expected %0d", nn, cycles, expect_cycles);
    end
    $display("job N=%0d:4 blockrows=%0d colgroups=%0d kb_nz=%0d K=%0d: %0d cycles, %0d windows/row",
             nn, nbr, ncg, kbnz, kk, cycles, wpr);
    n_mode[nn]++;
    if (wpr > 1) n_multiwin++;
    if (nbr > 1) n_multirow++;
    if (ncg > 1) n_multicg++;
    if (kbnz * SEG == RF_BYTES) n_fullrf++;
  endtask

  initial begin
    void'($urandom(7));
    for (int i = 0; i < 4; i++) n_mode[i] = 0;
    job = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_job(2, 1, 1, 2, 4);    // 2:4, one window per row
    run_job(1, 2, 2, 3, 8);    // 1:4, partial windows, two block-rows, two column groups
    run_job(3, 1, 1, 4, 8);    // 3:4, 21 groups per window, lane 63 idle
    run_job(2, 1, 1, 16, 32);  // 2:4 with the register file full (16 blocks of 64)
    run_job(3, 2, 1, 5, 16);   // back to 3:4
    run_job(1, 1, 2, 16, 32);  // 1:4, full register file

    // every mechanism must have occurred
    for (int nn = 1; nn <= 3; nn++) begin
      checks++;
      if (n_mode[nn] == 0) begin failures++; $display("mode %0d:4 never ran", nn); end
    end
    checks++; if (n_partial == 0)   begin failures++; $display("no partial window"); end
    checks++; if (n_multiwin == 0)  begin failures++; $display("no multi-window row"); end
    checks++; if (n_multirow == 0)  begin failures++; $display("no multi block-row job"); end
    checks++; if (n_multicg == 0)   begin failures++; $display("no multi column-group job"); end
    checks++; if (n_fullrf == 0)    begin failures++; $display("register file never full"); end
    checks++; if (n_idle_lane == 0) begin failures++; $display("no 3:4 window"); end
    $display("mechanisms: modes 1:4=%0d 2:4=%0d 3:4=%0d partial_windows=%0d multi_window_jobs=%0d multi_blockrow_jobs=%0d multi_colgroup_jobs=%0d full_rf_jobs=%0d",
             n_mode[1], n_mode[2], n_mode[3], n_partial, n_multiwin, n_multirow, n_multicg, n_fullrf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
