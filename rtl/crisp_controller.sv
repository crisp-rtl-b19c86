// crisp_controller: sequences one hybrid-sparse matrix multiply.
//
// out[s][n] = sum_k W[s][k] * A[k][n], where W keeps only kb_nz blocks of
// SEG x SEG per block-row (the same number in every block-row) and inside
// them N of every 4 weights. The controller walks the job as
//   for each group of NUM_CORES activation columns (core c takes column
//       cg*NUM_CORES + c)
//     for each weight block-row rb
//       gather: for each non-zero block j, read its Blocked-Ellpack column
//               index from port B, then read the matching SEG activations of
//               every core's column from port A and write them to that core's
//               register file at byte j*SEG (the block-gathered input tile);
//       compute: for each of the SEG rows of the block-row, stream the row's
//               compressed weights, one window of LANES values per cycle on
//               port A, with their 2-bit offsets on port B, to all cores.
// This is the paper's three-step flow (block indices select the activations
// that are loaded, 2-bit offsets select within groups of 4, then MAC); the
// memory layout, loop order and timing are this design's choice.
//
// Memory layout (word addresses):
//   weights  w_base + wc, wc = (rb*SEG + r)*W + win, W windows per row;
//            byte k of a window holds the non-zero of lane k.
//   offsets  m_base + wc/4, bits [128*(wc%4) + 2k +: 2] for lane k.
//   blocks   b_base + bc/32, bits [16*(bc%32) +: 16], bc = rb*kb_nz + j.
//   acts     a_base + n*k_words + (idx*SEG)/64, column n contiguous in K.
// Timing: a block costs 6 gather cycles; a row costs W compute cycles with
// W = ceil((kb_nz*SEG/4) / (LANES/N)). busy stays high from the cycle after
// start until done, which pulses for one cycle 5 cycles after the last
// window is issued, once every result has left the cores.
module crisp_controller
  import crisp_pkg::*;
#(
  parameter int unsigned NLANES = LANES,
  parameter int unsigned NCORES = NUM_CORES,
  parameter int unsigned RF_B   = RF_BYTES,
  parameter int unsigned SEG    = BLOCK,
  parameter int unsigned WBYTES = WORD_BYTES,
  parameter int unsigned TAG_W  = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  job_t        job,
  output logic        busy,
  output logic        done,
  // shared-memory read ports
  output logic        re_a,
  output addr_t       addr_a,
  input  logic [WBYTES*8-1:0] rdata_a,
  output logic        re_b,
  output addr_t       addr_b,
  input  logic [WBYTES*8-1:0] rdata_b,
  // register-file fill, data shared, one write enable per core
  output logic        rf_we [NCORES],
  output logic [$clog2(RF_B)-1:0] rf_waddr,
  output data_t       rf_wdata [SEG],
  // compressed weight windows, broadcast to every core
  output logic        cv_valid,
  output logic        cv_last,
  output logic [TAG_W-1:0] cv_tag,
  output nm_mode_t    cv_nm_n,
  output logic [$clog2(RF_B/NM_M)-1:0] cv_grp_base,
  output logic [$clog2(NLANES+1)-1:0]  cv_grp_cnt,
  output data_t       cv_w_val [NLANES],
  output idx_t        cv_w_idx [NLANES]
);
  localparam int unsigned RF_AW   = $clog2(RF_B);
  localparam int unsigned GRP_AW  = $clog2(RF_B / NM_M);
  localparam int unsigned CNT_W   = $clog2(NLANES + 1);
  localparam int unsigned SEG_SH  = $clog2(SEG);
  localparam int unsigned WB_SH   = $clog2(WBYTES);
  localparam int unsigned IPW     = WBYTES * 8 / BIDX_W;        // block indices per word
  localparam int unsigned IPW_SH  = $clog2(IPW);
  localparam int unsigned WPI     = WBYTES * 8 / (NLANES * IDX_W); // windows per offset word
  localparam int unsigned WPI_SH  = $clog2(WPI);
  localparam int unsigned CORE_W  = (NCORES > 1) ? $clog2(NCORES) : 1;
  localparam int unsigned ROW_W   = (SEG > 1) ? $clog2(SEG) : 1;
  localparam int unsigned DRAIN_CYC = 4;

  typedef enum logic [2:0] {S_IDLE, S_BIDX, S_BWAIT, S_ACT, S_COMP, S_DRAIN, S_DONE} state_t;

  state_t      state;
  job_t        jq;
  logic [15:0] cg, rb;
  logic [7:0]  j;
  logic [CORE_W-1:0] c;
  logic [ROW_W-1:0]  r;
  logic [31:0] bc;           // block counter within a column group
  addr_t       wc;           // window counter within a column group
  logic [GRP_AW:0] gbase;    // first group of the current window
  logic [BIDX_W-1:0] bidx;
  logic [2:0]  drain_cnt;

  // per-job constants
  logic [CNT_W-1:0] g_win;   // groups per window (LANES/N)
  logic [GRP_AW:0]  g_tile;  // groups in the gathered tile (kb_nz*SEG/4)
  assign g_win  = CNT_W'(groups_per_window(jq.nm_n, NLANES));
  assign g_tile = (GRP_AW+1)'((32'(jq.kb_nz) << SEG_SH) >> 2);

  // window bookkeeping
  logic [GRP_AW+1:0] gnext;
  logic              win_last;
  logic [CNT_W-1:0]  win_cnt;
  assign gnext    = {1'b0, gbase} + (GRP_AW+2)'(g_win);
  assign win_last = gnext >= {1'b0, g_tile};
  assign win_cnt  = win_last ? CNT_W'(g_tile - gbase) : g_win;

  // activation word address of core c's column for block bidx
  logic [31:0] col, act_byte;
  assign col      = (32'(cg) * NCORES) + 32'(c);
  assign act_byte = 32'(bidx) << SEG_SH;

  // gather write stage (one cycle behind the port-A read)
  logic              gw_valid;
  logic [CORE_W-1:0] gw_core;
  logic [WB_SH-1:0]  gw_off;
  logic [RF_AW-1:0]  gw_dst;

  // compute stage (one cycle behind the reads)
  logic              cs_valid, cs_last;
  logic [TAG_W-1:0]  cs_tag;
  logic [GRP_AW-1:0] cs_gbase;
  logic [CNT_W-1:0]  cs_gcnt;
  logic [WPI_SH-1:0] cs_slice;

  always_comb begin
    re_a   = 1'b0;
    addr_a = '0;
    re_b   = 1'b0;
    addr_b = '0;
    case (state)
      S_BIDX: begin
        re_b   = 1'b1;
        addr_b = jq.b_base + addr_t'(bc >> IPW_SH);
      end
      S_ACT: begin
        re_a   = 1'b1;
        addr_a = jq.a_base + addr_t'(col * 32'(jq.k_words)) + addr_t'(act_byte >> WB_SH);
      end
      S_COMP: begin
        re_a   = 1'b1;
        addr_a = jq.w_base + wc;
        re_b   = 1'b1;
        addr_b = jq.m_base + (wc >> WPI_SH);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      jq        <= '0;
      cg        <= '0;
      rb        <= '0;
      j         <= '0;
      c         <= '0;
      r         <= '0;
      bc        <= '0;
      wc        <= '0;
      gbase     <= '0;
      bidx      <= '0;
      drain_cnt <= '0;
      gw_valid  <= 1'b0;
      gw_core   <= '0;
      gw_off    <= '0;
      gw_dst    <= '0;
      cs_valid  <= 1'b0;
      cs_last   <= 1'b0;
      cs_tag    <= '0;
      cs_gbase  <= '0;
      cs_gcnt   <= '0;
      cs_slice  <= '0;
    end else begin
      gw_valid <= 1'b0;
      cs_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          jq    <= job;
          cg    <= '0;
          rb    <= '0;
          j     <= '0;
          c     <= '0;
          r     <= '0;
          bc    <= '0;
          wc    <= '0;
          gbase <= '0;
          state <= S_BIDX;
        end
        S_BIDX: state <= S_BWAIT;
        S_BWAIT: begin
          bidx  <= rdata_b[BIDX_W * (bc % IPW) +: BIDX_W];
          c     <= '0;
          state <= S_ACT;
        end
        S_ACT: begin
          gw_valid <= 1'b1;
          gw_core  <= c;
          gw_off   <= WB_SH'(act_byte);
          gw_dst   <= RF_AW'(32'(j) << SEG_SH);
          if (32'(c) == NCORES - 1) begin
            bc <= bc + 1;
            if (j == jq.kb_nz - 1) begin
              j     <= '0;
              r     <= '0;
              gbase <= '0;
              state <= S_COMP;
            end else begin
              j     <= j + 1;
              state <= S_BIDX;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
        S_COMP: begin
          cs_valid <= 1'b1;
          cs_last  <= win_last;
          cs_tag   <= TAG_W'({cg, 16'(rb) << SEG_SH | 16'(r)});
          cs_gbase <= GRP_AW'(gbase);
          cs_gcnt  <= win_cnt;
          cs_slice <= WPI_SH'(wc);
          wc       <= wc + 1'b1;
          if (!win_last) begin
            gbase <= gnext[GRP_AW:0];
          end else begin
            gbase <= '0;
            if (32'(r) != SEG - 1) begin
              r <= r + 1'b1;
            end else begin
              r <= '0;
              if (rb != jq.n_blkrows - 1) begin
                rb    <= rb + 1;
                state <= S_BIDX;
              end else if (cg != jq.n_colgrps - 1) begin
                rb    <= '0;
                cg    <= cg + 1;
                bc    <= '0;
                wc    <= '0;
                state <= S_BIDX;
              end else begin
                drain_cnt <= '0;
                state     <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (32'(drain_cnt) == DRAIN_CYC - 1) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // register-file fill from the port-A word
  always_comb begin
    for (int unsigned i = 0; i < NCORES; i++) rf_we[i] = gw_valid && (32'(gw_core) == i);
    rf_waddr = gw_dst;
    for (int unsigned i = 0; i < SEG; i++)
      rf_wdata[i] = data_t'(rdata_a[8 * ((32'(gw_off) + i) % WBYTES) +: 8]);
  end

  // weight windows to the cores
  always_comb begin
    cv_valid    = cs_valid;
    cv_last     = cs_last;
    cv_tag      = cs_tag;
    cv_nm_n     = jq.nm_n;
    cv_grp_base = cs_gbase;
    cv_grp_cnt  = cs_gcnt;
    for (int unsigned k = 0; k < NLANES; k++) begin
      cv_w_val[k] = data_t'(rdata_a[8 * k +: 8]);
      cv_w_idx[k] = rdata_b[NLANES * IDX_W * 32'(cs_slice) + IDX_W * k +: IDX_W];
    end
  end

  // job rules
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      assert (job.nm_n inside {NM_1_4, NM_2_4, NM_3_4}) else $error("crisp_controller: N must be 1, 2 or 3");
      assert (job.kb_nz != 0 && 32'(job.kb_nz) * SEG <= RF_B)
        else $error("crisp_controller: gathered tile must fit the register file");
      assert (job.n_blkrows != 0 && job.n_colgrps != 0) else $error("crisp_controller: empty job");
    end
  end

  initial begin
    assert (SEG <= WBYTES && WBYTES % SEG == 0 && SEG % NM_M == 0)
      else $error("crisp_controller: block size must divide the memory word");
    assert (DATA_W == 8 && NLANES * DATA_W <= WBYTES * 8 && WPI >= 1)
      else $error("crisp_controller: a weight window must fit one memory word");
  end
endmodule
