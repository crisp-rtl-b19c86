// crisp_stc: the CRISP sparse tensor core accelerator (top level).
//
// It computes out = W x A for a weight matrix W in the hybrid structured
// sparse format (equal number of surviving BLOCK x BLOCK blocks per
// block-row, N:4 fine-grained sparsity inside them) and a dense activation
// matrix A, both held in the shared memory. Following the paper, it has a
// 256 KB shared memory and four tensor cores, each with 64 MACs, a 1 KB
// register file and an N:M activation selection unit; N = 1, 2 or 3 is set
// per job. The controller gathers, per weight block-row, the activations of
// the non-zero blocks into the register files (one activation column per
// core), then broadcasts the compressed weights one 64-value window per
// cycle; every core returns one output element per weight row.
//
// Interface: the host fills the shared memory through mem_we/mem_waddr/
// mem_wdata while the accelerator is idle, sets job and pulses start; busy
// is high until the one-cycle done pulse. Results stream out without
// back-pressure: when out_valid is high, out_data[c] is out[out_row]
// [out_col + c] for c = 0..NCORES-1. The host interface, the output stream
// and the memory layout (see crisp_controller) are this design's choice;
// the paper does not describe them.
module crisp_stc
  import crisp_pkg::*;
#(
  parameter int unsigned NCORES = NUM_CORES,
  parameter int unsigned NLANES = LANES,
  parameter int unsigned RF_B   = RF_BYTES,
  parameter int unsigned SMEM_B = SMEM_BYTES,
  parameter int unsigned SEG    = BLOCK
) (
  input  logic        clk,
  input  logic        rst_n,
  // host access to the shared memory
  input  logic        mem_we,
  input  addr_t       mem_waddr,
  input  word_t       mem_wdata,
  // job control
  input  logic        start,
  input  job_t        job,
  output logic        busy,
  output logic        done,
  // results
  output logic        out_valid,
  output logic [15:0] out_row,
  output logic [15:0] out_col,
  output acc_t        out_data [NCORES]
);
  localparam int unsigned TAG_W = 32;

  logic  re_a, re_b;
  addr_t addr_a, addr_b;
  word_t rdata_a, rdata_b;

  logic  rf_we [NCORES];
  logic [$clog2(RF_B)-1:0] rf_waddr;
  data_t rf_wdata [SEG];

  logic        cv_valid, cv_last;
  logic [TAG_W-1:0] cv_tag;
  nm_mode_t    cv_nm_n;
  logic [$clog2(RF_B/NM_M)-1:0] cv_grp_base;
  logic [$clog2(NLANES+1)-1:0]  cv_grp_cnt;
  data_t       cv_w_val [NLANES];
  idx_t        cv_w_idx [NLANES];

  logic        core_valid [NCORES];
  logic [TAG_W-1:0] core_tag [NCORES];

  smem #(.BYTES(SMEM_B), .WBYTES(WORD_BYTES)) u_smem (
    .clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re_a, .addr_a, .rdata_a, .re_b, .addr_b, .rdata_b
  );

  crisp_controller #(
    .NLANES(NLANES), .NCORES(NCORES), .RF_B(RF_B), .SEG(SEG),
    .WBYTES(WORD_BYTES), .TAG_W(TAG_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .job, .busy, .done,
    .re_a, .addr_a, .rdata_a, .re_b, .addr_b, .rdata_b,
    .rf_we, .rf_waddr, .rf_wdata,
    .cv_valid, .cv_last, .cv_tag, .cv_nm_n, .cv_grp_base, .cv_grp_cnt,
    .cv_w_val, .cv_w_idx
  );

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    tensor_core #(.NLANES(NLANES), .RF_B(RF_B), .SEG(SEG), .TAG_W(TAG_W)) u_core (
      .clk, .rst_n,
      .rf_we(rf_we[i]), .rf_waddr, .rf_wdata,
      .in_valid(cv_valid), .in_last(cv_last), .in_tag(cv_tag),
      .nm_n(cv_nm_n), .grp_base(cv_grp_base), .grp_cnt(cv_grp_cnt),
      .w_val(cv_w_val), .w_idx(cv_w_idx),
      .out_valid(core_valid[i]), .out_tag(core_tag[i]), .out_data(out_data[i])
    );
  end

  // All cores run in lockstep, so core 0's tag names every core's result.
  assign out_valid = core_valid[0];
  assign out_row   = core_tag[0][15:0];
  assign out_col   = 16'(32'(core_tag[0][31:16]) * NCORES);

  // Host writes only while idle; cores stay in lockstep.
  always_ff @(posedge clk) begin
    assert (!(mem_we && busy)) else $error("crisp_stc: shared memory written during a job");
    for (int i = 1; i < NCORES; i++)
      assert (core_valid[i] == core_valid[0]) else $error("crisp_stc: cores out of step");
  end
endmodule
