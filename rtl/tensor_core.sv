// tensor_core: one sparse tensor core, 64 MACs and a 1 KB register file.
//
// The register file is filled with the block-gathered input tile of one
// activation column. Then, once per cycle, the core takes a window of
// compressed weights with their 2-bit offsets (shared by all cores), reads
// the matching window of input-tile groups from its register file, pairs
// every weight with its activation in the N:M selection unit, multiplies and
// reduces them, and accumulates the partial sums of a weight row until the
// row's last window, when it emits one output element. This follows the
// paper's Fig. 7 dataflow (input tile, MUXes, multipliers, accumulator);
// widths and pipelining are this design's choice.
//
// Timing: a window presented in cycle t (with its register-file group base)
// is read from the register file in the same cycle; the row's result appears
// on out_valid 3 cycles after its last window. No stall.
module tensor_core
  import crisp_pkg::*;
#(
  parameter int unsigned NLANES   = LANES,
  parameter int unsigned RF_B     = RF_BYTES,
  parameter int unsigned SEG      = BLOCK,
  parameter int unsigned TAG_W    = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // register-file fill
  input  logic             rf_we,
  input  logic [$clog2(RF_B)-1:0] rf_waddr,
  input  data_t            rf_wdata [SEG],
  // compressed weight window
  input  logic             in_valid,
  input  logic             in_last,
  input  logic [TAG_W-1:0] in_tag,
  input  nm_mode_t         nm_n,
  input  logic [$clog2(RF_B/NM_M)-1:0] grp_base,
  input  logic [$clog2(NLANES+1)-1:0]  grp_cnt,
  input  data_t            w_val [NLANES],
  input  idx_t             w_idx [NLANES],
  // one output element per weight row
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output acc_t             out_data
);
  data_t act_win [NLANES*NM_M];
  data_t sel_act [NLANES];
  logic  lane_en [NLANES];
  logic  m_valid, m_last;
  logic [TAG_W-1:0] m_tag;
  acc_t  m_psum;

  register_file #(.BYTES(RF_B), .SEG(SEG), .WIN_GROUPS(NLANES)) u_rf (
    .clk, .wr_en(rf_we), .wr_addr(rf_waddr), .wr_data(rf_wdata),
    .rd_group(grp_base), .rd_win(act_win)
  );

  activation_select #(.NLANES(NLANES)) u_sel (
    .nm_n, .act_win, .w_idx, .grp_cnt, .sel_act, .lane_en
  );

  mac_array #(.NLANES(NLANES), .TAG_W(TAG_W)) u_mac (
    .clk, .rst_n, .in_valid, .in_last, .in_tag,
    .w_val, .a_val(sel_act), .lane_en,
    .out_valid(m_valid), .out_last(m_last), .out_tag(m_tag), .psum(m_psum)
  );

  accumulator #(.TAG_W(TAG_W)) u_acc (
    .clk, .rst_n, .in_valid(m_valid), .in_last(m_last), .in_tag(m_tag),
    .psum(m_psum), .out_valid, .out_tag, .out_data
  );
endmodule
