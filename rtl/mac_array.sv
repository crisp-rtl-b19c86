// mac_array: the LANES multipliers of a tensor core and their reduction.
//
// Every cycle with in_valid each enabled lane multiplies its compressed
// weight by the activation the selection unit chose for it; disabled lanes
// contribute zero. The products are summed into one partial dot product.
// The paper gives 64 MAC units per tensor core; the two-stage pipeline
// (registered products, then a registered adder tree) and the tag that
// travels with the data are this design's choice.
//
// Timing: inputs in cycle t give out_valid, psum, out_last and out_tag in
// cycle t+2. One window per cycle, no stall.
module mac_array
  import crisp_pkg::*;
#(
  parameter int unsigned NLANES = LANES,
  parameter int unsigned TAG_W  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_last,
  input  logic [TAG_W-1:0] in_tag,
  input  data_t            w_val [NLANES],
  input  data_t            a_val [NLANES],
  input  logic             lane_en [NLANES],
  output logic             out_valid,
  output logic             out_last,
  output logic [TAG_W-1:0] out_tag,
  output acc_t             psum
);
  prod_t            prod_q [NLANES];
  logic             v_q, last_q;
  logic [TAG_W-1:0] tag_q;
  acc_t             sum_d;

  always_ff @(posedge clk) begin
    for (int unsigned k = 0; k < NLANES; k++)
      prod_q[k] <= (in_valid && lane_en[k]) ? prod_t'(w_val[k] * a_val[k]) : '0;
    tag_q  <= in_tag;
    last_q <= in_last;
  end

  always_comb begin
    sum_d = '0;
    for (int unsigned k = 0; k < NLANES; k++) sum_d += acc_t'(prod_q[k]);
  end

  always_ff @(posedge clk) begin
    psum     <= sum_d;
    out_tag  <= tag_q;
    out_last <= last_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end
endmodule
