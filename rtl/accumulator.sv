// accumulator: adds the partial dot products of one output element.
//
// A weight row's compressed data spans one or more windows; each window's
// partial sum arrives with in_valid, the row's final window with in_last.
// On the last one the completed sum is emitted and the register clears, so
// the next row starts from zero. The paper shows the accumulator; the
// clear-on-last protocol is this design's choice.
//
// Timing: the sum including the in_last window appears on out_data with
// out_valid one cycle later, together with in_tag of that window.
module accumulator
  import crisp_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_last,
  input  logic [TAG_W-1:0] in_tag,
  input  acc_t             psum,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output acc_t             out_data
);
  acc_t acc_q;
  acc_t acc_d;

  assign acc_d = acc_q + psum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        if (in_last) begin
          acc_q    <= '0;
          out_data <= acc_d;
          out_tag  <= in_tag;
        end else begin
          acc_q <= acc_d;
        end
      end
    end
  end
endmodule
