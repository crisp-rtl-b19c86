// activation_select: the N:M activation selection unit.
//
// Each of the LANES multipliers receives one compressed (non-zero) weight and
// must be paired with the activation that weight stood against before
// compression. With N non-zeros kept per group of M=4, lane k serves group
// k/N of the window and its 2-bit offset picks one of that group's four
// activations through a 4:1 multiplexer, as the paper's 4:2 MUX does for two
// lanes at a time in the 2:4 case. The paper builds the unit for 2:4 and
// says 1:4 and 3:4 are supported too; here N is chosen at run time, so each
// lane's multiplexer reaches the four activations of group k, k/2 or k/3.
// A window therefore covers LANES/N groups (64, 32 or 21); for N=3 lane 63 is
// idle. Lanes whose group is at or past grp_cnt (the end of the row's data)
// are disabled and output zero.
//
// Purely combinational.
module activation_select
  import crisp_pkg::*;
#(
  parameter int unsigned NLANES = LANES
) (
  input  nm_mode_t nm_n,
  input  data_t    act_win [NLANES*NM_M],  // window of input-tile groups
  input  idx_t     w_idx [NLANES],         // 2-bit offset per lane
  input  logic [$clog2(NLANES+1)-1:0] grp_cnt, // valid groups in the window
  output data_t    sel_act [NLANES],
  output logic     lane_en [NLANES]
);
  for (genvar k = 0; k < NLANES; k++) begin : g_lane
    localparam int unsigned G1 = k;
    localparam int unsigned G2 = k / 2;
    localparam int unsigned G3 = k / 3;
    int unsigned grp;
    logic        used;
    always_comb begin
      case (nm_n)
        NM_1_4:  begin grp = G1; used = 1'b1; end
        NM_2_4:  begin grp = G2; used = 1'b1; end
        default: begin grp = G3; used = (k < (NLANES / 3) * 3); end
      endcase
      lane_en[k] = used && (grp < int'(grp_cnt));
      sel_act[k] = lane_en[k] ? act_win[grp * NM_M + int'(w_idx[k])] : '0;
    end
  end
endmodule
