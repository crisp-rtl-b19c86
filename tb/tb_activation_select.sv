// tb_activation_select: checks the N:M selection unit for N = 1, 2 and 3
// with random windows, random 2-bit offsets and random counts of valid
// groups. Lane k must carry activation 4*(k/N) + offset when its group is
// valid (and, for N = 3, when k < 63), and zero with lane_en low otherwise.
module tb_activation_select;
  import crisp_pkg::*;

  nm_mode_t nm_n;
  data_t    act_win [LANES*NM_M];
  idx_t     w_idx [LANES];
  logic [$clog2(LANES+1)-1:0] grp_cnt;
  data_t    sel_act [LANES];
  logic     lane_en [LANES];

  activation_select dut (.*);

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(11));
    for (int t = 0; t < 300; t++) begin
      automatic int nn = 1 + t % 3;
      automatic int gmax = LANES / nn;
      automatic int gc = (t % 4 == 0) ? gmax : $urandom_range(gmax);
      nm_n = nm_mode_t'(nn);
      grp_cnt = $bits(grp_cnt)'(gc);
      for (int i = 0; i < LANES * NM_M; i++) act_win[i] = data_t'($urandom);
      for (int k = 0; k < LANES; k++) w_idx[k] = idx_t'($urandom);
      #1;
      for (int k = 0; k < LANES; k++) begin
        automatic bit en = (k < nn * gmax) && (k / nn < gc);
        automatic data_t e = en ? act_win[NM_M * (k / nn) + int'(w_idx[k])] : '0;
        checks++;
        if (lane_en[k] != en || sel_act[k] != e) begin
          failures++;
          if (failures < 5) $display("N=%0d lane %0d: got %0d/%0d expected %0d/%0d", nn, k, lane_en[k], sel_act[k], en, e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
