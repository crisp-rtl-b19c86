// tb_tensor_core: one tensor core on its own. The register file is filled
// with 16 random 64-byte segments; then rows of random compressed weights
// (N = 1, 2, 3 in turn, random row lengths, including rows covering the whole
// register file) are streamed one window per cycle, back to back. Each row's
// result must equal the dense dot product of its weights with the register
// file contents and appear 3 cycles after the row's last window.
module tb_tensor_core;
  import crisp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  rf_we = 0;
  logic [$clog2(RF_BYTES)-1:0] rf_waddr = '0;
  data_t rf_wdata [BLOCK];
  logic  in_valid = 0, in_last = 0;
  logic [15:0] in_tag = '0;
  nm_mode_t nm_n = NM_2_4;
  logic [$clog2(RF_BYTES/NM_M)-1:0] grp_base = '0;
  logic [$clog2(LANES+1)-1:0] grp_cnt = '0;
  data_t w_val [LANES];
  idx_t  w_idx [LANES];
  logic  out_valid;
  logic [15:0] out_tag;
  acc_t  out_data;

  tensor_core #(.TAG_W(16)) dut (.*);

  int checks = 0, failures = 0;
  int rf [RF_BYTES];
  int expq [$];
  int tagq [$];
  int dueq [$];
  int cyc = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0 || out_data != expq[0] || int'(out_tag) != tagq[0] || cyc != dueq[0]) begin
        failures++;
        if (failures < 5) $display("row %0d: got %0d at %0d expected %0d at %0d", out_tag, out_data, cyc,
                                   expq.size() ? expq[0] : 0, dueq.size() ? dueq[0] : 0);
      end
      if (expq.size()) begin void'(expq.pop_front()); void'(tagq.pop_front()); void'(dueq.pop_front()); end
    end
  end

  // Stream one row of gt groups with N non-zeros per group.
  task automatic send_row(input int nn, input int gt, input int row);
    int g = LANES / nn;
    int nwin = (gt + g - 1) / g;
    int sum = 0;
    int pos [4];
    for (int win = 0; win < nwin; win++) begin
      @(negedge clk);
      in_valid = 1;
      in_last  = (win == nwin - 1);
      in_tag   = 16'(row);
      nm_n     = nm_mode_t'(nn);
      grp_base = $bits(grp_base)'(win * g);
      grp_cnt  = $bits(grp_cnt)'((gt - win * g < g) ? gt - win * g : g);
      for (int k = 0; k < LANES; k++) begin
        // garbage in unused lanes must not count
        w_val[k] = data_t'($urandom);
        w_idx[k] = idx_t'($urandom);
      end
      for (int q = 0; q < g && win * g + q < gt; q++) begin
        // N distinct positions out of 4
        int chosen = 0;
        for (int p = 0; p < 4; p++)
          if ((4 - p) == (nn - chosen) || (chosen < nn && $urandom_range(3) < nn)) begin
            pos[chosen] = p;
            chosen++;
          end
        for (int e = 0; e < nn; e++) begin
          int k = q * nn + e;
          w_idx[k] = idx_t'(pos[e]);
          sum += int'(w_val[k]) * rf[4 * (win * g + q) + pos[e]];
        end
      end
      if (in_last) begin
        expq.push_back(sum);
        tagq.push_back(row);
        dueq.push_back(cyc + 1 + 3);
      end
    end
  endtask

  initial begin
    void'($urandom(23));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < RF_BYTES / BLOCK; s++) begin
      @(negedge clk);
      rf_we = 1;
      rf_waddr = $bits(rf_waddr)'(s * BLOCK);
      for (int b = 0; b < BLOCK; b++) begin
        rf_wdata[b] = data_t'($urandom);
        rf[s * BLOCK + b] = int'(rf_wdata[b]);
      end
    end
    @(negedge clk) rf_we = 0;
    for (int row = 0; row < 60; row++) begin
      automatic int nn = 1 + row % 3;
      automatic int gt = (row < 3) ? RF_BYTES / NM_M : 1 + $urandom_range(RF_BYTES / NM_M - 1);
      send_row(nn, gt, row);
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d rows missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
