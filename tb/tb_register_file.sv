// tb_register_file: checks the 1 KB register file. Block segments of 64
// bytes are written at every block slot and then at random ones, and windows
// of 64 groups are read at random group offsets (including ones that run
// past the end, which must read zero) and compared with a byte model.
module tb_register_file;
  import crisp_pkg::*;
  localparam int unsigned WIN = LANES * NM_M;

  logic clk = 0;
  always #5 clk = ~clk;
  logic  wr_en = 0;
  logic [$clog2(RF_BYTES)-1:0] wr_addr = '0;
  data_t wr_data [BLOCK];
  logic [$clog2(RF_BYTES/NM_M)-1:0] rd_group = '0;
  data_t rd_win [WIN];

  register_file dut (.*);

  int checks = 0, failures = 0;
  int model [RF_BYTES];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(5));
    for (int i = 0; i < 40; i++) begin
      automatic int slot = (i < RF_BYTES / BLOCK) ? i : $urandom_range(RF_BYTES / BLOCK - 1);
      @(negedge clk);
      wr_en = 1;
      wr_addr = $bits(wr_addr)'(slot * BLOCK);
      for (int b = 0; b < BLOCK; b++) begin
        wr_data[b] = data_t'($urandom);
        model[slot * BLOCK + b] = int'(wr_data[b]);
      end
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      automatic int g = (i < 2) ? i * (RF_BYTES / NM_M - 1) : $urandom_range(RF_BYTES / NM_M - 1);
      rd_group = $bits(rd_group)'(g);
      #1;
      for (int b = 0; b < WIN; b++) begin
        automatic int exp_v = (g * NM_M + b < RF_BYTES) ? model[g * NM_M + b] : 0;
        checks++;
        if (int'(rd_win[b]) != exp_v) begin
          failures++;
          if (failures < 5) $display("group %0d byte %0d: got %0d expected %0d", g, b, rd_win[b], exp_v);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
