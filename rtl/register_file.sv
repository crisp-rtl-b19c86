// register_file: the 1 KB operand register file of one tensor core.
//
// It holds the block-gathered input tile: the activations of the non-zero
// blocks of one weight block-row, packed one after the other, so that the
// compressed weights of a row can be matched against them group by group.
// The paper gives the size (1 KB per tensor core); how it is written and
// read is this design's choice.
//
// Write: one segment of SEG bytes (one block's worth of one activation
// column) per cycle, taken from wr_data[0..SEG-1] and stored from byte
// wr_addr on; visible to reads the next cycle.
// Read: combinational, a window of WIN_GROUPS groups of NM_M bytes starting
// at group rd_group; bytes past the end of the file read as zero.
module register_file
  import crisp_pkg::*;
#(
  parameter int unsigned BYTES      = RF_BYTES,
  parameter int unsigned SEG        = BLOCK,
  parameter int unsigned WIN_GROUPS = LANES
) (
  input  logic   clk,
  input  logic   wr_en,
  input  logic [$clog2(BYTES)-1:0] wr_addr,
  input  data_t  wr_data [SEG],
  input  logic [$clog2(BYTES/NM_M)-1:0] rd_group,
  output data_t  rd_win [WIN_GROUPS*NM_M]
);
  localparam int unsigned WIN = WIN_GROUPS * NM_M;

  data_t mem [BYTES];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int unsigned i = 0; i < SEG; i++) begin
        if (int'(wr_addr) + i < BYTES) mem[int'(wr_addr) + i] <= wr_data[i];
      end
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < WIN; i++) begin
      if (int'(rd_group) * NM_M + i < BYTES) rd_win[i] = mem[int'(rd_group) * NM_M + i];
      else                                   rd_win[i] = '0;
    end
  end

  initial begin
    assert (BYTES % SEG == 0 && BYTES % NM_M == 0)
      else $error("register_file: size must hold whole segments");
  end
endmodule
