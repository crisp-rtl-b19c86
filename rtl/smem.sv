// smem: the accelerator's shared memory (SMEM), 256 KB by default.
//
// Holds everything a job reads: the compressed non-zero weights, their
// 2-bit offsets, the Blocked-Ellpack block column indices and the input
// activations. The paper gives only its size; the organisation here is this
// design's own: one array of WORD_BYTES-wide words with one write port for
// the host and two synchronous read ports (port A streams weight values and
// gathers activations, port B reads offsets and block indices), so a weight
// window and its offsets arrive in the same cycle.
//
// Timing: a read issued with re_x in cycle t returns rdata_x in cycle t+1;
// rdata_x holds its value while re_x is low. A write in cycle t is visible to
// reads issued from cycle t+1. Addresses wrap modulo the depth.
module smem
  import crisp_pkg::*;
#(
  parameter int unsigned BYTES = SMEM_BYTES,
  parameter int unsigned WBYTES = WORD_BYTES
) (
  input  logic                 clk,
  // host write port
  input  logic                 we,
  input  addr_t                waddr,
  input  logic [WBYTES*8-1:0]  wdata,
  // read port A
  input  logic                 re_a,
  input  addr_t                addr_a,
  output logic [WBYTES*8-1:0]  rdata_a,
  // read port B
  input  logic                 re_b,
  input  addr_t                addr_b,
  output logic [WBYTES*8-1:0]  rdata_b
);
  localparam int unsigned DEPTH = BYTES / WBYTES;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [WBYTES*8-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW-1:0]] <= wdata;
    if (re_a) rdata_a <= mem[addr_a[AW-1:0]];
    if (re_b) rdata_b <= mem[addr_b[AW-1:0]];
  end

  initial begin
    assert (DEPTH * WBYTES == BYTES && (1 << AW) == DEPTH)
      else $error("smem: size must be a power-of-two number of words");
    assert (AW <= ADDR_W) else $error("smem: address too narrow");
  end
endmodule
