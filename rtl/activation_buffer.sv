// activation_buffer -- on-chip store of FP activation vectors.
//
// Each word is one vector of N FP values (one row of an activation or
// gradient matrix slice).  The buffer has two read ports and one write port
// so that, in a streaming pass, the datapath can read its input row (port A),
// read a second operand row such as a partial sum or a target (port B), and
// write a result row, all in the same cycle.  Reads are synchronous: data
// appear the cycle after the address.  A read of the row being written in the
// same cycle returns the old contents.
//
// The paper keeps activations on chip in FP and names this buffer; its size,
// word layout and port count are this design's choices (DEPTH words of N
// values; on an FPGA the second read port is a duplicated block RAM).
module activation_buffer #(
  parameter int unsigned N     = hbfp_pkg::TILE,
  parameter int unsigned FPW   = hbfp_pkg::FP_W,
  parameter int unsigned DEPTH = hbfp_pkg::ACT_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  // read port A
  input  logic                    ra_en,
  input  logic [AW-1:0]           ra_addr,
  output logic [N-1:0][FPW-1:0]   ra_data,
  // read port B
  input  logic                    rb_en,
  input  logic [AW-1:0]           rb_addr,
  output logic [N-1:0][FPW-1:0]   rb_data,
  // write port
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [N-1:0][FPW-1:0]   wdata
);

  logic [N-1:0][FPW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)    mem[waddr] <= wdata;
    if (ra_en) ra_data    <= mem[ra_addr];
    if (rb_en) rb_data    <= mem[rb_addr];
  end

endmodule
