// local_mem: the data memory of one core, two read ports and one write port.
//
// The published overlay builds the local memory from dual-port block RAMs.
// An FMA step reads two words (for example a stored B element and the
// partial C sum) and writes one, so this memory keeps two identical copies
// of a simple dual-port RAM: every write goes to both copies, and each copy
// serves one read port.  Reads are synchronous (data one cycle after the
// address), as in block RAM; a read and a write of the same address in the
// same cycle return the old word.  The default 8192 x 32-bit words is the
// 32 KB per core of the evaluated matrix-multiplication architecture.
module local_mem #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned DW    = 32,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rd0_en,
  input  logic [AW-1:0] rd0_addr,
  output logic [DW-1:0] rd0_data,
  input  logic          rd1_en,
  input  logic [AW-1:0] rd1_addr,
  output logic [DW-1:0] rd1_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);
  logic [DW-1:0] bank0 [WORDS];
  logic [DW-1:0] bank1 [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) bank0[wr_addr] <= wr_data;
    if (rd0_en) rd0_data <= bank0[rd0_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) bank1[wr_addr] <= wr_data;
    if (rd1_en) rd1_data <= bank1[rd1_addr];
  end
endmodule
