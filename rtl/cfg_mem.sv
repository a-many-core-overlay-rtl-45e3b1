// cfg_mem: configuration (program) memory of a core.
//
// Holds DEPTH instruction words of type overlay_pkg::instr_t, written by the
// host through the configuration bus and read by the controller.  One write
// port, one synchronous read port (instruction one cycle after the
// address), like a small block or distributed RAM.  The published overlay
// shows a configuration memory in each core; its depth and word format are
// this implementation's choices.
module cfg_mem
  import overlay_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  instr_t        wdata,
  input  logic [AW-1:0] raddr,
  output instr_t        rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
