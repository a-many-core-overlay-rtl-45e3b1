// addr_gen: local-memory address generator of a core.
//
// Walks addr = base + i*s_in + o*s_out for the two loop levels of an
// instruction.  load starts the walk at base.  step advances it: by s_in
// within a row, or, when wrap is set (the step that ends an inner loop), to
// the start of the next row (previous row start + s_out).  Arithmetic is
// modulo 2^AW, so a negative stride is given in two's complement.  The
// address is registered and valid from the cycle after load.  The published
// overlay names an address generator in each core; this form of it is the
// implementation's choice.
module addr_gen #(
  parameter int unsigned AW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [AW-1:0] base,
  input  logic [AW-1:0] s_in,
  input  logic [AW-1:0] s_out,
  input  logic          step,
  input  logic          wrap,
  output logic [AW-1:0] addr
);
  logic [AW-1:0] row, si, so;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0;
      row  <= '0;
      si   <= '0;
      so   <= '0;
    end else if (load) begin
      addr <= base;
      row  <= base;
      si   <= s_in;
      so   <= s_out;
    end else if (step) begin
      if (wrap) begin
        addr <= row + so;
        row  <= row + so;
      end else begin
        addr <= addr + si;
      end
    end
  end
endmodule
