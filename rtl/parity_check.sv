// parity_check: checks the Z parity equations of one layer after an iteration.
//
// The hard decisions (sign bits of the posteriors) of each circulant of a layer
// arrive one block per cycle, already rotated onto the check lanes (en). The
// running XOR per lane restarts at the layer's first block (first); at its last
// block (last) any lane with odd parity marks the iteration as failed. The
// sticky flag fail is cleared by clear at the start of the check pass. The
// decoder stops when a whole pass ends with fail = 0, the stopping rule the
// paper states ("all parity check nodes are satisfied"); the paper does not say
// how the check is made, so this separate pass is the design's own choice.
module parity_check #(
  parameter int unsigned Z = wrcq_pkg::Z_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic         first,
  input  logic         last,
  input  logic [Z-1:0] hd,
  output logic         fail
);

  logic [Z-1:0] acc;
  logic [Z-1:0] nxt;

  assign nxt = (first ? '0 : acc) ^ hd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      fail <= 1'b0;
    end else begin
      if (en) acc <= nxt;
      if (clear)                 fail <= 1'b0;
      else if (en && last && |nxt) fail <= 1'b1;
    end
  end

endmodule
