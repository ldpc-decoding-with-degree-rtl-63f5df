// msg_ram: simple dual-port synchronous RAM used for the decoder's message
// stores: the posterior memory (one word per block column, Z x b_v bits), the
// C2V message memory (one word per circulant, Z x b_c bits) and the V2C buffer
// of the layer in flight (one word per circulant of a layer, Z x b_v bits).
// One write port and one read port. The read data appears one clock after the
// address (registered output, as in FPGA block RAM); a read of the address being
// written in the same cycle returns the old word. Contents are not reset: the
// decoder writes every word before reading it. The paper names only the stored
// messages; the memory organisation is this design's own.
module msg_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
