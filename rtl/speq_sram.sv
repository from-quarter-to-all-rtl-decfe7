// speq_sram -- on-chip buffer (W, A and output buffers, and the scale store).
//
// Simple dual-port memory: one write port and one synchronous read port.
// rdata shows the word at raddr one cycle after re; it keeps its value while
// re is low.  A read and a write to the same address in one cycle return the
// old word.  Written as an array so that synthesis maps it to an SRAM macro.
// The paper gives the three 512 KB buffers; word width, depth and the port
// arrangement are chosen by the instantiating top.
module speq_sram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 32768,
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
