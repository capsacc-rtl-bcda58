// capsacc_sram: WORDS x WIDTH memory with one write port and one read port,
// read data registered (one cycle latency). Used for the Data Memory, the
// Weight Memory and the Data, Weight and Routing Buffers. Written as an array:
// the paper names these memories but gives no macro. Contents are not reset.
module capsacc_sram #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned WIDTH = 128,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
