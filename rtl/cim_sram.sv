// cim_sram: storage array of the floating-point DCiM macro.
//
// ROWS words of WIDTH bits (64 x 32 by default: one FP32 operand per row).
// One write port and one read port, both synchronous to clk: a word written
// at a clock edge can be read from the next cycle on, and rdata shows the
// addressed word one cycle after re. rdata holds its value while re is low.
// The contents are not reset. Written as an array so that synthesis can map
// it to a memory; in a physical flow it stands for a compiled SRAM macro of
// the same organisation. The port set is this design's choice.
module cim_sram #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned WIDTH = 32
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [WIDTH-1:0]        wdata,
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output logic [WIDTH-1:0]        rdata
);

  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
