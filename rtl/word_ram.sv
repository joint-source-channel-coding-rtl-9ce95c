// word_ram - word-wide message memory of the decoder.
//
// One write port (synchronous) and one read port (asynchronous, data in the
// same cycle). The decoder stores one word of Z lanes per base-matrix column
// (APP memory) or per circulant (C2V memory), so a whole circulant moves in one
// access. The memory organisation and the asynchronous read (distributed RAM
// on an FPGA) are this design's choices; the paper only names a "memory
// array". Contents are not reset; the users initialise what they read.
module word_ram #(
  parameter int W     = 960,
  parameter int DEPTH = 50,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
