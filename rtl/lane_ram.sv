// lane_ram: on-chip buffer used for every weight, BatchNorm, I-LUT and
// feature-map memory of the accelerator.
//
// A row holds LANES words of DW bits. Writes are one word at a time (row
// address plus lane), which is how both the parameter loader and the layer
// engines' result drain fill buffers. Reads return a whole row
// combinationally, so a layer engine with LANES output-channel lanes fetches
// all of its weights for one tap in a single cycle. With LANES = 1 it is a
// plain word memory. The paper keeps all parameters and intermediate maps in
// on-chip BRAM/URAM; the combinational read port is this design's choice and
// maps to distributed RAM (a block-RAM mapping would add one read stage).
module lane_ram #(
  parameter int unsigned LANES = 1,
  parameter int unsigned DW    = 20,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [LW-1:0]         wlane,
  input  logic [AW-1:0]         waddr,
  input  logic [DW-1:0]         wdata,
  input  logic [AW-1:0]         raddr,
  output logic [LANES*DW-1:0]   rdata
);
  logic [LANES-1:0][DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr][(LANES > 1) ? 32'(wlane) : 0] <= wdata;
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;
endmodule
