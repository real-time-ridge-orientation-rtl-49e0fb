// image_ram: one copy of the Image-RAM, the grey-level image memory.
//
// 2^ADDR_W bytes (64 KB, a 256 x 256 image, by default), address {i, j}.
// One synchronous write port loads the image; two asynchronous read ports
// serve the fetch stage: port a through the offset adders, port b (used on
// one copy only) for the reference pixel f(i,j) itself. The published design
// keeps the image in external memory chips, eight copies of 64 KB each; this
// array stands in for one of them with the same size. Asynchronous reads
// match an external static RAM and let one fetch step take one clock.
module image_ram #(
  parameter int ADDR_W = 16,
  parameter int DATA_W = 8
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [ADDR_W-1:0] ra_addr,
  output logic [DATA_W-1:0] ra_data,
  input  logic [ADDR_W-1:0] rb_addr,
  output logic [DATA_W-1:0] rb_data
);
  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign ra_data = mem[ra_addr];
  assign rb_data = mem[rb_addr];
endmodule
