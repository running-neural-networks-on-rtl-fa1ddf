// weight_mem: on-chip weight memory of one NN executor.
//
// The memory is organised as DEPTH rows of ROW_W (256) bits, as in the
// paper's FPGA executor, and is shared by all layer blocks of the executor.
// A row holds the binary weights of one neuron, or of several neurons when
// the layer's fan-in n is small enough: floor(256/n) weight vectors packed
// from bit 0 upwards. The paper reads a row in two clock cycles; here the
// first cycle is this memory's registered read and the second is the weight
// buffer inside the layer block. The write port, used by the control plane
// to load a network, is this design's addition (the paper treats the weights
// as read-only after configuration).
//
// Interface: one write port (wr_en, wr_addr, wr_data) and one read port
// (rd_en, rd_addr); rd_data is valid on the cycle after rd_en and holds its
// value until the next read. A read and a write to the same row in one cycle
// return the old contents. Contents are not reset.
module weight_mem
  import n3ic_pkg::*;
#(
  parameter int unsigned ROW_WIDTH = ROW_W,
  parameter int unsigned DEPTH     = 256,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [ROW_WIDTH-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [ROW_WIDTH-1:0] rd_data
);

  logic [ROW_WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
