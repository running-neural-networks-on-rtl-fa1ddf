// n3ic_top: BNN inference engine for the data plane of a NIC.
//
// This is the NN-executor side of the N3IC logical architecture: an input
// selector, a binary-MLP executor and an output selector. The packet parser,
// the forwarding module and the NIC memory belong to the surrounding NIC and
// are reached through the ports below:
//   - two trigger ports, one for the packet parser and one for the forwarding
//     module, each a valid/ready handshake carrying an nn_req_t (input source,
//     memory address or packet field, output destination and tag);
//   - a NIC memory read port (data one cycle after mrd_en) for inputs such as
//     flow statistics, and a write port for results stored in memory;
//   - a packet-result port (valid/ready, data and tag) back to the
//     forwarding module;
//   - a weight-load port into the executor's weight memory.
// NUM_EXEC executors (default 1, the paper's main configuration) work in
// parallel behind the selectors, each with its own copy of the weights.
// The NN shape is set by NUM_LAYERS and LAYER_SIZE; the default 256-32-16-2
// binary MLP is the network of the paper's traffic-classification and
// anomaly-detection use cases. With the default network a trigger whose
// input and output are packet fields has its result on pr_valid 85 cycles
// after the trigger is accepted (0.425 us at the paper's 200 MHz FPGA
// clock); an input read from memory adds one cycle. One inference runs at
// a time per executor, and back to back one executor completes one every
// 84 cycles.
//
// The structure follows the paper; the port protocols and the timing above
// are this design's own.
module n3ic_top
  import n3ic_pkg::*;
#(
  parameter int unsigned NUM_EXEC   = 1,
  parameter int unsigned NUM_LAYERS = 3,
  parameter int unsigned LAYER_SIZE [NUM_LAYERS+1] = '{256, 32, 16, 2},
  parameter int unsigned DEPTH      = 256,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // trigger from the packet parser
  input  logic              p_valid,
  output logic              p_ready,
  input  nn_req_t           p_req,
  // trigger from the forwarding module
  input  logic              f_valid,
  output logic              f_ready,
  input  nn_req_t           f_req,
  // NIC memory
  output logic              mrd_en,
  output logic [MEM_AW-1:0] mrd_addr,
  input  logic [ROW_W-1:0]  mrd_data,
  output logic              mwr_en,
  output logic [MEM_AW-1:0] mwr_addr,
  output logic [ROW_W-1:0]  mwr_data,
  // packet-field results, to the forwarding module
  output logic              pr_valid,
  input  logic              pr_ready,
  output logic [ROW_W-1:0]  pr_data,
  output logic [TAG_W-1:0]  pr_tag,
  // weight loading
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [ROW_W-1:0]  wr_data,
  // status
  output logic              busy
);

  localparam int unsigned CTX_W = $bits(nn_ctx_t);

  logic             x_valid, x_ready;
  logic [ROW_W-1:0] x_vec;
  nn_ctx_t          x_ctx;
  logic             r_valid, r_ready;
  logic [ROW_W-1:0] r_vec;
  logic [CTX_W-1:0] r_ctx_bits;

  input_selector u_in_sel (
    .clk      (clk),
    .rst_n    (rst_n),
    .p_valid  (p_valid),
    .p_ready  (p_ready),
    .p_req    (p_req),
    .f_valid  (f_valid),
    .f_ready  (f_ready),
    .f_req    (f_req),
    .mrd_en   (mrd_en),
    .mrd_addr (mrd_addr),
    .mrd_data (mrd_data),
    .x_valid  (x_valid),
    .x_ready  (x_ready),
    .x_vec    (x_vec),
    .x_ctx    (x_ctx)
  );

  exec_pool #(
    .NUM_EXEC   (NUM_EXEC),
    .NUM_LAYERS (NUM_LAYERS),
    .LAYER_SIZE (LAYER_SIZE),
    .ROW_WIDTH  (ROW_W),
    .DEPTH      (DEPTH),
    .CTX_W      (CTX_W)
  ) u_exec (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (x_valid),
    .in_ready  (x_ready),
    .in_vec    (x_vec),
    .in_ctx    (x_ctx),
    .out_valid (r_valid),
    .out_ready (r_ready),
    .out_vec   (r_vec),
    .out_ctx   (r_ctx_bits),
    .wr_en     (wr_en),
    .wr_addr   (wr_addr),
    .wr_data   (wr_data),
    .busy      (busy)
  );

  output_selector u_out_sel (
    .clk      (clk),
    .rst_n    (rst_n),
    .r_valid  (r_valid),
    .r_ready  (r_ready),
    .r_vec    (r_vec),
    .r_ctx    (nn_ctx_t'(r_ctx_bits)),
    .pr_valid (pr_valid),
    .pr_ready (pr_ready),
    .pr_data  (pr_data),
    .pr_tag   (pr_tag),
    .mwr_en   (mwr_en),
    .mwr_addr (mwr_addr),
    .mwr_data (mwr_data)
  );

endmodule
