// nn_executor: a binary MLP executor built from a chain of layer blocks.
//
// NUM_LAYERS bnn_block instances ("Block 1 .. Block K" in the paper's
// executor figure) are chained: block k takes its n inputs from the output
// register of block k-1. LAYER_SIZE lists the input width followed by the
// neuron count of every layer; the default 256-32-16-2 is the network of the
// paper's traffic-classification and anomaly-detection use cases. All blocks
// share one weight_mem; layer k's rows start right after those of layer k-1
// (base address = sum of the rows of the earlier layers). Because the memory
// has one read port, the blocks run one after the other and the executor
// holds one inference at a time, as the paper's single executor "serially
// processes NNs one after the other".
//
// Interface: a valid/ready input (in_vec, low LAYER_SIZE[0] bits used, and an
// opaque context word in_ctx that is returned with the result); a valid/ready
// output (out_vec, low LAYER_SIZE[NUM_LAYERS] bits, upper bits zero, and
// out_ctx); a write port to load weight rows. in_ready is high only while
// idle. Timing: a layer of R rows takes 2R+4 cycles, so the default network
// gives out_valid 83 cycles after the input is accepted, and a new input
// can be accepted every 84 cycles when the output is taken at once.
//
// The layer chaining, shared memory and parameterisation by layer sizes
// follow the paper; the handshakes, the context word and the memory map are
// this design's choices.
module nn_executor
  import n3ic_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 3,
  parameter int unsigned LAYER_SIZE [NUM_LAYERS+1] = '{256, 32, 16, 2},
  parameter int unsigned ROW_WIDTH  = ROW_W,
  parameter int unsigned DEPTH      = 256,
  parameter int unsigned CTX_W      = 1,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // inference request
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [ROW_WIDTH-1:0] in_vec,
  input  logic [CTX_W-1:0]     in_ctx,
  // inference result
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [ROW_WIDTH-1:0] out_vec,
  output logic [CTX_W-1:0]     out_ctx,
  // weight loading
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [ROW_WIDTH-1:0] wr_data,
  output logic                 busy
);

  // Rows used by a layer; NPR = ROW_WIDTH / n neurons share one row.
  function automatic int unsigned rows_of(int unsigned k);
    int unsigned npr;
    npr = ROW_WIDTH / LAYER_SIZE[k];
    return (LAYER_SIZE[k+1] + npr - 1) / npr;
  endfunction

  function automatic int unsigned base_of(int unsigned k);
    int unsigned b;
    b = 0;
    for (int unsigned i = 0; i < k; i++) b += rows_of(i);
    return b;
  endfunction

  // ----------------------------------------------------------- controller
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  logic [NUM_LAYERS-1:0] blk_start, blk_done;
  logic [ROW_WIDTH-1:0]  blk_out [NUM_LAYERS];   // zero-extended outputs
  logic [NUM_LAYERS-1:0] blk_rd_en;
  logic [AW-1:0]         blk_rd_addr [NUM_LAYERS];
  logic [ROW_WIDTH-1:0]  mem_rd_data;
  logic                  mem_rd_en;
  logic [AW-1:0]         mem_rd_addr;
  logic                  accept;

  assign in_ready  = (state == S_IDLE);
  assign accept    = in_valid && in_ready;
  assign out_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);
  assign out_vec   = blk_out[NUM_LAYERS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      out_ctx <= '0;
    end else begin
      case (state)
        S_IDLE: if (accept) begin
          state   <= S_RUN;
          out_ctx <= in_ctx;
        end
        S_RUN:  if (blk_done[NUM_LAYERS-1]) state <= S_OUT;
        S_OUT:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Block 0 starts on an accepted request, block k when block k-1 is done.
  always_comb begin
    blk_start[0] = accept;
    for (int k = 1; k < NUM_LAYERS; k++) blk_start[k] = blk_done[k-1];
  end

  // ---------------------------------------------------------- layer blocks
  for (genvar k = 0; k < NUM_LAYERS; k++) begin : g_layer
    localparam int unsigned N = LAYER_SIZE[k];
    localparam int unsigned M = LAYER_SIZE[k+1];
    logic [N-1:0] x;
    logic [M-1:0] y;

    if (k == 0) begin : g_first
      assign x = in_vec[N-1:0];
    end else begin : g_next
      assign x = blk_out[k-1][N-1:0];
    end

    bnn_block #(
      .N_IN      (N),
      .M_OUT     (M),
      .ROW_WIDTH (ROW_WIDTH),
      .DEPTH     (DEPTH),
      .BASE_ADDR (base_of(k))
    ) u_block (
      .clk     (clk),
      .rst_n   (rst_n),
      .start   (blk_start[k]),
      .in_vec  (x),
      .busy    (),
      .done    (blk_done[k]),
      .out_vec (y),
      .rd_en   (blk_rd_en[k]),
      .rd_addr (blk_rd_addr[k]),
      .rd_data (mem_rd_data)
    );

    assign blk_out[k] = ROW_WIDTH'(y);
  end

  // Only one block reads at a time, so the read port is an OR of the
  // requests gated by their enables.
  always_comb begin
    mem_rd_en   = |blk_rd_en;
    mem_rd_addr = '0;
    for (int k = 0; k < NUM_LAYERS; k++)
      if (blk_rd_en[k]) mem_rd_addr |= blk_rd_addr[k];
  end

  weight_mem #(
    .ROW_WIDTH (ROW_WIDTH),
    .DEPTH     (DEPTH)
  ) u_wmem (
    .clk     (clk),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_data (wr_data),
    .rd_en   (mem_rd_en),
    .rd_addr (mem_rd_addr),
    .rd_data (mem_rd_data)
  );

  if (base_of(NUM_LAYERS) > DEPTH) begin : g_chk_depth
    $error("nn_executor: the network does not fit in the weight memory");
  end

  // At most one block may read the shared weight memory in a cycle.
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(blk_rd_en))
    else $error("nn_executor: two layer blocks read the weight memory at once");

  // The result must stay stable while it waits for out_ready.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_vec))
    else $error("nn_executor: result changed before it was taken");

endmodule
