// exec_pool: NUM_EXEC NN executors working in parallel behind one request
// port and one result port.
//
// Each executor is a complete nn_executor with its own weight memory. The
// weight-load port is broadcast, so every memory holds the same network. A
// request goes to the lowest-numbered idle executor, so requests are only
// refused when every executor is busy. Results are collected round-robin.
// An executor holds its result until it is taken, and a result that is waiting
// for out_ready keeps its grant, so the result port follows valid/ready rules.
// Results can leave in a different order from the requests; the context word
// (tag) identifies them.
//
// Interface and timing are those of nn_executor: dispatch and collection
// are combinational, so one executor's latency is unchanged (83 cycles for
// the default network). The throughput is NUM_EXEC times that of one
// executor, as long as requests arrive fast enough.
//
// From the paper: several executors in parallel to raise throughput, each
// with a dedicated weight memory, with latency unaffected by their number;
// its main configuration, and the default here, is a single executor. The
// dispatch and collection policies are this design's own.
module exec_pool
  import n3ic_pkg::*;
#(
  parameter int unsigned NUM_EXEC   = 1,
  parameter int unsigned NUM_LAYERS = 3,
  parameter int unsigned LAYER_SIZE [NUM_LAYERS+1] = '{256, 32, 16, 2},
  parameter int unsigned ROW_WIDTH  = ROW_W,
  parameter int unsigned DEPTH      = 256,
  parameter int unsigned CTX_W      = 1,
  localparam int unsigned AW        = $clog2(DEPTH),
  localparam int unsigned EW        = (NUM_EXEC > 1) ? $clog2(NUM_EXEC) : 1
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
  // weight loading, broadcast to every executor
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [ROW_WIDTH-1:0] wr_data,
  output logic                 busy
);

  logic [NUM_EXEC-1:0]  e_in_valid, e_in_ready, e_out_valid, e_out_ready, e_busy;
  logic [ROW_WIDTH-1:0] e_out_vec [NUM_EXEC];
  logic [CTX_W-1:0]     e_out_ctx [NUM_EXEC];

  for (genvar e = 0; e < NUM_EXEC; e++) begin : g_exec
    nn_executor #(
      .NUM_LAYERS (NUM_LAYERS),
      .LAYER_SIZE (LAYER_SIZE),
      .ROW_WIDTH  (ROW_WIDTH),
      .DEPTH      (DEPTH),
      .CTX_W      (CTX_W)
    ) u_exec (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (e_in_valid[e]),
      .in_ready  (e_in_ready[e]),
      .in_vec    (in_vec),
      .in_ctx    (in_ctx),
      .out_valid (e_out_valid[e]),
      .out_ready (e_out_ready[e]),
      .out_vec   (e_out_vec[e]),
      .out_ctx   (e_out_ctx[e]),
      .wr_en     (wr_en),
      .wr_addr   (wr_addr),
      .wr_data   (wr_data),
      .busy      (e_busy[e])
    );
  end

  // ------------------------------------------------------------ dispatch
  // The request goes to the lowest-numbered idle executor.
  always_comb begin
    e_in_valid = '0;
    for (int e = NUM_EXEC - 1; e >= 0; e--) begin
      if (e_in_ready[e]) e_in_valid = NUM_EXEC'(in_valid) << e;
    end
  end

  assign in_ready = |e_in_ready;
  assign busy     = |e_busy;

  // ---------------------------------------------------------- collection
  // Round-robin from the executor after the last one served; a grant that
  // is waiting for out_ready is held.
  logic [EW-1:0] ptr, pick, sel, held_sel;
  logic          held, found;

  always_comb begin
    pick  = '0;
    found = 1'b0;
    for (int i = 0; i < NUM_EXEC; i++) begin
      int unsigned e;
      e = (int'(ptr) + i) % NUM_EXEC;
      if (!found && e_out_valid[e]) begin
        pick  = EW'(e);
        found = 1'b1;
      end
    end
    sel = held ? held_sel : pick;
  end

  assign out_valid = held || found;
  assign out_vec   = e_out_vec[sel];
  assign out_ctx   = e_out_ctx[sel];

  always_comb begin
    e_out_ready = '0;
    e_out_ready[sel] = out_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr      <= '0;
      held     <= 1'b0;
      held_sel <= '0;
    end else if (out_valid) begin
      if (out_ready) begin
        held <= 1'b0;
        ptr  <= (int'(sel) == NUM_EXEC - 1) ? '0 : sel + 1'b1;
      end else begin
        held     <= 1'b1;
        held_sel <= sel;
      end
    end
  end

  // A request goes to at most one executor.
  a_one_dispatch: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0(e_in_valid))
    else $error("exec_pool: request sent to two executors");

  // A held grant points at an executor that still has its result.
  a_held_valid: assert property (@(posedge clk) disable iff (!rst_n)
      held |-> e_out_valid[held_sel])
    else $error("exec_pool: held result vanished");

  // The result must stay stable while it waits for out_ready.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_vec) && $stable(out_ctx))
    else $error("exec_pool: result changed before it was taken");

endmodule
