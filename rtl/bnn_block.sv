// bnn_block: one binary fully connected layer of the NN executor.
//
// The block computes m = M_OUT output bits from n = N_IN input bits. Neuron i
// outputs 1 when popcount(XNOR(w_i, x)) >= N_IN/2, as in the paper's FC
// processing function (Algorithm 1). Its weights are read row by row from the
// executor's shared weight memory; a 256-bit row carries NPR = floor(256/n)
// weight vectors, so NPR neurons are evaluated in parallel and a layer takes
// ceil(m/NPR) rows. Neuron r*NPR+j uses bits [j*n +: n] of row BASE_ADDR+r.
//
// Pipeline, after the paper's three stages (Fig. 10):
//   read     rd_en/rd_addr issued; weight memory registers the row
//   stage 1  weight buffer holds the row (2nd cycle of the 2-cycle read);
//            XNOR with the replicated input, result into the XNOR register
//   stage 2  n/8 popcount lookup tables per neuron, counts registered
//   stage 3  counts summed, sign threshold applied, the neuron's bit set in
//            the m-bit output register
// One row is read every 2 clock cycles (the paper: "each row can be read in 2
// clock cycles"); reads do not overlap. A layer of R rows finishes 2R+4 cycles
// after start.
//
// Interface: pulse start for one cycle while idle; in_vec is sampled then.
// busy is high until done, a one-cycle pulse in which out_vec already holds
// the final result; out_vec then holds until the next start. The memory port
// expects read data one cycle after rd_en.
//
// From the paper: 256-bit rows, XNOR/popcount/sign, 8-bit LTs, the three
// stages, several neurons per row. This design's choices: the register
// placement inside each stage, the packing of weight vectors in a row, the
// threshold N_IN/2 on the n real bits (no padding bits counted), and the
// start/busy/done handshake.
module bnn_block
  import n3ic_pkg::*;
#(
  parameter int unsigned N_IN      = 256,
  parameter int unsigned M_OUT     = 32,
  parameter int unsigned ROW_WIDTH = ROW_W,
  parameter int unsigned DEPTH     = 256,
  parameter int unsigned BASE_ADDR = 0,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N_IN-1:0]      in_vec,
  output logic                 busy,
  output logic                 done,
  output logic [M_OUT-1:0]     out_vec,
  output logic                 rd_en,
  output logic [AW-1:0]        rd_addr,
  input  logic [ROW_WIDTH-1:0] rd_data
);

  localparam int unsigned NPR  = ROW_WIDTH / N_IN;          // neurons per row
  localparam int unsigned ROWS = (M_OUT + NPR - 1) / NPR;   // rows of the layer
  localparam int unsigned LPN  = (N_IN + LT_W - 1) / LT_W;  // LTs per neuron
  localparam int unsigned SEG  = LPN * LT_W;                // padded fan-in
  localparam int unsigned CW   = $clog2(N_IN + 1);          // popcount width
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned THR  = N_IN / 2;                  // sign threshold

  if (N_IN > ROW_WIDTH || N_IN == 0) begin : g_chk_nin
    $error("bnn_block: N_IN must be between 1 and ROW_WIDTH");
  end
  if (BASE_ADDR + ROWS > DEPTH) begin : g_chk_depth
    $error("bnn_block: layer does not fit in the weight memory");
  end

  // ---------------------------------------------------------------- control
  logic [N_IN-1:0] x_q;        // input register (the block's "n" input)
  logic [RW-1:0]   issue_row;  // next row to read
  logic            issuing;    // rows remain to be read
  logic            gap;        // second cycle of a 2-cycle row read

  assign rd_en   = issuing && !gap;
  assign rd_addr = AW'(BASE_ADDR) + AW'(issue_row);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      issuing   <= 1'b0;
      gap       <= 1'b0;
      issue_row <= '0;
      x_q       <= '0;
    end else if (start && !busy) begin
      busy      <= 1'b1;
      issuing   <= 1'b1;
      gap       <= 1'b0;
      issue_row <= '0;
      x_q       <= in_vec;
    end else begin
      if (issuing) begin
        gap <= !gap;
        if (rd_en) begin
          if (issue_row == RW'(ROWS - 1)) issuing <= 1'b0;
          else                            issue_row <= issue_row + 1'b1;
        end
      end
      if (done) busy <= 1'b0;
    end
  end

  // ---------------------------------------------------- pipeline valid/row
  logic          v1, v2, v3, v4;
  logic [RW-1:0] r1, r2, r3, r4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, v4} <= '0;
      {r1, r2, r3, r4} <= '0;
    end else begin
      v1 <= rd_en;  r1 <= issue_row;
      v2 <= v1;     r2 <= r1;
      v3 <= v2;     r3 <= r2;
      v4 <= v3;     r4 <= r3;
    end
  end

  // ---------------------------------------------- stage 1: buffer and XNOR
  logic [ROW_WIDTH-1:0] wbuf;            // weight buffer
  logic [SEG-1:0]       xr [NPR];        // XNOR register, one segment/neuron

  always_ff @(posedge clk) begin
    if (v1) wbuf <= rd_data;
    if (v2) begin
      for (int j = 0; j < NPR; j++)
        xr[j] <= SEG'(~(wbuf[j*N_IN +: N_IN] ^ x_q));  // padding bits are 0
    end
  end

  // ------------------------------------------- stage 2: popcount LTs
  logic [LT_CW-1:0] lt_cnt [NPR][LPN];
  logic [LT_CW-1:0] cnt_q  [NPR][LPN];

  for (genvar j = 0; j < NPR; j++) begin : g_neuron
    for (genvar k = 0; k < LPN; k++) begin : g_lt
      popcnt_lut u_lt (
        .addr  (xr[j][k*LT_W +: LT_W]),
        .count (lt_cnt[j][k])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (v3) cnt_q <= lt_cnt;
  end

  // --------------------------------------- stage 3: ADD, SIGN and output
  logic [CW-1:0] sum [NPR];
  logic [NPR-1:0] sign_bit;

  always_comb begin
    for (int j = 0; j < NPR; j++) begin
      sum[j] = '0;
      for (int k = 0; k < LPN; k++) sum[j] += CW'(cnt_q[j][k]);
      sign_bit[j] = (sum[j] >= CW'(THR));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vec <= '0;
      done    <= 1'b0;
    end else begin
      done <= v4 && (r4 == RW'(ROWS - 1));
      if (start && !busy) begin
        out_vec <= '0;
      end else if (v4) begin
        for (int j = 0; j < NPR; j++) begin
          if (int'(r4) * NPR + j < M_OUT)
            out_vec[int'(r4) * NPR + j] <= sign_bit[j];
        end
      end
    end
  end

  // A new layer may only be started while the block is idle.
  property p_start_idle;
    @(posedge clk) disable iff (!rst_n) start |-> !busy;
  endproperty
  a_start_idle: assert property (p_start_idle)
    else $error("bnn_block: start while busy");

endmodule
