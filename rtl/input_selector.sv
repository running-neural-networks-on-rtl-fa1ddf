// input_selector: trigger intake and input selection of the NN executor.
//
// The executor can be triggered by the packet parser (on reception of a
// packet) or by the forwarding module (e.g. when enough packets of a flow
// have been counted). Each trigger names where the NN input comes from: a
// field of the packet, carried in the request, or a vector in NIC memory,
// such as the flow statistics the forwarding module collects. This block
// arbitrates between the two trigger sources, fetches the input from memory
// when asked, and hands the vector with its context to the executor.
//
// Arbitration is round-robin between the two sources. A packet-field input
// is ready on the cycle after the trigger is accepted; a memory input one
// cycle later (the memory read port returns data one cycle after mrd_en).
// While an input waits for the executor (x_valid && !x_ready) no new trigger
// is accepted, so a busy executor back-pressures both trigger sources.
//
// The two trigger sources and the packet-field / memory choice follow the
// paper's logical architecture; the request format, the round-robin
// arbitration, the handshakes and the memory timing are this design's own.
module input_selector
  import n3ic_pkg::*;
(
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
  // NIC memory read port (data one cycle after mrd_en)
  output logic              mrd_en,
  output logic [MEM_AW-1:0] mrd_addr,
  input  logic [ROW_W-1:0]  mrd_data,
  // to the NN executor
  output logic              x_valid,
  input  logic              x_ready,
  output logic [ROW_W-1:0]  x_vec,
  output nn_ctx_t           x_ctx
);

  typedef enum logic [1:0] {S_IDLE, S_MEM, S_HOLD} state_e;
  state_e  state;
  logic    last_f;      // the forwarding module was granted last
  logic    grant_p, grant_f;
  nn_req_t req;

  // Round-robin: a lone requester wins; on a tie the one not served last.
  always_comb begin
    grant_p = 1'b0;
    grant_f = 1'b0;
    if (state == S_IDLE) begin
      if (p_valid && f_valid) begin
        grant_p = last_f;
        grant_f = !last_f;
      end else begin
        grant_p = p_valid;
        grant_f = f_valid;
      end
    end
    req = grant_f ? f_req : p_req;
  end

  assign p_ready  = grant_p;
  assign f_ready  = grant_f;
  assign mrd_en   = (grant_p || grant_f) && (req.src == SRC_MEM);
  assign mrd_addr = req.in_addr;
  assign x_valid  = (state == S_HOLD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      last_f <= 1'b0;
      x_vec  <= '0;
      x_ctx  <= '0;
    end else begin
      case (state)
        S_IDLE: if (grant_p || grant_f) begin
          last_f <= grant_f;
          x_ctx  <= req.ctx;
          if (req.src == SRC_MEM) begin
            state <= S_MEM;
          end else begin
            x_vec <= req.pkt_field;
            state <= S_HOLD;
          end
        end
        S_MEM: begin
          x_vec <= mrd_data;
          state <= S_HOLD;
        end
        S_HOLD: if (x_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_grant: assert property (@(posedge clk) !(grant_p && grant_f))
    else $error("input_selector: both trigger sources granted");

endmodule
