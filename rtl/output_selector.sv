// output_selector: delivery of an inference result.
//
// Depending on the destination recorded with the request, the NN result is
// either returned to the forwarding module as a packet field (with the
// request's tag, so the packet can be matched) or written to a location of
// NIC memory, e.g. next to the flow's statistics. When both the input and
// the output go through packet fields the executor works inline on the
// packet; otherwise it works on memory in the background.
//
// Timing: the result is taken (r_ready) in the cycle it is offered unless a
// packet result is still waiting for pr_ready. A memory write is a one-cycle
// pulse on mwr_en the cycle after the result is taken; a packet result is
// held on pr_valid from the cycle after until pr_ready.
//
// The two destinations follow the paper's logical architecture; the tag,
// handshakes and timing are this design's own.
module output_selector
  import n3ic_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // from the NN executor
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [ROW_W-1:0]  r_vec,
  input  nn_ctx_t           r_ctx,
  // packet-field result, to the forwarding module
  output logic              pr_valid,
  input  logic              pr_ready,
  output logic [ROW_W-1:0]  pr_data,
  output logic [TAG_W-1:0]  pr_tag,
  // NIC memory write port
  output logic              mwr_en,
  output logic [MEM_AW-1:0] mwr_addr,
  output logic [ROW_W-1:0]  mwr_data
);

  logic take;

  assign r_ready = !pr_valid || pr_ready;
  assign take    = r_valid && r_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr_valid <= 1'b0;
      pr_data  <= '0;
      pr_tag   <= '0;
      mwr_en   <= 1'b0;
      mwr_addr <= '0;
      mwr_data <= '0;
    end else begin
      mwr_en <= 1'b0;
      if (pr_valid && pr_ready) pr_valid <= 1'b0;
      if (take) begin
        if (r_ctx.dst == DST_MEM) begin
          mwr_en   <= 1'b1;
          mwr_addr <= r_ctx.out_addr;
          mwr_data <= r_vec;
        end else begin
          pr_valid <= 1'b1;
          pr_data  <= r_vec;
          pr_tag   <= r_ctx.tag;
        end
      end
    end
  end

  a_pr_stable: assert property (@(posedge clk) disable iff (!rst_n)
      pr_valid && !pr_ready |=> pr_valid && $stable(pr_data) && $stable(pr_tag))
    else $error("output_selector: packet result changed before it was taken");

endmodule
