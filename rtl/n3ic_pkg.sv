// n3ic_pkg: types and constants shared by the binary-neural-network (BNN)
// executor that sits in the data plane of a NIC.
//
// The executor runs binarized multi-layer perceptrons: inputs, weights and
// activations are single bits, a multiply is an XNOR and a dot product is a
// population count compared with half the fan-in. The constants below follow
// the hardware NN executor of the N3IC paper: weight rows are 256 bits wide and
// the population count is built from 8-bit lookup tables. The request and
// result structures are this design's own framing of the "trigger", "input
// selector" and "output selector" of the paper's logical architecture.
package n3ic_pkg;

  // Width of one weight-memory row, and the widest layer input (bits).
  localparam int unsigned ROW_W = 256;
  // Width of the slices fed to the popcount lookup tables.
  localparam int unsigned LT_W  = 8;
  // Width of a lookup table's result (0..8 needs 4 bits).
  localparam int unsigned LT_CW = 4;

  // Where the NN input comes from.
  typedef enum logic {
    SRC_PKT = 1'b0,   // a field of the packet that raised the trigger
    SRC_MEM = 1'b1    // a vector stored in NIC memory (e.g. flow statistics)
  } in_src_e;

  // Where the NN result goes.
  typedef enum logic {
    DST_PKT = 1'b0,   // back to the forwarding module, as a packet field
    DST_MEM = 1'b1    // written to a location of NIC memory
  } out_dst_e;

  localparam int unsigned MEM_AW = 16;  // NIC memory address width (assumed)
  localparam int unsigned TAG_W  = 16;  // request tag returned with a result

  // Sideband that travels with one inference, from trigger to result.
  typedef struct packed {
    out_dst_e            dst;
    logic [MEM_AW-1:0]   out_addr;
    logic [TAG_W-1:0]    tag;
  } nn_ctx_t;

  // One trigger, as raised by the packet parser or the forwarding module.
  typedef struct packed {
    in_src_e             src;
    logic [MEM_AW-1:0]   in_addr;    // used when src == SRC_MEM
    logic [ROW_W-1:0]    pkt_field;  // used when src == SRC_PKT
    nn_ctx_t             ctx;
  } nn_req_t;

  // Number of weight rows a layer with n inputs and m neurons occupies:
  // floor(ROW_W / n) neurons share one row.
  function automatic int unsigned layer_rows(int unsigned n, int unsigned m);
    int unsigned npr;
    npr = ROW_W / n;
    return (m + npr - 1) / npr;
  endfunction

endpackage
