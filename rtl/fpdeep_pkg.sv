// fpdeep_pkg -- types and helpers shared by every block of the FPDeep node.
//
// All FPGAs of the cluster talk over point-to-point links that carry one
// packet per beat with a valid/ready handshake. A packet says what it is
// (activation, partial sum, parameter, gradient, error), which layer it
// belongs to, which node it is for (parameters and gradients only), which
// channel and which pixel (or which parameter word) it carries.
//
// Arithmetic: the published design uses single-precision floating point.
// This RTL uses DW-bit two's-complement integers instead (products are
// truncated to DW bits, sums wrap), so that every result is exact and can be
// checked bit for bit. Changing word_t and mul()/add() is all that a
// floating-point version would need.
//
// Origin: the packet fields and counters are this implementation's own;
// FPDeep does not define a link format.
package fpdeep_pkg;

  localparam int DW = 32;                 // data word width
  typedef logic signed [DW-1:0] word_t;

  typedef enum logic [2:0] {
    PKT_ACT   = 3'd0,   // activation: output of layer `layer`, channel ch, pixel addr
    PKT_PSUM  = 3'd1,   // partial output activation of layer `layer` (reduction chain)
    PKT_PARAM = 3'd2,   // parameter word for node dst, word address addr
    PKT_GRAD  = 3'd3,   // gradient sum for a balanced parameter held by node dst
    PKT_ERR   = 3'd4    // error of the output of layer `layer`, channel ch, pixel addr
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e   typ;
    logic [3:0]  layer;
    logic [3:0]  dst;
    logic [11:0] ch;
    logic [15:0] addr;
    word_t       data;
  } pkt_t;

  localparam int PKT_W = $bits(pkt_t);

  // Per-node event counters, brought out so a system can watch each mechanism.
  typedef struct packed {
    logic [31:0] act_bypass;    // activations passed on to the next node
    logic [31:0] act_taken;     // activations kept for the local channel segment
    logic [31:0] psum_added;    // partial sums from the preceding node accumulated
    logic [31:0] relu_clamped;  // outputs set to zero by the SFU
    logic [31:0] fp_windows;    // K x K windows processed by FP
    logic [31:0] eb_windows;    // windows processed by EB
    logic [31:0] pg_windows;    // windows processed by PG
    logic [31:0] err_bypass;    // next-layer errors passed to the preceding node
    logic [31:0] own_err_first; // cycles where own errors went ahead of waiting traffic
    logic [31:0] param_sent;    // balanced parameter words sent
    logic [31:0] param_loaded;  // parameter words written into LPRAM/BPRAM from the link
    logic [31:0] grad_sent;     // gradient words sent back to a parameter holder
    logic [31:0] lpram_updates; // mini-batch updates of the LPRAM
    logic [31:0] bpram_updates; // updates of the BPRAM from returned gradients
    logic [31:0] fwd_stall;     // cycles the forward output was blocked
  } node_stats_t;

  function automatic word_t mul(input word_t a, input word_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return p[DW-1:0];
  endfunction

endpackage
