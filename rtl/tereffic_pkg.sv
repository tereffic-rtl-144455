// Shared definitions for the ternary LLM inference datapath.
//
// The datapath moves vectors as tiles of LANES int8 elements (256 in the
// reference configuration, the fixed dimension of the ternary matrix core).
// Ternary weights travel decoded as 2-bit codes: 2'b01 = +1, 2'b11 = -1,
// 2'b00 = 0 (the code the decoder produces); 2'b10 is unused and treated as 0.
// Activations are int8 in Q3.4 fixed point, clamped to [-127, 127] wherever
// they are produced so that their negation is again an int8.
//
// The layer controller in the top runs a short program of operations
// (op_t). The operation set is this design's own: it sequences the datapath
// (norm -> matrix core -> activation unit / residual add) one operation at a
// time.
package tereffic_pkg;

  localparam int ACT_W    = 8;   // activation width
  localparam int ACT_FRAC = 4;   // fractional bits of an activation (Q3.4)
  localparam int ACT_MAX  = 127; // symmetric clamp
  localparam int SHIFT_W  = 5;   // requantisation shift field

  typedef logic signed [ACT_W-1:0] act_t;

  // 2-bit ternary weight codes
  localparam logic [1:0] W_POS  = 2'b01;
  localparam logic [1:0] W_NEG  = 2'b11;
  localparam logic [1:0] W_ZERO = 2'b00;

  // Element-wise functions of the activation unit
  typedef enum logic [2:0] {
    FN_ADD  = 3'd0,  // a + b
    FN_SUB  = 3'd1,  // a - b
    FN_MUL  = 3'd2,  // a * b (element-wise "Dot")
    FN_SIG  = 3'd3,  // sigmoid(a)
    FN_ONEM = 3'd4,  // 1 - a
    FN_COPY = 3'd5   // a
  } act_fn_e;

  // Controller operations
  typedef enum logic [2:0] {
    OP_END   = 3'd0,  // stop, pulse done
    OP_LOAD  = 3'd1,  // receive len tiles from the input stream into the output buffer
    OP_NORM  = 3'd2,  // RMSNorm of len tiles (src_a) into the activation buffer
    OP_TMAT  = 3'd3,  // ternary matmul: len input tiles x n_out output tiles -> scratch[dst]
    OP_ACT   = 3'd4,  // element-wise fn over len tiles
    OP_RESID = 3'd5,  // output buffer += scratch[src_a], len tiles
    OP_SEND  = 3'd6   // send len tiles of the output buffer on the output stream
  } opcode_e;

  // Operand spaces
  typedef enum logic [1:0] {
    SP_SCR = 2'd0,  // scratch (matrix-core results, temporaries)
    SP_HID = 2'd1,  // hidden-state buffer, offset by the batch index
    SP_OUT = 2'd2   // output (residual stream) buffer
  } space_e;

  typedef struct packed {
    opcode_e             op;
    act_fn_e             fn;
    space_e              sp_a;    // space of operand a / norm source
    space_e              sp_b;    // space of operand b
    space_e              sp_d;    // space of the destination
    logic [9:0]          a;       // tile address of operand a
    logic [9:0]          b;       // tile address of operand b
    logic [9:0]          d;       // tile address of the destination
    logic [5:0]          len;     // tiles (input tiles for OP_TMAT)
    logic [5:0]          n_out;   // output tiles of OP_TMAT
    logic [15:0]         wbase;   // first weight row (OP_TMAT) or norm-weight tile (OP_NORM)
    logic [SHIFT_W-1:0]  shift;   // requantisation shift of OP_TMAT
  } op_t;

  // Saturate a wide signed value to the symmetric int8 range
  function automatic act_t sat8(input logic signed [31:0] v);
    if (v > ACT_MAX)       return act_t'(ACT_MAX);
    else if (v < -ACT_MAX) return act_t'(-ACT_MAX);
    else                   return act_t'(v);
  endfunction

endpackage
