// domino_pkg -- types and constants shared by the Domino tile routers.
//
// Domino is a mesh of identical tiles; each tile has a router for input
// feature maps (Rifm), a compute-in-memory crossbar (PE) and a router for
// output feature maps and partial sums (Rofm). Packets on the mesh carry
// payload only (8-bit lanes), no header; the routers are steered by local
// configuration (Rifm) and by a 16-bit instruction schedule table (Rofm).
//
// The 16-bit instruction layout follows the paper's instruction table:
//   [15:11] Rx control  [10:7] Sum  [6:5] Buffer  [4:1] Tx control  [0] opcode
// (C-type, opcode 0), and for M-type (opcode 1) bits [10:5] are one Func
// field. The meaning of the individual bits inside each field is this
// design's own encoding; the paper gives only field names and widths:
//   Rx   [4]   receive from a neighbour port into input register 0
//        [3:2] which port (dir_e) for that receive
//        [1]   receive the PE result into input register 1
//        [0]   receive the Rifm shortcut into input register 1 (wins over [1])
//   Sum  [3]   add input register 0
//        [2]   add input register 1
//        [1]   add the head of the Rofm buffer
//        [0]   push input register 1 (own PE result / shortcut) unchanged
//              instead of the sum
//   Buf  [1]   pop the buffer head      [0] push into the buffer
//   Tx   [3:0] one bit per output port (bit index = dir_e value)
//   Func [5:4] cu_op_e   [3] pool across time (pool register) instead of
//        across in0/in1   [2] first element of a pooling window
//        [1] apply the activation after pooling   [0] unary operand: 0 in0,
//        1 the buffer head, which is then popped
package domino_pkg;

  // Sizes from the paper's evaluated configuration (Table 3).
  localparam int unsigned LANE_W      = 8;    // 8-bit activations/weights
  localparam int unsigned INST_W      = 16;   // instruction length
  localparam int unsigned TABLE_DEPTH = 128;  // schedule table 16b x 128
  localparam int unsigned SHIFT_STEP  = 64;   // Rifm block-shift granularity (rows)

  // Mesh directions; the value is the port index everywhere.
  typedef enum logic [1:0] {
    DIR_E = 2'd0,
    DIR_W = 2'd1,
    DIR_N = 2'd2,
    DIR_S = 2'd3
  } dir_e;

  typedef enum logic {
    OPC_C = 1'b0,   // convolution-type: sums and buffer
    OPC_M = 1'b1    // miscellaneous: activation, pooling
  } opc_e;

  // Computation unit operations (Act., Cmp., Mul., Bp. in the tile figure).
  typedef enum logic [1:0] {
    CU_BYPASS = 2'd0,
    CU_ACT    = 2'd1,
    CU_MAX    = 2'd2,
    CU_AVG    = 2'd3
  } cu_op_e;

  typedef struct packed {
    logic       port_en;
    dir_e       port_dir;
    logic       pe_en;
    logic       sc_en;
  } rx_ctl_t;

  typedef struct packed {
    logic use_in0;
    logic use_in1;
    logic use_buf;
    logic push_raw;
  } sum_ctl_t;

  typedef struct packed {
    logic pop;
    logic push;
  } buf_ctl_t;

  typedef struct packed {
    cu_op_e op;
    logic   temporal;
    logic   first;
    logic   act_after;
    logic   operand;
  } func_t;

  typedef struct packed {
    rx_ctl_t    rx;
    sum_ctl_t   sum;
    buf_ctl_t   bufc;
    logic [3:0] tx;
    opc_e       opc;
  } inst_c_t;

  typedef struct packed {
    rx_ctl_t    rx;
    func_t      func;
    logic [3:0] tx;
    opc_e       opc;
  } inst_m_t;

  // Targets of the configuration bus used in the initialisation stage.
  typedef enum logic [1:0] {
    CFG_PE_WEIGHT  = 2'd0,   // addr = crossbar row, data = one row of weights
    CFG_ROFM_TABLE = 2'd1,   // addr = table index, data[15:0] = instruction
    CFG_ROFM_REG   = 2'd2,   // data = rofm_cfg_t
    CFG_RIFM_REG   = 2'd3    // data = rifm_cfg_t
  } cfg_target_e;

  // Rifm static configuration. Packets received are counted in a
  // column counter (wraps at col_len) and a row counter (wraps at row_len);
  // the MAC is enabled when both lie inside their [lo, hi] windows.
  typedef struct packed {
    dir_e        rx_dir;      // port the input stream arrives on
    logic        rx_en;       // accept packets at all
    logic [3:0]  tx_mask;     // ports the stream is forwarded to
    logic        sc_en;       // also hand the packet to Rofm (shortcut)
    logic        mac_en;      // PE computes for packets in the window
    logic [2:0]  shift_units; // 0: replace buffer; k: shift in k*64 rows
    logic [15:0] col_len;
    logic [15:0] col_lo;
    logic [15:0] col_hi;
    logic [15:0] row_len;
    logic [15:0] row_lo;
    logic [15:0] row_hi;
  } rifm_cfg_t;

  // Rofm static configuration.
  typedef struct packed {
    logic [7:0] period;     // schedule period p, 1..TABLE_DEPTH
    logic [7:0] avg_mul;    // average-pooling multiplier (e.g. 64 = 1/4)
    logic [3:0] avg_shift;  // right shift after the multiply
  } rofm_cfg_t;

  // Signed 8-bit saturation.
  function automatic logic [LANE_W-1:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return 8'h80;
    else                    return v[LANE_W-1:0];
  endfunction

endpackage
