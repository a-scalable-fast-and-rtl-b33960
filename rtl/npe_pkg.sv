// npe_pkg: sizes and shared types of the programmable neural decoder.
//
// The decoder runs a quantised multi-task neural network (3D CNN layers, then
// fully connected layers) on one cycle of surface-code syndrome rounds and turns
// its outputs into data-qubit error positions. Everything here is shared by the
// memories, the control unit, the neural processing engine (NPE) and the error
// combination LUT.
//
// What follows the paper: int8 weights and activations, a three-stage NPE
// (multiply-add, adder tree with taps, special function), a VLIW program with a
// computation slot and a memory-transfer slot, and the LUT size for distance L.
// What is this design's own: the array geometry (NCOL x NMAU x MK multipliers),
// all memory depths, the instruction and layer-descriptor fields and their
// encodings, and the third (control) slot of the instruction word.
package npe_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int NCOL  = 8;            // NPE columns (processing engines)
  localparam int NMAU  = 16;           // multiply-add units per column
  localparam int MK    = 8;            // products per multiply-add unit
  localparam int VEC   = NMAU * MK;    // data operands per pass (shared by all columns)
  localparam int NLANE = NCOL * NMAU;  // SF lanes (max outputs of one pass)
  localparam int LVLW  = $clog2(NMAU) + 1;

  localparam int DW    = 8;            // int8 data, weights, biases
  localparam int MAUW  = 2 * DW + $clog2(MK);        // one MAU sum
  localparam int ATW   = MAUW + $clog2(NMAU);        // full adder-tree sum
  localparam int ACCW  = 32;                         // SF accumulator

  // ---------------------------------------------------------------- memories
  localparam int DREG_DEPTH = 4096;    // data register file, bytes
  localparam int DAW        = $clog2(DREG_DEPTH);
  localparam int WBYTES     = NCOL * VEC;            // bytes in one weight word
  localparam int WMEM_WORDS = 2400;    // 2400 x 1024 B ~ 2.46 M int8 parameters
  localparam int WAW        = $clog2(WMEM_WORDS);
  localparam int BMEM_DEPTH = 4096;    // bias/scale entries
  localparam int BAW        = $clog2(BMEM_DEPTH);
  localparam int IMEM_DEPTH = 1024;
  localparam int IAW        = $clog2(IMEM_DEPTH);
  localparam int NI_DEPTH   = 16;      // layer descriptors
  localparam int NIW        = $clog2(NI_DEPTH);

  // ---------------------------------------------------------------- code
  localparam int L      = 9;                  // largest code distance supported
  localparam int NQ     = L * L;              // data qubits
  localparam int SYN_W  = (NQ - 1) / 2;       // syndrome bits of one type per round
  localparam int AM_MAX = 64;                 // scores compared by one argmax (6-bit piece)

  // ---------------------------------------------------------------- host load
  localparam int HW  = 128;                   // host write data width
  localparam int WLANES = WBYTES * 8 / HW;    // host writes per weight word
  localparam int HAW = 20;

  typedef enum logic [2:0] {
    LD_IMEM = 3'd0,   // addr = instruction index, data[INSTR_W-1:0]
    LD_NI   = 3'd1,   // addr = layer id, data[LINFO_W-1:0]
    LD_WMEM = 3'd2,   // addr = word * WLANES + lane, data = 16 weight bytes
    LD_BMEM = 3'd3,   // addr = entry, data[15:8] = scale, data[7:0] = bias
    LD_LUT  = 3'd4    // addr = row (0: logical operator, k+1: pure error of bit k)
  } ld_target_e;

  typedef struct packed {
    logic              valid;
    ld_target_e        target;
    logic [HAW-1:0]    addr;
    logic [HW-1:0]     data;
  } host_ld_t;

  // ---------------------------------------------------------------- layer descriptor
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_LEAKY = 2'd2} act_e;

  typedef struct packed {
    act_e             act;       // activation
    logic [4:0]       shift;     // requantisation right shift
    logic [4:0]       bshift;    // bias left shift (aligns int8 bias to accumulator)
    logic [2:0]       lshift;    // LeakyReLU slope = 2^-lshift
    logic [LVLW-1:0]  level;     // adder-tree tap: NMAU>>level sums per column
    logic [7:0]       mstride;   // data address step between MAUs
    logic [7:0]       kstride;   // data address step between products of one MAU
    logic [7:0]       n_out;     // outputs written per pass (<= NLANE)
  } layer_info_t;
  localparam int LINFO_W = $bits(layer_info_t);

  // ---------------------------------------------------------------- VLIW word
  typedef enum logic [2:0] {
    C_NOP     = 3'd0,
    C_WAITSYN = 3'd1,   // wait until `rounds` syndrome rounds have arrived
    C_ARGMAX  = 3'd2,   // argmax of 2^am_nbits scores at am_src -> estimated bits
    C_COMBINE = 3'd3,   // XOR LUT rows -> error pattern
    C_END     = 3'd4    // program finished
  } ctrl_op_e;

  typedef struct packed {
    // control slot
    ctrl_op_e          op;
    logic [7:0]        rounds;
    logic [DAW-1:0]    am_src;
    logic [2:0]        am_nbits;
    logic [5:0]        am_bitpos;
    logic              am_lc;      // result is the logical class, not s bits
    // computation slot (NPE scheduler)
    logic              c_valid;
    logic [NIW-1:0]    layer;
    logic [DAW-1:0]    src;
    logic [DAW-1:0]    dst;
    logic [BAW-1:0]    bias_base;
    logic              first;      // first chunk of these neurons
    logic              last;       // last chunk: finish and write back
    logic              wbank;      // weight bank read by this pass
    logic              sync;       // wait for the NPE pipeline to drain first
    // memory-transfer slot (register file manager)
    logic              m_valid;
    logic [WAW-1:0]    waddr;      // weight word to load
    logic              mbank;      // bank it goes to
  } instr_t;
  localparam int INSTR_W = $bits(instr_t);

  // control travelling down the NPE pipeline with one pass
  typedef struct packed {
    layer_info_t       info;
    logic [DAW-1:0]    dst;
    logic [BAW-1:0]    bias_base;
    logic              first;
    logic              last;
  } npe_ctl_t;

endpackage
