// hisepq_pkg: types and constants shared by the quantum vector control processor.
//
// The instruction fields follow the quantum RVV extension: every quantum
// instruction uses the OP-V major opcode (7'b1010111); funct3 selects the class
// (000 single-qubit, 001 two-qubit pair, 010 global rotation, 011 per-qubit
// rotation); bits [31:25] hold the 7-bit GateID; bits [11:7] hold the 5-bit
// Blk_imm scheduling delay. The gate identifiers H/CNOT/MEASURE/RESUME are the
// values used by the Bell-state example program. The struct layouts below
// (decoded op, unpacked element, quantum event) are this design's own choice.
package hisepq_pkg;

  localparam int unsigned XLEN      = 32;
  localparam int unsigned NVREG     = 32;   // v0..v31
  localparam int unsigned ID_W      = 4;    // offload instruction id width
  localparam int unsigned QID_W     = 8;    // physical qubit index width (256 qubits)
  localparam int unsigned PARAM_W   = 32;   // scalar tag / fixed-point angle
  localparam int unsigned VL_W      = 9;    // holds 0..256 elements

  localparam logic [6:0] OPC_OPV    = 7'b1010111;
  localparam logic [6:0] OPC_LOADFP = 7'b0000111;

  localparam logic [6:0] GATE_H      = 7'h64;
  localparam logic [6:0] GATE_CNOT   = 7'h66;
  localparam logic [6:0] GATE_MEAS   = 7'h68;
  localparam logic [6:0] GATE_RESUME = 7'h78;

  // Instruction class after decode.
  typedef enum logic [2:0] {
    OP_NONE    = 3'd0,
    OP_VSETVLI = 3'd1,
    OP_VLOAD   = 3'd2,
    OP_QSINGLE = 3'd3,
    OP_QPAIR   = 3'd4,
    OP_QROTG   = 3'd5,
    OP_QROTV   = 3'd6
  } op_class_e;

  // Element width code, as in vtype.vsew.
  typedef enum logic [1:0] {
    SEW8  = 2'd0,
    SEW16 = 2'd1,
    SEW32 = 2'd2,
    SEW64 = 2'd3
  } sew_e;

  // Decoded vector/quantum instruction as it travels from decode to execution.
  typedef struct packed {
    op_class_e          cls;
    logic [ID_W-1:0]    id;       // offload id, returned with the result
    logic [6:0]         gate;     // GateID (funct7)
    logic [4:0]         vd;       // vd / Blk_imm field [11:7]
    logic [4:0]         vs1;      // [19:15]
    logic [4:0]         vs2;      // [24:20]
    logic [XLEN-1:0]    scalar;   // rs2 value (tag or global angle) / rs1 address for loads
    logic [VL_W-1:0]    vl;       // active vector length captured at decode
    sew_e               sew;      // active SEW (loads: element width of the load)
    logic               is_meas;  // measurement instruction (halt-resume protocol)
  } vop_t;

  // One unpacked element of a quantum instruction.
  typedef struct packed {
    op_class_e          cls;
    logic [6:0]         gate;
    logic [4:0]         blk;
    logic [15:0]        q0;       // target (single/rot) or control (pair) index
    logic [15:0]        q1;       // pair target index
    logic [PARAM_W-1:0] param;    // scalar tag, global angle or per-qubit angle
    logic               first;
    logic               last;
    logic               is_meas;
  } qelem_t;

  // Quantum event handed to the back end (one per element).
  typedef struct packed {
    op_class_e          op_type;
    logic [6:0]         gate;
    logic [4:0]         blk;
    logic [15:0]        q0;
    logic [15:0]        q1;
    logic [PARAM_W-1:0] param;
    logic               first;
    logic               last;
    logic               is_meas;
    logic [7:0]         seq;      // instruction sequence number, added by the adapter
  } qevent_t;

  // Role of a qubit in a dispatched gate.
  typedef enum logic [1:0] {
    ROLE_SINGLE = 2'd0,
    ROLE_CTRL   = 2'd1,
    ROLE_TGT    = 2'd2
  } qrole_e;

  // Entry of a per-qubit timed FIFO.
  typedef struct packed {
    logic [6:0]         gate;
    qrole_e             role;
    logic [QID_W-1:0]   partner;
    logic [PARAM_W-1:0] param;
  } qfire_t;

endpackage
