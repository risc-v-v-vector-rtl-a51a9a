// rvv_pkg: types and constants shared by the reduced-register RVV vector unit.
//
// The vector unit implements a small Zve64x-style vector coprocessor for a
// 32-bit scalar RISC-V core. Its architectural register file has fewer than
// the 32 registers that RVV 1.0 mandates (16 by default, 8 as the smaller
// option). Everything below is shared between the decoder, the dispatcher,
// the chaining controller and the three functional units (load/store, ALU,
// multiply-accumulate).
//
// A decoded vector instruction travels as a uop_t. Element sizes are coded as
// in the vsew field of vtype (0: 8 bit, 1: 16, 2: 32, 3: 64). The instruction
// subset and its encodings follow the RVV 1.0 specification; the choice of
// subset (the instructions the paper's DSP kernels use plus a few companions)
// is this design's own.
package rvv_pkg;

  localparam int XLEN = 32;          // scalar register width of the host core
  localparam int NFU  = 3;           // number of vector functional units
  localparam int VL_W = 16;          // width of vl and of group counters

  // Major opcodes (RISC-V base encoding)
  localparam logic [6:0] OPC_OPV   = 7'b1010111;
  localparam logic [6:0] OPC_LOADF = 7'b0000111;
  localparam logic [6:0] OPC_STOREF= 7'b0100111;

  // OP-V funct3 categories
  localparam logic [2:0] F3_OPIVV = 3'b000;
  localparam logic [2:0] F3_OPMVV = 3'b010;
  localparam logic [2:0] F3_OPIVI = 3'b011;
  localparam logic [2:0] F3_OPIVX = 3'b100;
  localparam logic [2:0] F3_OPMVX = 3'b110;
  localparam logic [2:0] F3_OPCFG = 3'b111;

  // funct6 values of the supported arithmetic instructions
  localparam logic [5:0] F6_VADD    = 6'b000000;
  localparam logic [5:0] F6_VSUB    = 6'b000010;
  localparam logic [5:0] F6_VRSUB   = 6'b000011;
  localparam logic [5:0] F6_VMINU   = 6'b000100;
  localparam logic [5:0] F6_VMIN    = 6'b000101;
  localparam logic [5:0] F6_VMAXU   = 6'b000110;
  localparam logic [5:0] F6_VMAX    = 6'b000111;
  localparam logic [5:0] F6_VAND    = 6'b001001;
  localparam logic [5:0] F6_VOR     = 6'b001010;
  localparam logic [5:0] F6_VXOR    = 6'b001011;
  localparam logic [5:0] F6_VSLL    = 6'b100101; // OPI category (vmul has the same funct6 in OPM)
  localparam logic [5:0] F6_VSRL    = 6'b101000;
  localparam logic [5:0] F6_VSRA    = 6'b101001;
  localparam logic [5:0] F6_VMERGE  = 6'b010111; // vmv.v.* when vm=1
  localparam logic [5:0] F6_VWADDU  = 6'b110000;
  localparam logic [5:0] F6_VWADD   = 6'b110001;
  localparam logic [5:0] F6_VWADDUW = 6'b110100;
  localparam logic [5:0] F6_VWADDW  = 6'b110101;
  localparam logic [5:0] F6_VWSUBU  = 6'b110010;
  localparam logic [5:0] F6_VWSUB   = 6'b110011;
  localparam logic [5:0] F6_VWSUBUW = 6'b110110;
  localparam logic [5:0] F6_VWSUBW  = 6'b110111;
  localparam logic [5:0] F6_VMUL    = 6'b100101;
  localparam logic [5:0] F6_VMACC   = 6'b101101;
  localparam logic [5:0] F6_VWMACCU = 6'b111100;
  localparam logic [5:0] F6_VWMACC  = 6'b111101;

  typedef enum logic [1:0] {
    FU_LSU = 2'd0,
    FU_ALU = 2'd1,
    FU_MAC = 2'd2
  } fu_e;

  typedef enum logic [4:0] {
    OP_ADD, OP_SUB, OP_RSUB, OP_MV, OP_AND, OP_OR, OP_XOR,
    OP_SLL, OP_SRL, OP_SRA, OP_MIN, OP_MINU, OP_MAX, OP_MAXU,
    OP_WADD, OP_WADDU, OP_WSUB, OP_WSUBU,
    OP_MUL, OP_MACC, OP_WMACC, OP_WMACCU,
    OP_LOAD, OP_STORE
  } op_e;

  // One decoded vector instruction. For loads and stores `scalar` holds the
  // base address and `sew` the memory element width (EEW).
  typedef struct packed {
    fu_e             fu;
    op_e             op;
    logic [1:0]      sew;
    logic [4:0]      vd;        // destination, or store data source (vs3)
    logic [4:0]      vs1;
    logic [4:0]      vs2;
    logic            rd_vs1;    // vs1 is read
    logic            rd_vs2;    // vs2 is read
    logic            rd_vd;     // vd is read (accumulator or store data)
    logic            wr_vd;     // vd is written
    logic            wide_vs2;  // vs2 holds 2*SEW elements (vwadd.w*)
    logic            wide_vd;   // vd holds 2*SEW elements (widening ops)
    logic            use_scalar;// second operand is rs1 / immediate, not vs1
    logic            sign_ext;  // sign-extend narrow operands when widening
    logic [XLEN-1:0] scalar;
    logic [VL_W-1:0] vl;
    logic [VL_W-1:0] ngroups;   // number of DLEN chunks the unit steps through
    logic [3:0]      dregs;     // registers in the destination group
  } uop_t;

  // Observation of the chaining controller, per functional unit.
  typedef struct packed {
    logic [NFU-1:0] go;         // unit processed one chunk group this cycle
    logic [NFU-1:0] chained;    // ... reading a result of a still running older instruction
    logic [NFU-1:0] raw_stall;  // unit waited for an operand not yet written
    logic [NFU-1:0] war_stall;  // unit waited for an older reader before overwriting
    logic           waw_stall;  // dispatch held: destination still written by another unit
    logic           fu_stall;   // dispatch held: target unit still sequencing
  } chain_dbg_t;

  function automatic int unsigned sew_bits(logic [1:0] s);
    return 8 << s;
  endfunction

endpackage
