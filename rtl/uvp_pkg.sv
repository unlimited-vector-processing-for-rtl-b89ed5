// uvp_pkg: types and constants shared by the unlimited-vector-processing (UVP)
// extension. It holds the 64-bit instruction layout, the operation codes the
// decoder produces, and the command structs that the main sequencer sends to
// the lanes and to the element exchange engine (EXE).
//
// The instruction bit fields follow the paper's encoding table exactly
// (funct7, vew, vmask, split 13-bit register heads, funct3, rs_avl, opcode).
// The numeric values of funct3 categories and funct7 operations are this
// design's own choice; the paper only names the fields.
package uvp_pkg;

  localparam int unsigned XLEN   = 32;  // scalar register width of the host core
  localparam int unsigned DW     = 16;  // one VRF slot per lane per register
  localparam int unsigned HEAD_W = 13;  // register head field width
  localparam int unsigned SHW    = 5;   // vshamt width

  localparam logic [6:0] OPC_CUSTOM1 = 7'b0101011;  // symmetric arithmetic
  localparam logic [6:0] OPC_CUSTOM2 = 7'b1011011;  // asymmetric, mask, CSR

  // funct3 categories
  typedef enum logic [2:0] {
    CAT_OPVV  = 3'd0,  // ALU, vector-vector
    CAT_OPVX  = 3'd1,  // ALU, vector-scalar (vs1 field names a scalar register)
    CAT_CMP   = 3'd2,  // compare, result to MRF or VRF
    CAT_CAU   = 3'd3,  // complex arithmetic unit
    CAT_DIV   = 3'd4,  // saturating divider
    CAT_MASK  = 3'd5,  // mask ops and reductions (custom-2)
    CAT_EXE   = 3'd6,  // gather / scatter (custom-2)
    CAT_CSR   = 3'd7   // uvp_vsetcsr (custom-2)
  } cat_e;

  // operation carried to a lane (funct7 values within a category)
  typedef enum logic [4:0] {
    ALU_ADD  = 5'd0,  ALU_SUB  = 5'd1,  ALU_SADD = 5'd2,  ALU_SSUB = 5'd3,
    ALU_AND  = 5'd4,  ALU_OR   = 5'd5,  ALU_XOR  = 5'd6,  ALU_SLL  = 5'd7,
    ALU_SRL  = 5'd8,  ALU_SRA  = 5'd9,  ALU_MIN  = 5'd10, ALU_MAX  = 5'd11,
    ALU_MV   = 5'd12,
    ALU_SEQ  = 5'd16, ALU_SNE  = 5'd17, ALU_SLT  = 5'd18, ALU_SLE  = 5'd19
  } alu_op_e;

  typedef enum logic [2:0] {
    CAU_ADDSUB = 3'd0,  // A +- B
    CAU_ADDMUL = 3'd1,  // (A +- B) x C
    CAU_MULADD = 3'd2,  // A x B +- C
    CAU_MUL    = 3'd3,  // A x B
    CAU_CRE    = 3'd4,  // C x (A - B) + B x (C - D)  (real part)
    CAU_CIM    = 3'd5   // D x (A + B) + B x (C - D)  (imaginary part)
  } cau_op_e;

  // funct7 of CAT_CAU: [0] = subtract, [3:1] = cau_op_e (0..3); 7'd64 = CPLXMUL
  localparam logic [6:0] F7_CPLXMUL = 7'd64;
  // CAT_MASK funct7
  localparam logic [6:0] F7_VMNOT  = 7'd0;
  localparam logic [6:0] F7_REDSUM = 7'd1;
  // CAT_EXE funct7
  localparam logic [6:0] F7_GATHER  = 7'd0;
  localparam logic [6:0] F7_SCATTER = 7'd1;
  // CAT_CSR funct7 = CSR address
  localparam logic [6:0] CSR_VSHAMT  = 7'd0;
  localparam logic [6:0] CSR_VSGLEN  = 7'd1;
  localparam logic [6:0] CSR_VREXTRA = 7'd2;

  // unit a lane command goes to
  typedef enum logic [2:0] {
    LU_ALU   = 3'd0,  // ALU op, result to VRF
    LU_CMP   = 3'd1,  // ALU compare, result to MRF
    LU_CAU   = 3'd2,
    LU_CPLX  = 3'd3,  // complex multiply: real and imaginary uops
    LU_DIV   = 3'd4,
    LU_VMNOT = 3'd5,
    LU_RED   = 3'd6   // intra-lane reduction sum
  } lane_unit_e;

  typedef enum logic [1:0] {
    EX_GATHER  = 2'd0,
    EX_SCATTER = 2'd1,
    EX_REDSUM  = 2'd2
  } exe_op_e;

  // states of the EXE controller
  typedef enum logic [2:0] {
    EXS0_IDLE   = 3'd0,  // idle, pending for a new instruction
    EXS1_DECODE = 3'd1,  // instruction decode
    EXS2_SETCNT = 3'd2,  // set counter and threshold
    EXS3_RDIDX  = 3'd3,  // read index
    EXS4_RDDATA = 3'd4,  // read data
    EXS5_WRDATA = 3'd5,  // write data
    EXS6_END    = 3'd6   // end of execution, commit
  } exe_state_e;

  typedef struct packed {
    logic [6:0]        funct7;
    logic [1:0]        vew;
    logic              vmask;
    logic [HEAD_W-1:0] vd;
    logic [HEAD_W-1:0] vs2;
    logic [HEAD_W-1:0] vs1;
    logic [2:0]        funct3;
    logic [4:0]        rs_avl;
    logic [6:0]        opcode;
  } inst_t;

  // Unpack a 64-bit instruction word (paper's encoding table).
  function automatic inst_t inst_unpack(input logic [63:0] w);
    inst_t i;
    i.funct7 = w[31:25];
    i.vew    = w[24:23];
    i.vmask  = w[22];
    i.vd     = {w[63:52], w[21]};
    i.vs2    = {w[51:42], w[20:18]};
    i.vs1    = {w[41:32], w[17:15]};
    i.funct3 = w[14:12];
    i.rs_avl = w[11:7];
    i.opcode = w[6:0];
    return i;
  endfunction

  function automatic logic [63:0] inst_pack(input inst_t i);
    logic [63:0] w;
    w = '0;
    w[31:25] = i.funct7;  w[24:23] = i.vew;  w[22] = i.vmask;
    {w[63:52], w[21]}    = i.vd;
    {w[51:42], w[20:18]} = i.vs2;
    {w[41:32], w[17:15]} = i.vs1;
    w[14:12] = i.funct3;  w[11:7] = i.rs_avl;  w[6:0] = i.opcode;
    return w;
  endfunction

  // Command broadcast to every lane.
  typedef struct packed {
    lane_unit_e        unit;
    alu_op_e           alu_op;
    cau_op_e           cau_op;
    logic              sub;       // +- selection of the CAU adders
    logic              byte_mode; // vew = char: two 8-bit elements per slot
    logic              vmask;     // predicate with vm
    logic              use_scl;   // operand A is the scalar
    logic [DW-1:0]     scl;
    logic [HEAD_W-1:0] vd;
    logic [HEAD_W-1:0] vs1;
    logic [HEAD_W-1:0] vs2;
    logic [XLEN-1:0]   avl;
    logic [SHW-1:0]    shamt;
  } lane_cmd_t;

  typedef struct packed {
    exe_op_e           op;
    logic              vmask;
    logic [HEAD_W-1:0] vd;
    logic [HEAD_W-1:0] vs1;
    logic [HEAD_W-1:0] vs2;
    logic [XLEN-1:0]   avl;    // length of the operand read element by element
    logic [XLEN-1:0]   sglen;  // vsglen: length of the gathered/scattered side
  } exe_cmd_t;

  // Sign-saturate a wide signed value to 16 bits.
  function automatic logic [15:0] sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'h7fff;
    else if (v < -40'sd32768) return 16'h8000;
    else                      return v[15:0];
  endfunction

  function automatic logic [7:0] sat8(input logic signed [9:0] v);
    if (v > 10'sd127)       return 8'h7f;
    else if (v < -10'sd128) return 8'h80;
    else                    return v[7:0];
  endfunction

endpackage
