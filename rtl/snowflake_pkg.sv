// snowflake_pkg: types and constants shared by the Snowflake accelerator.
//
// The data path works on 16-bit fixed-point words; a maps-buffer "line" is
// 256 bits (16 words) and a maps-buffer row is 1024 bits (4 lanes x 1 line).
// MAC products and accumulators are 32 bits. These widths follow the paper.
//
// The 32-bit instruction word is laid out as
//   [31:28] opcode  [27] mode  [26:22] rd  [21:17] rs1  [16:12] rs2  [11:0] imm
// The 4-bit opcode and the mode bit are the paper's; the field positions,
// the opcode numbers, the HALT and WBSET opcodes and the flag bits packed
// into the upper bits of the source registers of vector instructions are this
// design's own choices (the paper does not give an encoding).
//
// Vector instructions leave the control core as a vinstr_t: the opcode, the
// mode bit, both source register values, the immediate and the write-back
// address of every CU. Trace decoders pick out the fields they need.
package snowflake_pkg;

  localparam int WORD_W      = 16;
  localparam int ACC_W       = 32;
  localparam int LINE_WORDS  = 16;
  localparam int LINE_W      = WORD_W * LINE_WORDS;   // 256
  localparam int NLANES      = 4;
  localparam int ROW_W       = LINE_W * NLANES;       // 1024
  localparam int NCHUNK      = ROW_W / 64;            // 16 write enables
  localparam int NMAC        = 16;                    // MACs per vMAC
  localparam int NVMAC       = 4;                     // vMACs per CU
  localparam int NCU_PER_CL  = 4;                     // CUs per cluster
  localparam int WB_DEPTH    = 512;                   // weights per MAC
  localparam int WADDR_W     = $clog2(WB_DEPTH);
  localparam int LADDR_W     = 12;                    // maps line address
  localparam int WBA_W       = 14;                    // 64-bit granule address

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ROW_W-1:0]  row_t;

  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_MOV  = 4'd1,
    OP_ADD  = 4'd2,
    OP_MUL  = 4'd3,
    OP_BGT  = 4'd4,
    OP_BLE  = 4'd5,
    OP_BEQ  = 4'd6,
    OP_LD   = 4'd7,
    OP_ST   = 4'd8,
    OP_MAC  = 4'd9,
    OP_MAX  = 4'd10,
    OP_TMOV = 4'd11,
    OP_VMOV = 4'd12,
    OP_WBSET= 4'd13,
    OP_HALT = 4'd15
  } opcode_e;

  typedef enum logic {MODE_INDP = 1'b0, MODE_COOP = 1'b1} macmode_e;

  // Bit positions inside source-register values of vector instructions.
  localparam int F_CUMASK_LO = 28;  // rs1[31:28]: CU mask (MAC, MAX, VMOV)
  localparam int F_CL_LO     = 26;  // rs1[27:26]: cluster index (MAC, MAX, VMOV)
  localparam int F_LDB       = 16;  // MAC rs2: load bias first
  localparam int F_FIRST     = 17;  // MAC rs2 / MAX rs1: start a new output
  localparam int F_LAST      = 18;  // MAC rs2 / MAX rs1: output after trace
  localparam int F_PRE       = 19;  // MAC rs2: start from VMOV preload
  localparam int F_RELU      = 20;  // MAC rs2: apply ReLU to the output
  localparam int F_CU_LO     = 28;  // LD/ST rs2, TMOV rs1/rs2: CU index
  localparam int F_BUF_LO    = 23;  // LD rs2[27:23]: buffer id

  typedef struct packed {
    opcode_e     op;
    logic        mode;
    logic [31:0] a;      // rs1 value
    logic [31:0] b;      // rs2 value
    logic [11:0] imm;
    logic [15:0][WBA_W-1:0] wb;  // write-back address per global CU
  } vinstr_t;

  // One beat from the MAC trace decoder to the vMACs of a CU.
  typedef enum logic [1:0] {B_MAC = 2'd0, B_BIAS = 2'd1, B_PRE = 2'd2} beat_e;
  typedef struct packed {
    logic              valid;
    beat_e             kind;
    logic              mode;     // macmode_e
    logic              first;    // first beat of an accumulation
    logic              pre;      // start from the preload register
    logic              last;     // hand results to the gather adder
    logic              relu;
    logic [1:0]        vsel;     // B_PRE: target vMAC
    logic [WADDR_W-1:0] waddr;   // weights-buffer address
    line_t             data;     // maps operand(s); INDP: word in [15:0]
    logic [WBA_W-1:0]  wb;       // write-back granule address
  } beat_t;

  // Memory side: 256-bit lines, line addresses.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    line_t       wdata;
  } mem_req_t;

  typedef struct packed {
    logic  valid;
    line_t rdata;
  } mem_rsp_t;

  // A line write into a CU's maps or weights buffer.
  typedef struct packed {
    logic              valid;
    logic [2:0]        buf_id;   // 0 maps, 1..4 weights of vMAC 0..3
    logic [LADDR_W-1:0] addr;    // maps line address or weights address
    line_t             data;
  } bufwr_t;

  // A store line from a CU towards memory.
  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    line_t       data;
  } stline_t;

  // A line moving between CUs of a cluster.
  typedef struct packed {
    logic              valid;
    logic [1:0]        dst;
    logic [LADDR_W-1:0] addr;
    line_t             data;
  } mvline_t;

  function automatic logic signed [WORD_W-1:0] trunc_word(
      input logic signed [ACC_W-1:0] v, input int shift);
    logic signed [ACC_W-1:0] s;
    s = v >>> shift;
    return s[WORD_W-1:0];
  endfunction

endpackage
