// rnn_pkg: types and sizes shared by every block of the RISC-NN accelerator.
//
// Instruction word (64 bits): {OP[3:0], F0[15:0], F1[15:0], F2[15:0], CTRL[11:0]}, with
// CTRL = {Sparse PC Inc[7:0], In-DRAM Lookup Type[3:0]}. The field widths and the eleven
// operations follow the paper's ISA table; the opcode numbers and the order of the two CTRL
// sub-fields are this design's choice.
//
// DRAM addresses count 128-bit words (one Operand RAM entry, i.e. one SIMD-8 vector of
// 16-bit lanes). Cache lines hold four such words (64 bytes) and are spread over eight cache
// slices by line address, so slice = addr[4:2].
//
// The Memory and Inter-PE NoCs carry single-flit packets (noc_flit_t) with a 128-bit data
// field; the Control NoC carries 85-bit messages (ctrl_msg_t) downwards and short completion
// reports (ctrl_up_t) upwards. Field layouts of both are this design's choice; the 85-bit and
// 128-bit widths are the paper's.
package rnn_pkg;

  // ---------------- sizes ----------------
  localparam int SIMD    = 8;              // SIMD-8
  localparam int DW      = 16;             // 16-bit lanes
  localparam int VW      = SIMD * DW;      // 128-bit operand entry
  localparam int IW      = 64;             // instruction width
  localparam int PC_W    = 12;             // 8 banks x 512 instructions
  localparam int OA_W    = 11;             // 16 banks x 128 operand entries
  localparam int NUM_EB  = 32;             // ExeBlocks per PE
  localparam int EB_W    = 5;
  localparam int PE_W    = 6;              // up to 64 PEs
  localparam int TASK_W  = 3;
  localparam int NUM_TASK = 8;
  localparam int AW      = 32;             // DRAM word address
  localparam int CW      = 4;              // mesh coordinate width
  localparam int SLICES  = 8;              // cache slices
  localparam int LINE_WORDS = 4;           // 64-byte line = 4 x 128 bit
  localparam int CTRL_MSG_W = 85;
  localparam int NUM_STAGE = 4;            // LD, CAL, FLOW, ST

  // ---------------- ISA ----------------
  typedef enum logic [3:0] {
    OP_LD    = 4'h0,
    OP_ADD   = 4'h1,
    OP_SUB   = 4'h2,
    OP_MUL   = 4'h3,
    OP_MAX   = 4'h4,
    OP_MIN   = 4'h5,
    OP_MADD  = 4'h6,
    OP_PRE0  = 4'h7,
    OP_PRE1  = 4'h8,
    OP_COPY  = 4'h9,
    OP_ST    = 4'hA
  } opcode_e;

  typedef struct packed {
    logic [3:0]  op;
    logic [15:0] f0;
    logic [15:0] f1;
    logic [15:0] f2;
    logic [7:0]  spinc;   // Sparse PC Inc
    logic [3:0]  lut;     // In-DRAM Lookup Type
  } instr_t;

  // bit positions of the Sparse PC Inc field inside the 64-bit word
  localparam int SPINC_LSB = 4;

  typedef enum logic [1:0] { ST_LD = 2'd0, ST_CAL = 2'd1, ST_FLOW = 2'd2, ST_ST = 2'd3 } stage_e;

  // ---------------- NoC flit ----------------
  typedef enum logic [2:0] {
    K_RD    = 3'd0,  // operand read request        (tag = destination OPM address)
    K_WR    = 3'd1,  // operand write request       (lut = lookup type)
    K_IRD   = 3'd2,  // instruction read request    (tag = word index)
    K_RDRSP = 3'd3,  // read data back to a PE      (tag echoed)
    K_WRACK = 3'd4,  // write acknowledgement
    K_IRSP  = 3'd5,  // instruction data back       (tag echoed)
    K_COPY  = 3'd6,  // inter-PE operand copy       (tag = remote OPM address)
    K_ACT   = 3'd7   // ExeBlock activation         (tag = ExeBlock id)
  } kind_e;

  typedef struct packed {
    logic [CW-1:0] dst_x;
    logic [CW-1:0] dst_y;
    logic          to_edge;   // leave through the north edge of row 0 (memory side)
    logic [CW-1:0] src_x;
    logic [CW-1:0] src_y;
    kind_e         kind;
    logic [AW-1:0] addr;
    logic [15:0]   tag;
    logic [3:0]    lut;
    logic [VW-1:0] data;
  } noc_flit_t;

  // ---------------- Control NoC ----------------
  typedef enum logic [2:0] {
    M_EB0    = 3'd0,  // priority, task, #pred, sparse, inst DRAM address
    M_EB1    = 3'd1,  // LD and CAL start/end PCs
    M_EB2    = 3'd2,  // FLOW and ST start/end PCs
    M_EB3    = 3'd3,  // successors; completes the Initialization step
    M_TASK   = 3'd4,  // task enable with LD/ST base addresses (broadcast)
    M_SPARSE = 3'd5   // 64-bit chunk of a sparse vector
  } msg_e;

  typedef struct packed {
    logic [PE_W-1:0] dst_pe;
    logic            bcast;
    msg_e            mtype;
    logic [EB_W-1:0] eb;
    logic [69:0]     payload;
  } ctrl_msg_t;                    // 6+1+3+5+70 = 85 bits

  typedef struct packed {
    logic [PE_W-1:0]   src_pe;
    logic [EB_W-1:0]   eb;
    logic [TASK_W-1:0] task_id;
  } ctrl_up_t;

  typedef struct packed {
    logic            v;
    logic [PE_W-1:0] pe;
    logic [EB_W-1:0] eb;
  } succ_t;

  // cache slice that owns a word address
  function automatic logic [2:0] slice_of(input logic [AW-1:0] a);
    return a[4:2];
  endfunction

endpackage
