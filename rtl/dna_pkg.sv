// dna_pkg: types and constants shared by the dual-mode HHE accelerator.
//
// Every buffer word is 64 bits: one RNS-CKKS residue (up to 56 bits), one complex
// number as two 29-bit signed fixed-point halves, or two 28-bit Rubato words.
// Units address buffers through one global space: a 4-bit buffer id and a 16-bit
// word address. Instructions are 128-bit task words; their layout, the buffer id
// map and the configuration register map are this design's own choices.
package dna_pkg;

  localparam int unsigned WORD_W = 64;
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned SA_W   = 40;   // system (DMA) address width

  // Polynomial degree and derived sizes of the main configuration (N = 8192).
  localparam int unsigned N_DEF   = 8192;
  localparam int unsigned LOGN_DEF = 13;

  // Global buffer ids. RAM0/RAM1 each have two banks ("dual backups") that hold
  // the data of two RNS domains; they are addressed as separate buffers.
  typedef enum logic [3:0] {
    B_RAM0A = 4'd0, B_RAM0B = 4'd1, B_RAM1A = 4'd2, B_RAM1B = 4'd3,
    B_RAM2  = 4'd4, B_RAM3  = 4'd5, B_RAM4  = 4'd6, B_RAM5  = 4'd7,
    B_RAM6  = 4'd8, B_RF0   = 4'd9, B_RF1   = 4'd10, B_RF2  = 4'd11,
    B_RAM7  = 4'd12, B_NONE = 4'd15
  } buf_id_e;
  localparam int unsigned NBUF = 13;

  // Cluster of each buffer id: 0 Key BUF0, 1 Message BUF1, 2 Compute BUF2,
  // 3 Regfile BUF3, 4 NIC BUF4.
  function automatic logic [2:0] cluster_of(input logic [3:0] id);
    case (id)
      4'd0, 4'd1, 4'd2, 4'd3:      return 3'd0;
      4'd4:                        return 3'd1;
      4'd5, 4'd6, 4'd7, 4'd8:      return 3'd2;
      4'd9, 4'd10, 4'd11:          return 3'd3;
      default:                     return 3'd4;
    endcase
  endfunction

  typedef struct packed {
    logic                 en;
    logic                 we;
    logic [3:0]           id;
    logic [ADDR_W-1:0]    addr;
    logic [WORD_W-1:0]    wdata;
  } mem_req_t;

  localparam mem_req_t MEM_IDLE = '{en: 1'b0, we: 1'b0, id: 4'd15, addr: '0, wdata: '0};

  typedef enum logic [2:0] {
    U_CFG = 3'd0, U_DAU = 3'd1, U_RSU = 3'd2, U_UCU = 3'd3, U_DTU = 3'd4, U_NIU = 3'd5
  } unit_e;
  localparam int unsigned NUNIT = 5;  // functional units DAU..NIU (index unit-1)

  typedef enum logic [1:0] { F_CKKS = 2'd0, F_CPLX = 2'd1, F_RUB = 2'd2 } field_e;

  // Unit operations (inst_t.op)
  localparam logic [4:0] OP_DAU_RD = 5'd0, OP_DAU_WR = 5'd1;
  localparam logic [4:0] OP_RSU_UNI = 5'd0, OP_RSU_TER = 5'd1, OP_RSU_ERR = 5'd2;
  localparam logic [4:0] OP_UCU_NTT = 5'd0, OP_UCU_INTT = 5'd1, OP_UCU_PWMUL = 5'd4,
                         OP_UCU_PWADD = 5'd5, OP_UCU_PWSUB = 5'd6, OP_UCU_ARK = 5'd8,
                         OP_UCU_MIXCOL = 5'd9, OP_UCU_MIXROW = 5'd10, OP_UCU_FEISTEL = 5'd11;
  localparam logic [4:0] OP_DTU_COPY = 5'd0;
  localparam logic [4:0] OP_NIU_SEND = 5'd0, OP_NIU_RECV = 5'd1;

  // 128-bit task instruction. For U_CFG, op is the register index and the value
  // is {addr_b, addr_c, imm}[63:0]. For the DMA, imm is the system address.
  // In the UCU, field F_CPLX with OP_UCU_NTT/INTT means FFT/IFFT.
  typedef struct packed {
    unit_e             unit;
    logic [4:0]        op;
    field_e            field;
    logic [1:0]        dom;
    logic [3:0]        buf_a;
    logic [3:0]        buf_b;
    logic [3:0]        buf_c;
    logic [ADDR_W-1:0] addr_a;
    logic [ADDR_W-1:0] addr_b;
    logic [ADDR_W-1:0] addr_c;
    logic [15:0]       len;
    logic [39:0]       imm;
  } inst_t;

  // Butterfly-unit operations
  typedef enum logic [2:0] {
    BF_CT = 3'd0, BF_GS = 3'd1, BF_MUL = 3'd2, BF_ADD = 3'd3, BF_SUB = 3'd4, BF_MAC = 3'd5
  } bf_op_e;

  localparam int unsigned NQ   = 4;   // modulus slots
  localparam int unsigned VMAX = 8;   // largest Rubato v (Par-128L)

  typedef struct packed {
    logic [NQ-1:0][55:0]   q;
    logic [NQ-1:0][9:0]    bnd;
    logic [NQ-1:0][11:0]   dprime;
    logic [27:0]           t;
    logic [29:0]           mu_t;
    logic [4:0]            k_t;
    logic [3:0]            v;
    logic [VMAX-1:0][27:0] m0;
    logic [127:0]          nonce;
    logic [15:0]           hdr_words;
    logic [15:0]           seg_words;
    logic [3:0]            log_n;
  } cfg_t;

  // Configuration register map
  localparam logic [4:0] CR_Q = 5'd0, CR_BND = 5'd4, CR_DP = 5'd8, CR_T = 5'd12, CR_MUT = 5'd13,
                         CR_KT = 5'd14, CR_V = 5'd15, CR_M0 = 5'd16, CR_NONCE_LO = 5'd24,
                         CR_NONCE_HI = 5'd25, CR_HDR = 5'd26, CR_SEG = 5'd27, CR_LOGN = 5'd28;

  typedef struct packed {
    logic              we;
    logic [SA_W-1:0]   addr;
    logic [WORD_W-1:0] wdata;
  } dma_req_t;

  typedef struct packed {
    logic [WORD_W-1:0] data;
    logic [7:0]        keep;
    logic              last;
  } nic_flit_t;

endpackage
