// mpu_pkg: types and constants shared by every block of the MPU core.
//
// The numbers that come from the paper's hardware configuration are: 32 SIMT lanes,
// 4 subcores and 4 near-bank units (NBUs) per core, 4 banks per NBU with 4 activated row
// buffers each, 256-bit bank I/O, 16 MB banks, 64 KB shared memory, 128 KB instruction cache,
// 32 KB far-bank and 16 KB near-bank register files, 64-bit TSV data bus per core at twice the
// core clock, and the DRAM timings tRCD/tCCD/tRTP/tRP/tRAS/tRFC/tREFI = 14/2/4/14/33/350/3900.
// Everything else here is this design's own choice: the 64-bit instruction encoding, the
// opcode set (an integer subset of PTX), 8 warps per subcore, the byte-address layout and the
// TSV message format.
package mpu_pkg;

  // ---------------- configuration (paper: Table "hardware configuration") ----------------
  localparam int unsigned LANES        = 32;   // SIMT width
  localparam int unsigned WORD_W       = 32;   // bits per lane
  localparam int unsigned REG_W        = LANES * WORD_W;  // one warp register, 1024 bits
  localparam int unsigned NUM_SUBCORES = 4;    // subcores per core
  localparam int unsigned NUM_NBU      = 4;    // near-bank units per core
  localparam int unsigned NUM_BANKS    = 4;    // banks per NBU
  localparam int unsigned NUM_ROWBUF   = 4;    // activated row buffers (subarrays) per bank
  localparam int unsigned BANK_IO_W    = 256;  // bank I/O width in bits
  localparam int unsigned TSV_BITS_PER_CYCLE = 128; // 64b bus at 2 GHz seen from a 1 GHz core
  localparam int unsigned NUM_CORES    = 16;   // cores per processor

  // ---------------- own choices ----------------
  localparam int unsigned NUM_WARPS    = 8;    // warps per subcore
  localparam int unsigned FB_REGS      = 32;   // 32 KB / (8 warps * 128 B)
  localparam int unsigned NB_REGS      = 16;   // 16 KB / (8 warps * 128 B)
  localparam int unsigned WARP_W       = $clog2(NUM_WARPS);
  localparam int unsigned REG_ID_W     = 5;

  // Byte address inside one processor (4 GB = 16 cores x 4 NBUs x 4 banks x 16 MB):
  //   [31:28] core  [27:26] NBU  [25:24] bank  [23:10] row  [9:5] column  [4:0] byte
  localparam int unsigned ADDR_W = 32;
  typedef logic [ADDR_W-1:0] addr_t;
  function automatic logic [3:0]  addr_core(addr_t a); return a[31:28]; endfunction
  function automatic logic [1:0]  addr_nbu (addr_t a); return a[27:26]; endfunction
  function automatic logic [1:0]  addr_bank(addr_t a); return a[25:24]; endfunction
  function automatic logic [13:0] addr_row (addr_t a); return a[23:10]; endfunction
  function automatic logic [4:0]  addr_col (addr_t a); return a[9:5];   endfunction

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [REG_W-1:0]  vreg_t;          // lane i in bits [32*i +: 32]
  typedef logic [LANES-1:0]  mask_t;

  // ---------------- instruction encoding (own) ----------------
  typedef enum logic [5:0] {
    OP_NOP  = 6'd0,  OP_EXIT = 6'd1,  OP_BRA  = 6'd2,  OP_MOVI = 6'd3,  OP_TID  = 6'd4,
    OP_ADD  = 6'd8,  OP_SUB  = 6'd9,  OP_MUL  = 6'd10, OP_AND  = 6'd11, OP_OR   = 6'd12,
    OP_XOR  = 6'd13, OP_SHL  = 6'd14, OP_SHR  = 6'd15, OP_MIN  = 6'd16, OP_MAX  = 6'd17,
    OP_ADDI = 6'd18, OP_MULI = 6'd19, OP_SLT  = 6'd20, OP_MAD  = 6'd21,
    OP_LDG  = 6'd32, OP_STG  = 6'd33, OP_LDS  = 6'd34, OP_STS  = 6'd35
  } opcode_e;

  typedef enum logic [1:0] { LOC_NONE = 2'd0, LOC_NEAR = 2'd1, LOC_FAR = 2'd2 } loc_e;

  // 64-bit instruction: op | dst | src0 | src1 | location hint | 9 spare | imm
  // LDG dst,[src0+imm]  STG [src0+imm],src1  LDS/STS the same on shared memory.
  // BRA: lanes with src0 != 0 jump to imm[15:0]; both sides reconverge at imm[31:16].
  // MAD: dst = src0 * src1 + dst.
  typedef struct packed {
    opcode_e           op;
    logic [4:0]        dst;
    logic [4:0]        src0;
    logic [4:0]        src1;
    loc_e              hint;
    logic [8:0]        spare;
    logic [31:0]       imm;
  } instr_t;

  function automatic logic is_far_op(opcode_e op);   // far-bank OpCode set
    return op inside {OP_EXIT, OP_BRA, OP_TID, OP_LDG, OP_STG};
  endfunction
  function automatic logic is_smem_op(opcode_e op);
    return op inside {OP_LDS, OP_STS};
  endfunction
  function automatic logic writes_dst(opcode_e op);
    return !(op inside {OP_NOP, OP_EXIT, OP_BRA, OP_STG, OP_STS});
  endfunction
  function automatic logic reads_src0(opcode_e op);
    return !(op inside {OP_NOP, OP_EXIT, OP_MOVI, OP_TID});
  endfunction
  function automatic logic reads_src1(opcode_e op);
    return op inside {OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR,
                      OP_MIN, OP_MAX, OP_SLT, OP_MAD, OP_STG, OP_STS};
  endfunction

  // ---------------- TSV messages (own format) ----------------
  typedef enum logic [3:0] {
    M_NONE      = 4'd0,
    M_OFFLOAD   = 4'd1,  // down: near-bank ALU / ld.shared / st.shared instruction
    M_LDG_OFF   = 4'd2,  // down: offloaded coalesced ld.global (leading address, register)
    M_STG_OFF   = 4'd3,  // down: offloaded coalesced st.global
    M_REG_RD    = 4'd4,  // down: register move, near-bank -> far-bank request
    M_REG_WR    = 4'd5,  // down: register write into the near-bank RF
    M_DRAM_RD   = 4'd6,  // down: one DRAM word read transaction (LSU / LSU-Remote)
    M_DRAM_WR   = 4'd7,  // down: one DRAM word write transaction
    M_DONE      = 4'd8,  // up:   offloaded instruction finished, commit
    M_REG_DATA  = 4'd9,  // up:   register contents for a register move
    M_WR_ACK    = 4'd10, // up:   register write done
    M_DRAM_DATA = 4'd11, // up:   data of one DRAM read transaction
    M_DRAM_ACK  = 4'd12  // up:   DRAM write transaction done
  } msg_e;

  // requester id: 0..3 subcore, 4 LSU-Remote
  localparam int unsigned REQ_LSUR = 4;

  typedef struct packed {
    msg_e          kind;
    logic [2:0]    req;     // requester (subcore id, or LSU-Remote)
    logic [1:0]    nbu;     // target NBU
    logic [WARP_W-1:0] warp;
    logic [4:0]    reg_id;
    logic [4:0]    tag;     // lane number of a DRAM word transaction
    mask_t         mask;
    addr_t         addr;
    instr_t        instr;
    vreg_t         data;    // register value, or a word in data[31:0]
  } tsv_msg_t;

  // bits a message occupies on the TSV bus (header of 64 bits + payload)
  function automatic int unsigned msg_bits(msg_e k);
    case (k)
      M_OFFLOAD:                 return 64 + 64 + LANES;
      M_LDG_OFF, M_STG_OFF:      return 64 + ADDR_W;
      M_REG_WR, M_REG_DATA:      return 64 + LANES + REG_W;
      M_DRAM_RD:                 return 64 + ADDR_W;
      M_DRAM_WR:                 return 64 + ADDR_W + WORD_W;
      M_DRAM_DATA:               return 64 + WORD_W;
      default:                   return 64;
    endcase
  endfunction
  function automatic int unsigned msg_cycles(msg_e k);
    return (msg_bits(k) + TSV_BITS_PER_CYCLE - 1) / TSV_BITS_PER_CYCLE;
  endfunction

  // ---------------- DRAM interface (controller <-> bank) ----------------
  typedef enum logic [2:0] { CMD_NOP, CMD_ACT, CMD_PRE, CMD_RD, CMD_WR, CMD_REF } dram_cmd_e;

  typedef struct packed {
    logic                 write;
    addr_t                addr;     // column-aligned byte address
    logic [BANK_IO_W-1:0] wdata;
    logic [BANK_IO_W/8-1:0] wstrb;
    logic [8:0]           tag;
  } mc_req_t;

  // ---------------- event counters of a core ----------------
  typedef struct packed {
    logic [31:0] issued;         // instructions issued by the subcores
    logic [31:0] nb_offloads;    // instructions executed near-bank
    logic [31:0] reg_moves;      // register moves across the TSVs
    logic [31:0] ldst_offloads;  // coalesced ld/st.global offloaded to an LSU-Extension
    logic [31:0] ldst_splits;    // ld/st.global split into word transactions
    logic [31:0] remote_reqs;    // remote requests sent to the network
    logic [31:0] diverges;       // branches that split a warp
    logic [31:0] rb_hits;        // column commands to an open row
    logic [31:0] rb_acts;        // row activations
    logic [31:0] refreshes;      // refresh commands
    logic [31:0] smem_reqs;      // shared-memory requests
    logic [31:0] smem_conflicts; // shared-memory bank-conflict cycles
    logic [31:0] tsv_down_busy;  // cycles the down TSV bus carried data
    logic [31:0] tsv_up_busy;    // cycles the up TSV bus carried data
  } core_stats_t;

endpackage
