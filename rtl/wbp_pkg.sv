// wbp_pkg: types and constants shared by the whole baseband manycore.
//
// Bus: every block talks over one simple request/response bus. A master
// holds a request (bus_req_t) until the slave answers with gnt; exactly one
// cycle after the grant the slave returns rvalid (reads return rdata, writes
// return an acknowledge). There is no backpressure on responses. Addresses are
// byte addresses, data is 32 bits wide with byte enables.
//
// Offload queue: the scalar core forwards each custom vector instruction to
// the VXU as a vq_entry_t (instruction word plus the two scalar source values).
//
// Custom vector ISA (this design's own encoding; the architecture only says
// that the RISC-V core carries a custom vector extension): opcode custom-0
// (7'b0001011), funct7 selects the operation. Vector register numbers are six
// bits: the 5-bit rd/rs1/rs2 fields plus funct3[0]/[1]/[2] as their top bits.
//
// Address maps (this design's choice):
//   tile      : T-SPM at 0x0000_0000, tile CSR at 0x0001_0000
//   cluster   : CD-SPM 0x00_0000, CS-SPM 0x10_0000, cluster CSR 0x20_0000,
//               L2 DMA 0x21_0000, thread manager 0x22_0000,
//               tile t at 0x40_0000 + t*0x2_0000
//   design top: main memory 0x0000_0000..0x0FFF_FFFF, top CSR 0x1000_0000,
//               main DMA 0x1100_0000, cluster c at 0x2000_0000 + c*0x100_0000
package wbp_pkg;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] rs1;
    logic [31:0] rs2;
  } vq_entry_t;

  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  // funct7 of the custom vector instructions
  typedef enum logic [6:0] {
    VF_SETVL  = 7'd0,   // x[rd] = vl = min(x[rs1], VLMAX)
    VF_LD     = 7'd1,   // v[vd..] = mem32[x[rs1] + 4*i], i < vl
    VF_ST     = 7'd2,   // mem32[x[rs1] + 4*i] = v[vd..][i]
    VF_ADD    = 7'd3,   // vd = vs1 + vs2
    VF_SUB    = 7'd4,   // vd = vs1 - vs2
    VF_MUL    = 7'd5,   // vd = low 32 bits of vs1 * vs2
    VF_MULQ   = 7'd6,   // vd = (vs1 * vs2) >>> 15, signed Q15 product
    VF_MIN    = 7'd7,   // signed minimum
    VF_MAX    = 7'd8,   // signed maximum
    VF_ABS    = 7'd9,   // vd = |vs1|
    VF_AND    = 7'd10,
    VF_OR     = 7'd11,
    VF_XOR    = 7'd12,
    VF_SRA    = 7'd13,  // vd = vs1 >>> x[rs2]
    VF_SLL    = 7'd14,  // vd = vs1 << x[rs2]
    VF_MVSX   = 7'd15,  // vd[i] = x[rs1] (broadcast)
    VF_XCHG   = 7'd16,  // EXE: vd[i] = vs1[i ^ x[rs2]] inside each register
    VF_ROT    = 7'd17,  // EXE: vd[i] = vs1[(i + x[rs2]) mod LANES]
    VF_REDSUM = 7'd18,  // EXE: x[rd] = sum of vs1[i], i < vl
    VF_MVXS   = 7'd19   // x[rd] = element x[rs2] of the vs1 group
  } vfunct_e;

  // lane operations
  typedef enum logic [3:0] {
    LOP_ADD, LOP_SUB, LOP_MUL, LOP_MULQ, LOP_MIN, LOP_MAX, LOP_ABS,
    LOP_AND, LOP_OR, LOP_XOR, LOP_SRA, LOP_SLL, LOP_PASSB
  } lane_op_e;

  // EXE modes
  typedef enum logic [1:0] { EXE_XCHG, EXE_ROT, EXE_SUM } exe_mode_e;

  // vector instructions that send a scalar back to the core
  function automatic logic vec_has_result(logic [31:0] instr);
    return instr[31:25] == VF_SETVL || instr[31:25] == VF_REDSUM ||
           instr[31:25] == VF_MVXS;
  endfunction

  // ---------------- tile ----------------
  localparam logic [31:0] TILE_CSR_OFS   = 32'h0001_0000;
  localparam logic [31:0] TILE_SPAN      = 32'h0002_0000;
  // tile CSR registers (word offsets from TILE_CSR_OFS)
  localparam logic [3:0] TCSR_CTRL   = 4'h0;  // [0] port_dir (1: core), [1] core_run
  localparam logic [3:0] TCSR_RETCNT = 4'h1;  // number of return values; write = done
  localparam logic [3:0] TCSR_IRQ    = 4'h2;  // [0] pending, write 1 to clear
  localparam logic [3:0] TCSR_INFO   = 4'h3;  // {large, tspm_kib[14:0], num_vrf[7:0], lanes[7:0]}

  // ---------------- cluster ----------------
  localparam logic [23:0] CL_CDSPM = 24'h00_0000;
  localparam logic [23:0] CL_CSSPM = 24'h10_0000;
  localparam logic [23:0] CL_CSR   = 24'h20_0000;
  localparam logic [23:0] CL_DMA   = 24'h21_0000;
  localparam logic [23:0] CL_TMGR  = 24'h22_0000;
  localparam logic [23:0] CL_TILE0 = 24'h40_0000;
  // cluster CSR registers (word offsets)
  localparam logic [3:0] CCSR_CTRL    = 4'h0;  // [0] L2 scheduler run (CD-SPM port to scheduler)
  localparam logic [3:0] CCSR_DONE    = 4'h1;  // write: result word, raises done interrupt
  localparam logic [3:0] CCSR_IRQ     = 4'h2;  // [0] done pending, write 1 to clear
  localparam logic [3:0] CCSR_TILEIRQ = 4'h3;  // read: tile interrupt pending vector
  localparam logic [3:0] CCSR_MBOX    = 4'h4;  // mailbox word from the main scheduler
  localparam logic [3:0] CCSR_INFO    = 4'h5;  // {large mask[15:0], num_tiles[7:0], cluster id[7:0]}

  // DMA registers (word offsets)
  localparam logic [3:0] DMA_SRC  = 4'h0;
  localparam logic [3:0] DMA_DST  = 4'h1;
  localparam logic [3:0] DMA_LEN  = 4'h2;   // words
  localparam logic [3:0] DMA_CTRL = 4'h3;   // write 1: start; read [0] busy
  localparam logic [3:0] DMA_STAT = 4'h4;   // [0] done pending, write 1 to clear; [31:16] bursts

  // thread manager registers (word offsets)
  localparam logic [3:0] TM_QUERY    = 4'h0; // read {count, free idx, free}
  localparam logic [3:0] TM_REGISTER = 4'h1; // write thread id: allocate a slot
  localparam logic [3:0] TM_RUN      = 4'h2; // write thread id: mark running
  localparam logic [3:0] TM_COMPLETE = 4'h3; // write thread id: free its slot
  localparam logic [3:0] TM_SLOT0    = 4'h8; // read slot i at TM_SLOT0+i

  typedef enum logic [1:0] { TS_FREE, TS_READY, TS_RUNNING } thread_state_e;

  // ---------------- design top ----------------
  localparam logic [31:0] TOP_MAINMEM = 32'h0000_0000;
  localparam logic [31:0] TOP_CSR     = 32'h1000_0000;
  localparam logic [31:0] TOP_DMA     = 32'h1100_0000;
  localparam logic [31:0] TOP_CLUSTER = 32'h2000_0000;
  localparam logic [3:0] TOPCSR_IRQ    = 4'h0; // read: cluster done pending vector
  localparam logic [3:0] TOPCSR_DONE   = 4'h1; // write: result, sets done output
  localparam logic [3:0] TOPCSR_INFO   = 4'h2; // {num_tiles[15:8], num_clusters[7:0]}

endpackage
