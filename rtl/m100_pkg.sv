// m100_pkg: types and constants shared by the M100-style NPU RTL.
//
// The NPU is built from Tensor Processing Blocks (TPBs). Each TPB has a
// banked shared memory (HBSM) that all its functional units stream to and
// from, and a set of synchronization counters (SCs) through which producers
// and consumers coordinate. Instructions reach a TPB over a daisy-chained
// 64-bit Instruction Chain Bus (ICB); broadcast data arrives over a Data Ring
// Bus (DRB).
//
// Sizes that follow the paper: 14 clusters of 4 TPBs, 2 MB HBSM per TPB in
// 32 banks of 32 bytes, 8 HBSM requester ports, 64-bit ICB beats, 32 MB CCB
// SRAM in four banks with 4 KB interleave, a TCU of 8x64 MACs each doing a
// 4-element dot product. Everything else here (instruction layout, counter
// count and width, port structs, flit layout) is this design's own choice.
//
// CVU_ADD and DT_COPY are listed as unused parameters by lint: the units
// treat every opcode that is not one of the others as add / copy, so these
// two values are never compared against; they document the encoding.
package m100_pkg;

  // ---------------- sizes from the paper ----------------
  localparam int unsigned N_CLUSTERS      = 14;  // TPB clusters in the NPU
  localparam int unsigned TPB_PER_CLUSTER = 4;
  localparam int unsigned N_TPB           = N_CLUSTERS * TPB_PER_CLUSTER;
  localparam int unsigned WORD_BYTES      = 32;  // HBSM bank width / interleave
  localparam int unsigned WORD_BITS       = WORD_BYTES * 8;
  localparam int unsigned ICB_W           = 64;  // ICB bits per cycle
  localparam int unsigned N_ENGINES       = 4;   // CCB CPU / custom engine pairs

  // ---------------- this design's choices ----------------
  localparam int unsigned ADDR_W   = 32;   // word address on every memory port
  localparam int unsigned NUM_SC   = 32;   // synchronization counters per TPB
  localparam int unsigned SC_ID_W  = $clog2(NUM_SC);
  localparam int unsigned SC_W     = 16;   // counter width
  localparam int unsigned TWU_LEVELS = 3;  // loop levels per tensor walker
  localparam int unsigned TWU_W    = 16;   // Initial/Step/Final/Value width

  typedef logic [WORD_BITS-1:0] word_t;

  // One request / response pair is used on every word-wide memory port:
  // HBSM requester ports, CCB SRAM ports and the DDR (AXI-side) ports.
  // A request is held until gnt; read data returns on rvalid in request
  // order. sc_upd asks the memory to increment counter sc_id when the
  // request wins arbitration (HBSM only).
  typedef struct packed {
    logic                 valid;
    logic                 we;
    logic [ADDR_W-1:0]    addr;
    word_t                wdata;
    logic                 sc_upd;
    logic [SC_ID_W-1:0]   sc_id;
  } mreq_t;

  typedef struct packed {
    logic   gnt;
    logic   rvalid;
    word_t  rdata;
  } mrsp_t;

  // Tensor walker configuration: 'levels' active loops (1..TWU_LEVELS).
  // Level 0 is the outermost loop; level levels-1 the innermost.
  typedef struct packed {
    logic [1:0]                     levels;
    logic [TWU_LEVELS-1:0][TWU_W-1:0] init;
    logic [TWU_LEVELS-1:0][TWU_W-1:0] step;
    logic [TWU_LEVELS-1:0][TWU_W-1:0] fin;
  } twu_cfg_t;

  // Functional units that receive TPB instructions (Fig. 8 of the source:
  // CPU, TCU, SU, CVU and DTDU instructions).
  typedef enum logic [2:0] {
    FU_TCU  = 3'd0,
    FU_CVU  = 3'd1,
    FU_DTDU = 3'd2,
    FU_SU   = 3'd3,
    FU_CSU  = 3'd4
  } fu_e;
  localparam int unsigned N_FU = 5;

  // Operation codes, interpreted per functional unit.
  localparam logic [3:0] CVU_ADD  = 4'd0;  // out = sat(a + b)
  localparam logic [3:0] CVU_MUL  = 4'd1;  // out = sat((a * b) >>> shift)
  localparam logic [3:0] CVU_RMAX = 4'd2;  // out = max over all of a
  localparam logic [3:0] CVU_RSUM = 4'd3;  // out = sat(sum over all of a)
  localparam logic [3:0] DT_COPY  = 4'd0;
  localparam logic [3:0] DT_FILL  = 4'd1;
  localparam logic [3:0] DT_TRANS = 4'd2;  // 32x32-byte block transpose
  localparam logic [3:0] SU_SET   = 4'd0;  // counter upd_sc := imm

  // A TPB instruction. wait_* is the monitor request issued before the unit
  // starts; upd_* the counter incremented when the unit finishes (tied to
  // its last memory write). twu_a/twu_b are input walkers, twu_o the output
  // walker.
  typedef struct packed {
    fu_e                fu;
    logic [3:0]         op;
    logic               wait_en;
    logic [SC_ID_W-1:0] wait_sc;
    logic [SC_W-1:0]    wait_val;
    logic               upd_en;
    logic [SC_ID_W-1:0] upd_sc;
    twu_cfg_t           twu_a;
    twu_cfg_t           twu_b;
    twu_cfg_t           twu_o;
    logic [31:0]        imm;
  } tpb_inst_t;

  localparam int unsigned INST_W     = $bits(tpb_inst_t);
  localparam int unsigned INST_BEATS = (INST_W + ICB_W - 1) / ICB_W;

  // One ICB beat. The first beat of an instruction carries the 56-bit TPB
  // destination mask; the following INST_BEATS beats carry the instruction.
  typedef struct packed {
    logic             valid;
    logic             last;
    logic [ICB_W-1:0] data;
  } icb_beat_t;

  // One Data Ring Bus flit: a 32-byte word for the HBSM of every TPB whose
  // bit is set in dst, or (sync_only) only a counter increment there.
  typedef struct packed {
    logic               valid;
    logic [N_TPB-1:0]   dst;
    logic [15:0]        addr;
    word_t              data;
    logic               sync_only;
    logic               sc_upd;
    logic [SC_ID_W-1:0] sc_id;
  } drb_flit_t;

  // Cluster CPU access to a TPB (VCIX side): target 0 = HBSM word,
  // target 1 = CSU registers.
  typedef struct packed {
    logic          valid;
    logic          we;
    logic          target;
    logic [15:0]   addr;
    word_t         wdata;
  } cpu_req_t;

  typedef struct packed {
    logic   gnt;
    logic   rvalid;
    word_t  rdata;
  } cpu_rsp_t;

  // CCB DMA descriptor.
  localparam logic [1:0] DMA_DDR  = 2'd0;
  localparam logic [1:0] DMA_SRAM = 2'd1;
  localparam logic [1:0] DMA_DRB  = 2'd2;
  typedef struct packed {
    logic [1:0]         src;       // DMA_DDR or DMA_SRAM
    logic [1:0]         dst;       // DMA_DDR, DMA_SRAM or DMA_DRB
    logic [ADDR_W-1:0]  src_addr;  // word address
    logic [ADDR_W-1:0]  dst_addr;  // word address (HBSM address for DRB)
    logic [15:0]        len;       // words
    logic [N_TPB-1:0]   drb_dst;   // TPB mask for DRB broadcast
    logic               sc_upd;    // increment sc_id in each target with the last word
    logic [SC_ID_W-1:0] sc_id;
  } dma_desc_t;

endpackage
