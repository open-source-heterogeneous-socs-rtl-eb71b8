// Shared types and constants of the heterogeneous cluster.
//
// The cluster is built around a word-interleaved L1 scratchpad (TCDM) that is
// reached by 32-bit narrow ports (cores, DMA) through a logarithmic crossbar and
// by one wide port (the hardware processing engine, HWPE) through a router.
// Every narrow and wide port speaks the same simple request/grant protocol:
//   * the initiator raises req with addr/wen/wdata/be and holds them until gnt;
//   * one cycle after the grant, rvalid pulses with rdata (reads and writes
//     are both acknowledged, so an initiator can count its outstanding accesses).
// The paper gives the bank count range (16-64), the 32-bit bank ports, the
// 8 cores and 4x32b DMA ports of its cluster figure and the 288-bit HWPE port;
// the protocol details (fixed one-cycle read latency, write acknowledge) are
// this design's choice.
package pulp_cluster_pkg;

  // ---- cluster defaults -------------------------------------------------
  localparam int unsigned NCORES      = 8;    // RISC-V cores in the cluster figure
  localparam int unsigned NBANKS      = 16;   // TCDM banks (paper: 16-64)
  localparam int unsigned BANK_WORDS  = 1024; // 16 x 1024 x 4 B = 64 KiB (paper: 64-256 KiB)
  localparam int unsigned DMA_PORTS   = 4;    // "4x32b" DMA ports
  localparam int unsigned HWPE_NW     = 9;    // 288-bit HWPE port = 9 x 32 bit

  // ---- narrow TCDM port -------------------------------------------------
  typedef struct packed {
    logic        req;
    logic        wen;    // 1 = write
    logic [31:0] addr;   // byte address inside the TCDM
    logic [31:0] wdata;
    logic [3:0]  be;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  // ---- peripheral (configuration) port ------------------------------------
  typedef struct packed {
    logic        req;
    logic        wen;
    logic [11:0] addr;   // byte offset inside the peripheral
    logic [31:0] wdata;
  } periph_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } periph_rsp_t;

  // Peripheral address map (bits [11:10] of the cluster peripheral offset)
  localparam logic [1:0] PERIPH_HWPE = 2'd0;
  localparam logic [1:0] PERIPH_DMA  = 2'd1;
  localparam logic [1:0] PERIPH_SYNC = 2'd2;

  // ---- HWPE controller register map (word offsets) ------------------------
  localparam logic [5:0] HWPE_REG_TRIGGER     = 6'd0;  // commit/trigger
  localparam logic [5:0] HWPE_REG_ACQUIRE     = 6'd1;  // acquire
  localparam logic [5:0] HWPE_REG_FINISHED    = 6'd2;  // finished
  localparam logic [5:0] HWPE_REG_STATUS      = 6'd3;  // status
  localparam logic [5:0] HWPE_REG_RUNNING_JOB = 6'd4;  // running_job
  localparam logic [5:0] HWPE_REG_SOFT_CLEAR  = 6'd5;  // soft_clear
  localparam int unsigned HWPE_JOB_REGS       = 8;     // job registers at word 16..23
  localparam logic [5:0] HWPE_REG_JOB0        = 6'd16;

  // RedMulE job register indices (inside one context)
  localparam int unsigned JOB_A_ADDR = 0;
  localparam int unsigned JOB_B_ADDR = 1;
  localparam int unsigned JOB_C_ADDR = 2;
  localparam int unsigned JOB_M      = 3;  // rows of A and C
  localparam int unsigned JOB_K      = 4;  // columns of A, rows of B
  localparam int unsigned JOB_N      = 5;  // columns of B and C

  // ---- DMA register map (word offsets) -----------------------------------
  localparam logic [3:0] DMA_REG_EXT_ADDR  = 4'd0;
  localparam logic [3:0] DMA_REG_TCDM_ADDR = 4'd1;
  localparam logic [3:0] DMA_REG_LEN       = 4'd2;  // bytes
  localparam logic [3:0] DMA_REG_CMD       = 4'd3;  // write: bit0 = direction (1 = TCDM->ext); read: id
  localparam logic [3:0] DMA_REG_STATUS    = 4'd4;  // transfers queued or running
  localparam logic [3:0] DMA_REG_DONE_ID   = 4'd5;  // id of the last finished transfer

  // ---- synchronizer register map (word offsets) --------------------------
  localparam logic [3:0] SYNC_REG_EVT_MASK   = 4'd0;
  localparam logic [3:0] SYNC_REG_EVT_BUFFER = 4'd1;  // read: pending events; write: clear bits
  localparam logic [3:0] SYNC_REG_BARRIER    = 4'd2;  // write: arrive at the barrier
  localparam logic [3:0] SYNC_REG_BAR_MASK   = 4'd3;  // cores that take part in the barrier
  localparam logic [3:0] SYNC_REG_MUTEX      = 4'd4;  // read: try-lock (0 = got it); write: unlock
  localparam logic [3:0] SYNC_REG_SW_EVT     = 4'd5;  // write: raise the software event in a core mask

  // Event lines
  localparam int unsigned EVT_DMA_EOT = 0;
  localparam int unsigned EVT_HWPE_EOC = 1;
  localparam int unsigned EVT_BARRIER = 2;
  localparam int unsigned EVT_SW      = 3;
  localparam int unsigned NEVT        = 4;

  // ---- Xpulpnn dot-product modes ------------------------------------------
  typedef enum logic [1:0] {
    DOTP_2B  = 2'd0,   // 16 x 2 bit
    DOTP_4B  = 2'd1,   //  8 x 4 bit
    DOTP_8B  = 2'd2,   //  4 x 8 bit
    DOTP_16B = 2'd3    //  2 x 16 bit
  } dotp_prec_e;

endpackage
