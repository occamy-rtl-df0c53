// Shared types and constants of the compute cluster.
//
// The cluster scratchpad is 128 KiB split into 32 word-interleaved banks of
// 64-bit words; narrow masters (streaming units, integer-core load/store
// units) address it by byte address, the DMA by 512-bit lines spanning eight
// adjacent banks. The streaming-unit configuration and the comparator
// command set are defined here because the cluster, the FP subsystem and the
// streamers all use them. Bank count and widths follow the paper; the field
// layout of the structs is this design's own.
package occamy_pkg;

  localparam int unsigned SPM_BYTES   = 128 * 1024;
  localparam int unsigned N_BANKS     = 32;
  localparam int unsigned BANK_WORDS  = SPM_BYTES / (N_BANKS * 8);  // 512
  localparam int unsigned ADDR_W      = 32;
  localparam int unsigned WIDE_W      = 512;
  localparam int unsigned N_WORKERS   = 8;
  localparam int unsigned N_CORES     = N_WORKERS + 1;   // plus the DMA core
  localparam int unsigned N_SU        = 3;

  // Narrow (64-bit) memory request.
  typedef struct packed {
    logic              req;
    logic              we;
    logic [ADDR_W-1:0] addr;   // byte address
    logic [7:0]        be;
    logic [63:0]       wdata;
  } mem_req_t;

  // Wide (512-bit) memory request, line aligned.
  typedef struct packed {
    logic              req;
    logic              we;
    logic [ADDR_W-1:0] addr;   // byte address, 64-byte aligned
    logic [WIDE_W-1:0] wdata;
  } wide_req_t;

  // Index width of indirect streams.
  typedef enum logic [1:0] {IDX8 = 2'd0, IDX16 = 2'd1, IDX32 = 2'd2} idx_size_e;

  // Comparator mode.
  typedef enum logic [1:0] {CMP_OFF = 2'd0, CMP_INTERSECT = 2'd1, CMP_UNION = 2'd2} cmp_mode_e;

  // Command from the index comparator to a streamer.
  typedef enum logic [1:0] {
    CMD_NONE = 2'd0,
    CMD_ADV  = 2'd1,   // consume the index and fetch its value
    CMD_SKIP = 2'd2,   // consume the index without fetching
    CMD_ZERO = 2'd3    // keep the index, emit a zero value (union)
  } su_cmd_e;

  // Streaming-unit configuration.
  typedef struct packed {
    logic [1:0]        dims;        // number of loop dimensions - 1 (1D..4D)
    logic [3:0][15:0]  bound;       // iterations - 1 per dimension
    logic [3:0][19:0]  stride;      // byte stride per dimension (signed)
    logic [ADDR_W-1:0] base;        // data base address
    logic              write;       // 1: stream writes memory
    logic              indir;       // 1: indirect stream (HAS_INDIR only)
    idx_size_e         idx_size;
    logic [ADDR_W-1:0] idx_base;    // index array base address
    logic [15:0]       num_idx;     // number of indices - 1
    logic [2:0]        idx_shift;   // element address = base + (idx << shift)
    logic              iout;        // 1: write joint indices (HAS_IOUT only)
    logic [ADDR_W-1:0] iout_base;
  } su_cfg_t;

  // DMA transfer descriptor. Lengths in bytes, multiples of 64.
  typedef struct packed {
    logic              to_ext;      // 1: SPM -> system, 0: system -> SPM
    logic [ADDR_W-1:0] src;
    logic [ADDR_W-1:0] dst;
    logic [ADDR_W-1:0] len;         // bytes per row
    logic [ADDR_W-1:0] src_stride;  // 2D: row stride of source
    logic [ADDR_W-1:0] dst_stride;  // 2D: row stride of destination
    logic [15:0]       reps;        // 2D: rows - 1 (0 = 1D transfer)
  } dma_cfg_t;

  // FP opcodes (RISC-V R4 and OP-FP major opcodes, D format).
  localparam logic [6:0] OPC_FMADD  = 7'b1000011;
  localparam logic [6:0] OPC_FMSUB  = 7'b1000111;
  localparam logic [6:0] OPC_FNMSUB = 7'b1001011;
  localparam logic [6:0] OPC_FNMADD = 7'b1001111;
  localparam logic [6:0] OPC_OPFP   = 7'b1010011;
  localparam logic [6:0] OPC_FREP   = 7'b0001011;   // loop-buffer instruction

endpackage
