// sdt_pkg -- types and constants shared by the SDT resource-partitioning logic.
//
// An SDT core is a wide out-of-order SMT core that runs two hardware threads:
// thread 0 runs the data-processing (application) code, thread 1 is the
// Simultaneous Data-delivery Thread (SDT) that polls the NIC and hands packets on.
// Eight pipeline structures are shared between the two threads; each thread may
// occupy at most "limit" entries of each structure. The limit is selected per
// structure by one of four configurations that a software daemon writes with the
// STRP (Store Resource Partition) instruction.
//
// From the paper: the eight partitioned structures, their sizes in the default
// (beefy) core (IQ/LQ/SQ 194/144/112, BTB 8192, ROB 512, integer/float/vector
// registers 448/256/400), the 12-wide superscalar width, and the SDT share of each
// configuration (Baseline 50 %, High intensity 10 %, Medium 20 %, Low 40 %).
// Design choices of this RTL: the 2-bit configuration encoding, the STRP operand
// layout (strp_cmd_t), rounding the SDT share down, and which structures are
// emptied by a pipeline flush (the queues and the ROB; the BTB and the register
// files keep their entries and return them through the free counts).
package sdt_pkg;

  // Hardware threads sharing one core.
  localparam int unsigned NTHREADS = 2;
  localparam int unsigned TID_PROC = 0;   // data-processing (application) thread
  localparam int unsigned TID_SDT  = 1;   // data-delivery thread

  // Partitioned structures, in the order the evaluation lists them.
  localparam int unsigned NSTRUCT = 8;
  typedef enum logic [2:0] {
    S_IQ     = 3'd0,
    S_LQ     = 3'd1,
    S_SQ     = 3'd2,
    S_BTB    = 3'd3,
    S_ROB    = 3'd4,
    S_INTREG = 3'd5,
    S_FPREG  = 3'd6,
    S_VECREG = 3'd7
  } struct_e;

  // Entries of each structure in the default core.
  function automatic int unsigned struct_size(int unsigned s);
    case (s)
      0:       return 194;   // IQ
      1:       return 144;   // LQ
      2:       return 112;   // SQ
      3:       return 8192;  // BTB
      4:       return 512;   // ROB
      5:       return 448;   // integer physical registers
      6:       return 256;   // floating-point physical registers
      default: return 400;   // vector physical registers
    endcase
  endfunction

  // Queue-like structures hold only in-flight instructions, so a pipeline flush
  // empties them. The BTB and the physical register files keep entries across a flush.
  function automatic bit clears_on_flush(int unsigned s);
    return (s == 0) || (s == 1) || (s == 2) || (s == 4);
  endfunction

  // Counter width: enough for the largest structure (8192 entries).
  localparam int unsigned CNT_W = 14;
  typedef logic [CNT_W-1:0] cnt_t;

  // Superscalar width: up to 12 entries of a structure may be taken or freed
  // by one thread in one cycle.
  localparam int unsigned SUPERSCALAR = 12;
  localparam int unsigned REQ_W = 4;
  typedef logic [REQ_W-1:0] req_t;

  // The four partition configurations.
  typedef enum logic [1:0] {
    CFG_BASELINE = 2'd0,  // equal split, SDT gets 50 %
    CFG_HIGH     = 2'd1,  // high compute intensity, SDT gets 10 %
    CFG_MEDIUM   = 2'd2,  // medium compute intensity, SDT gets 20 %
    CFG_LOW      = 2'd3   // low compute intensity, SDT gets 40 %
  } part_cfg_e;

  function automatic int unsigned sdt_percent(part_cfg_e c);
    case (c)
      CFG_HIGH:   return 10;
      CFG_MEDIUM: return 20;
      CFG_LOW:    return 40;
      default:    return 50;
    endcase
  endfunction

  // Entries the SDT thread may hold in a structure of 'size' entries (rounded down);
  // the data-processing thread gets the rest.
  function automatic int unsigned sdt_limit(int unsigned size, part_cfg_e c);
    return (size * sdt_percent(c)) / 100;
  endfunction

  // Operand of one STRP instruction: which structures to re-partition, and how.
  typedef struct packed {
    logic [NSTRUCT-1:0] mask;  // bit s selects structure s (struct_e order)
    part_cfg_e          cfg;   // configuration to apply to every selected structure
  } strp_cmd_t;

  // Per-thread request of one structure in one cycle.
  typedef struct packed {
    req_t alloc;    // entries the thread wants to take this cycle
    req_t free;     // entries the thread frees this cycle
  } part_req_t;

endpackage
