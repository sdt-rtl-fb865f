// sdt_core_partition -- resource-partitioning logic of one SDT core.
//
// What it does: one physical core runs a data-processing thread (thread 0) and a
// data-delivery thread, the SDT (thread 1). The eight structures the SDT daemon
// partitions -- IQ, LQ, SQ, BTB, ROB and the integer, floating-point and vector
// physical register files -- each get an sdt_partition_unit that limits how many
// entries each thread may hold. An sdt_repartition_ctrl executes STRP instructions:
// it flushes the pipeline and loads the new configuration into the selected units.
//
// How it works: the pipeline presents, per structure and thread, how many entries
// it wants to take and how many it frees this cycle (req). grant says how many of
// them each thread may take; thread_stall[t] is high when some structure granted
// thread t fewer entries than it asked for, so the rest of the thread's
// rename/dispatch group must wait. blocked shows which structures a thread
// has filled up to its limit. flush is the one-cycle pipeline flush that goes with
// every re-partition.
//
// Interface: all arrays are indexed [structure][thread], structure order as in
// sdt_pkg::struct_e. Structure sizes are parameters whose defaults are the default
// core of the paper; STRP is a valid/ready handshake (see sdt_repartition_ctrl).
//
// Timing: grants are combinational in the request cycle; usage and limits change
// at the next edge; STRP accepted at edge N flushes in cycle N+1.
//
// Paper vs. this design: the structure list, the sizes and the partition mechanism
// follow the paper; the summary stall and the flush rule per structure (queues and
// ROB emptied, BTB and register files kept) are this design's choices.
module sdt_core_partition
  import sdt_pkg::*;
#(
  parameter int unsigned SIZE_IQ     = 194,
  parameter int unsigned SIZE_LQ     = 144,
  parameter int unsigned SIZE_SQ     = 112,
  parameter int unsigned SIZE_BTB    = 8192,
  parameter int unsigned SIZE_ROB    = 512,
  parameter int unsigned SIZE_INTREG = 448,
  parameter int unsigned SIZE_FPREG  = 256,
  parameter int unsigned SIZE_VECREG = 400
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // STRP from the core's commit stage
  input  logic                                   strp_valid,
  output logic                                   strp_ready,
  input  strp_cmd_t                              strp_cmd,
  // to the pipeline
  output logic                                   flush,
  output logic      [NTHREADS-1:0]               thread_stall,
  // per structure and thread
  input  part_req_t [NSTRUCT-1:0][NTHREADS-1:0]  req,
  output req_t      [NSTRUCT-1:0][NTHREADS-1:0]  grant,
  output logic      [NSTRUCT-1:0][NTHREADS-1:0]  blocked,
  output cnt_t      [NSTRUCT-1:0][NTHREADS-1:0]  usage,
  output cnt_t      [NSTRUCT-1:0][NTHREADS-1:0]  limit,
  output part_cfg_e [NSTRUCT-1:0]                cur_cfg
);

  localparam int unsigned SIZES [NSTRUCT] = '{SIZE_IQ, SIZE_LQ, SIZE_SQ, SIZE_BTB,
                                              SIZE_ROB, SIZE_INTREG, SIZE_FPREG, SIZE_VECREG};

  logic      [NSTRUCT-1:0] cfg_we;
  part_cfg_e               cfg;

  sdt_repartition_ctrl u_ctrl (
    .clk, .rst_n,
    .strp_valid, .strp_ready, .strp_cmd,
    .flush, .cfg_we, .cfg, .cur_cfg
  );

  for (genvar s = 0; s < NSTRUCT; s++) begin : g_struct
    sdt_partition_unit #(
      .SIZE           (SIZES[s]),
      .CLEAR_ON_FLUSH (clears_on_flush(s))
    ) u_part (
      .clk, .rst_n,
      .flush,
      .cfg_we  (cfg_we[s]),
      .cfg,
      .req     (req[s]),
      .grant   (grant[s]),
      .blocked (blocked[s]),
      .usage_o (usage[s]),
      .limit_o (limit[s])
    );
  end

  always_comb begin
    thread_stall = '0;
    for (int s = 0; s < NSTRUCT; s++)
      for (int t = 0; t < NTHREADS; t++)
        if (grant[s][t] != req[s][t].alloc) thread_stall[t] = 1'b1;
  end

endmodule
