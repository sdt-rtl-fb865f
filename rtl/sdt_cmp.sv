// sdt_cmp -- the partitioning logic of a chip multiprocessor of SDT cores.
//
// What it does: the evaluated chip has 20 cores, each a wide out-of-order core
// that also runs a Simultaneous Data-delivery Thread (SDT). Each core carries its
// own sdt_core_partition, so the SDT daemon can give every core its own partition
// (for example Low intensity on a core whose application is network-bound and
// High intensity on a compute-bound one). Cores do not share any partition state.
//
// How it works: NCORES copies of sdt_core_partition. The core pipelines, caches,
// memory and NIC are outside this RTL; their connections to the partition logic
// are this module's ports, indexed by core first.
//
// Interface: per core, the STRP handshake, the flush and stall outputs, and the
// per-structure, per-thread request/grant arrays of sdt_core_partition.
//
// Timing: as sdt_core_partition, independently per core.
//
// Paper vs. this design: the core count (20) and the per-core partitioning follow
// the paper; the port grouping is this design's choice.
module sdt_cmp
  import sdt_pkg::*;
#(
  parameter int unsigned NCORES = 20
) (
  input  logic                                                clk,
  input  logic                                                rst_n,
  input  logic      [NCORES-1:0]                              strp_valid,
  output logic      [NCORES-1:0]                              strp_ready,
  input  strp_cmd_t [NCORES-1:0]                              strp_cmd,
  output logic      [NCORES-1:0]                              flush,
  output logic      [NCORES-1:0][NTHREADS-1:0]                thread_stall,
  input  part_req_t [NCORES-1:0][NSTRUCT-1:0][NTHREADS-1:0]   req,
  output req_t      [NCORES-1:0][NSTRUCT-1:0][NTHREADS-1:0]   grant,
  output logic      [NCORES-1:0][NSTRUCT-1:0][NTHREADS-1:0]   blocked,
  output cnt_t      [NCORES-1:0][NSTRUCT-1:0][NTHREADS-1:0]   usage,
  output cnt_t      [NCORES-1:0][NSTRUCT-1:0][NTHREADS-1:0]   limit,
  output part_cfg_e [NCORES-1:0][NSTRUCT-1:0]                 cur_cfg
);

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    sdt_core_partition u_core (
      .clk, .rst_n,
      .strp_valid   (strp_valid[c]),
      .strp_ready   (strp_ready[c]),
      .strp_cmd     (strp_cmd[c]),
      .flush        (flush[c]),
      .thread_stall (thread_stall[c]),
      .req          (req[c]),
      .grant        (grant[c]),
      .blocked      (blocked[c]),
      .usage        (usage[c]),
      .limit        (limit[c]),
      .cur_cfg      (cur_cfg[c])
    );
  end

endmodule
