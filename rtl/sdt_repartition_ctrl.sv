// sdt_repartition_ctrl -- carries out STRP (Store Resource Partition) instructions.
//
// What it does: the SDT software daemon re-partitions a core by executing STRP,
// whose operand names a set of pipeline structures and one of the four partition
// configurations. Entries already in a structure may change owner when the limits
// move, so the core applies a new partition together with a pipeline flush: all
// in-flight instructions are cancelled and execution resumes at once under the new
// limits (the paper prefers this to draining the pipeline, which costs more).
//
// How it works: a two-state machine. In IDLE it accepts one STRP (strp_valid and
// strp_ready high in the same cycle) and stores its operand. In the next cycle,
// APPLY, it raises flush for exactly one cycle and, in that same cycle, raises
// cfg_we[s] for every structure s selected by the mask, with cfg carrying the new
// configuration. It also keeps a copy of each structure's current configuration
// (cur_cfg) for status reads. It then returns to IDLE.
//
// Interface: strp_valid / strp_ready / strp_cmd is a valid-ready handshake; the
// command must stay stable while valid is high and ready is low. flush and cfg_we
// go to every sdt_partition_unit of the core and to its pipeline.
//
// Timing: STRP accepted at edge N, flush and limit write during cycle N+1, new
// limits in force from edge N+2. One STRP every two cycles at most.
//
// Paper vs. this design: STRP, the configuration per structure and flush-based
// re-partitioning follow the paper. The operand layout, the one-cycle flush pulse
// (the pipeline refill that follows it is the core's) and the handshake are this
// design's choices. Reset leaves every structure in the Baseline configuration.
module sdt_repartition_ctrl
  import sdt_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     strp_valid,
  output logic                     strp_ready,
  input  strp_cmd_t                strp_cmd,
  output logic                     flush,
  output logic      [NSTRUCT-1:0]  cfg_we,
  output part_cfg_e                cfg,
  output part_cfg_e [NSTRUCT-1:0]  cur_cfg
);

  typedef enum logic {ST_IDLE, ST_APPLY} state_e;

  state_e    state_q;
  strp_cmd_t cmd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      cmd_q   <= '{mask: '0, cfg: CFG_BASELINE};
      for (int s = 0; s < NSTRUCT; s++) cur_cfg[s] <= CFG_BASELINE;
    end else begin
      case (state_q)
        ST_IDLE:
          if (strp_valid) begin
            cmd_q   <= strp_cmd;
            state_q <= ST_APPLY;
          end
        default: begin
          for (int s = 0; s < NSTRUCT; s++)
            if (cmd_q.mask[s]) cur_cfg[s] <= cmd_q.cfg;
          state_q <= ST_IDLE;
        end
      endcase
    end
  end

  always_comb begin
    strp_ready = (state_q == ST_IDLE);
    flush      = (state_q == ST_APPLY);
    cfg_we     = flush ? cmd_q.mask : '0;
    cfg        = cmd_q.cfg;
  end

  // The STRP operand holds still until it is taken.
  a_strp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    strp_valid && !strp_ready |=> strp_valid && $stable(strp_cmd));
  // A flush lasts one cycle.
  a_flush_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    flush |=> !flush);

endmodule
