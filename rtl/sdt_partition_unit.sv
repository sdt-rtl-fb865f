// sdt_partition_unit -- occupancy limiter of one shared pipeline structure.
//
// What it does: for each of the two hardware threads it holds a limit register
// (the most entries the thread may occupy) and a usage register (the entries it
// occupies now). Every cycle it compares the two and grants a thread as many of
// the entries it asks for as fit under its limit; once usage has reached the
// limit, further allocation is blocked and the thread's front end must stall on
// this structure.
// This is the mechanism the paper builds on: one limit/usage register pair per
// thread and structure, with the limit registers made programmable.
//
// How it works: the limit registers are loaded from a design-time table of four
// configurations (Baseline 50 %, High 10 %, Medium 20 %, Low 40 % of SIZE for the
// data-delivery thread, the rest for the data-processing thread) whenever cfg_we
// is high. A pipeline flush (flush = 1) cancels all in-flight instructions: when
// CLEAR_ON_FLUSH is set (IQ, LQ, SQ, ROB) both usage registers return to zero;
// otherwise (BTB, register files) the entries stay and are returned through the
// release counts. If a new limit is below the current usage, the thread is simply
// blocked until it has released enough entries. Because such a thread may for a
// while hold more than its new share, a grant is also bounded by the free entries
// of the structure as a whole (SIZE minus both usages); thread 0 is served before
// thread 1 within a cycle.
//
// Interface: req[t].alloc / req[t].free are entry counts (0..12 for a 12-wide
// core) presented in a cycle; grant[t] is the number of the requested entries the
// thread may take, answered combinationally in the same cycle (the oldest
// grant[t] of the group proceed, the rest wait); blocked[t] is high while
// usage >= limit; usage_o and limit_o show the registers. Nothing is granted in
// a flush cycle.
//
// Timing: usage is updated at the clock edge after a grant or a release; a
// configuration written with cfg_we takes effect at the next edge.
//
// Paper vs. this design: the register pair, the blocking rule and the four shares
// follow the paper. The partial multi-entry grant, rounding the SDT share
// down, reset to the Baseline configuration, the whole-structure check and the
// flush behaviour per structure are this design's choices.
module sdt_partition_unit
  import sdt_pkg::*;
#(
  parameter int unsigned SIZE           = 194,  // entries of the structure (IQ by default)
  parameter bit          CLEAR_ON_FLUSH = 1'b1  // a flush empties the structure
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  input  logic                     cfg_we,
  input  part_cfg_e                cfg,
  input  part_req_t [NTHREADS-1:0] req,
  output req_t      [NTHREADS-1:0] grant,
  output logic      [NTHREADS-1:0] blocked,
  output cnt_t      [NTHREADS-1:0] usage_o,
  output cnt_t      [NTHREADS-1:0] limit_o
);

  // SDT limit of each configuration, fixed at design time (constants, indexed by
  // the configuration code); the data-processing thread gets SIZE minus it.
  localparam cnt_t SDT_LIM [4] = '{cnt_t'(sdt_limit(SIZE, CFG_BASELINE)),
                                   cnt_t'(sdt_limit(SIZE, CFG_HIGH)),
                                   cnt_t'(sdt_limit(SIZE, CFG_MEDIUM)),
                                   cnt_t'(sdt_limit(SIZE, CFG_LOW))};

  function automatic cnt_t lim_of(part_cfg_e c, int unsigned tid);
    return (tid == TID_SDT) ? SDT_LIM[c] : cnt_t'(SIZE) - SDT_LIM[c];
  endfunction

  cnt_t [NTHREADS-1:0] limit_q, usage_q;
  cnt_t [NTHREADS-1:0] usage_d;

  // Entries of the structure held by either thread, plus those granted so far in
  // this cycle (lower thread numbers are served first).
  logic [CNT_W:0] taken, room_thr, room_all, room;

  always_comb begin
    taken = '0;
    for (int t = 0; t < NTHREADS; t++) taken += {1'b0, usage_q[t]};
    for (int t = 0; t < NTHREADS; t++) begin
      // room left under the thread's limit and in the structure (0 if none)
      room_thr = (usage_q[t] < limit_q[t]) ? {1'b0, limit_q[t] - usage_q[t]} : '0;
      room_all = (taken < (CNT_W+1)'(SIZE)) ? (CNT_W+1)'(SIZE) - taken : '0;
      room     = (room_thr < room_all) ? room_thr : room_all;
      if (flush)
        grant[t] = '0;
      else if ((CNT_W+1)'(req[t].alloc) <= room)
        grant[t] = req[t].alloc;
      else
        grant[t] = req_t'(room);
      taken += (CNT_W+1)'(grant[t]);
      blocked[t] = usage_q[t] >= limit_q[t];
      if (flush && CLEAR_ON_FLUSH)
        usage_d[t] = '0;
      else
        usage_d[t] = usage_q[t] - cnt_t'(req[t].free) + cnt_t'(grant[t]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTHREADS; t++) begin
        limit_q[t] <= lim_of(CFG_BASELINE, t);
        usage_q[t] <= '0;
      end
    end else begin
      usage_q <= usage_d;
      if (cfg_we)
        for (int t = 0; t < NTHREADS; t++) limit_q[t] <= lim_of(cfg, t);
    end
  end

  assign usage_o = usage_q;
  assign limit_o = limit_q;

  initial assert (SIZE >= 1 && SIZE < (1 << CNT_W))
    else $error("SIZE %0d does not fit CNT_W", SIZE);

  for (genvar t = 0; t < NTHREADS; t++) begin : g_chk
    // A thread cannot free entries it does not hold.
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(flush && CLEAR_ON_FLUSH) |-> (cnt_t'(req[t].free) <= usage_q[t]));
    // A request is at most one superscalar group.
    a_req_width: assert property (@(posedge clk) disable iff (!rst_n)
      (req[t].alloc <= req_t'(SUPERSCALAR)) && (req[t].free <= req_t'(SUPERSCALAR)));
  end

  // Both threads together never hold more than the whole structure.
  a_in_size: assert property (@(posedge clk) disable iff (!rst_n)
    {1'b0, usage_q[TID_PROC]} + {1'b0, usage_q[TID_SDT]} <= (CNT_W+1)'(SIZE));

  // The two threads' limits always add up to the structure.
  a_limits_sum: assert property (@(posedge clk) disable iff (!rst_n)
    {1'b0, limit_q[TID_PROC]} + {1'b0, limit_q[TID_SDT]} == (CNT_W+1)'(SIZE));

endmodule
