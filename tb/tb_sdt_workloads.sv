// tb_sdt_workloads -- a data-delivery thread next to a greedy application thread.
//
// One full-size core (sdt_core_partition, default sizes) is put, by STRP, in each of
// the four configurations in turn. Thread 0, the application, is greedy: every
// cycle it asks for a full 12-entry group in every structure and frees a few
// entries at random, so it sits at its limit. Thread 1, the data-delivery thread,
// tries to keep the working set of a DPDK l2fwd delivery loop running at 90 % of
// full-core throughput: 32 IQ, 32 LQ, 32 SQ, 256 BTB, 128 ROB entries, 92 integer
// and 46 vector registers (no floating point). It tops its holdings up to that
// target and turns a few entries over each cycle.
//
// Checked for every configuration and structure, against numbers worked out here:
// the delivery thread reaches its full working set exactly where its limit
// (size x 50/10/20/40 %, rounded down) is at least the target, and otherwise
// stops at the limit; every cycle it is granted all the entries that fit under
// its own limit, however greedy the application is (the isolation the partitioning provides); the
// application reaches but never passes its own limit. Baseline and Low hold the
// whole working set; Medium and High do not (they are meant for lower rates).
module tb_sdt_workloads;
  import sdt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                                strp_valid, strp_ready, flush;
  strp_cmd_t                           strp_cmd;
  logic      [NTHREADS-1:0]            thread_stall;
  part_req_t [NSTRUCT-1:0][NTHREADS-1:0] req;
  req_t      [NSTRUCT-1:0][NTHREADS-1:0] grant;
  logic      [NSTRUCT-1:0][NTHREADS-1:0] blocked;
  cnt_t      [NSTRUCT-1:0][NTHREADS-1:0] usage, limit;
  part_cfg_e [NSTRUCT-1:0]             cur_cfg;

  sdt_core_partition u_dut (.*);

  localparam int SIZE [8]   = '{194, 144, 112, 8192, 512, 448, 256, 400};
  localparam int TARGET [8] = '{32, 32, 32, 256, 128, 92, 0, 46};
  localparam int PCT [4]    = '{50, 10, 20, 40};
  localparam string CNAME [4] = '{"Baseline", "High", "Medium", "Low"};
  localparam int RUN = 1500;

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (4 * (RUN + 2000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int max_sdt [8], max_app [8], refused_below [8], capped [8];
    int n_fit = 0, n_short = 0;
    int h, us, ua, want, lim_s, a, exp_max;
    bit fit;
    strp_valid = 0; strp_cmd = '0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int c = 0; c < 4; c++) begin
      // re-partition every structure; the flush empties the queues and the ROB
      @(negedge clk);
      req = '0;
      strp_valid = 1; strp_cmd = '{mask: 8'hff, cfg: part_cfg_e'(c)};
      @(negedge clk);
      strp_valid = 0;
      check("flush after STRP", int'(flush), 1);
      @(negedge clk);
      // kept structures: hand back everything so each configuration starts empty
      for (int s = 0; s < 8; s++)
        for (int t = 0; t < 2; t++)
          while (usage[s][t] != '0) begin
            h = int'(usage[s][t]);
            req[s][t].free = req_t'((h > 12) ? 12 : h);
            @(negedge clk);
            req[s][t].free = '0;
          end
      for (int s = 0; s < 8; s++) begin
        max_sdt[s] = 0; max_app[s] = 0; refused_below[s] = 0; capped[s] = 0;
      end

      for (int cyc = 0; cyc < RUN; cyc++) begin
        @(negedge clk);
        for (int s = 0; s < 8; s++) begin
          ua = int'(usage[s][TID_PROC]);
          us = int'(usage[s][TID_SDT]);
          // application: always a full group, frees 0..4 of what it holds
          req[s][TID_PROC].alloc = req_t'(12);
          req[s][TID_PROC].free  = req_t'($urandom_range(ua < 4 ? ua : 4));
          // delivery thread: top up towards its working set, turn over 0..2
          want = TARGET[s] - us;
          if (want > 12) want = 12;
          if (want < 0) want = 0;
          req[s][TID_SDT].alloc = req_t'(want);
          req[s][TID_SDT].free  = req_t'($urandom_range(us < 2 ? us : 2));
        end
        #1;
        for (int s = 0; s < 8; s++) begin
          us = int'(usage[s][TID_SDT]);
          lim_s = SIZE[s] * PCT[c] / 100;
          a = int'(req[s][TID_SDT].alloc);
          if (us > max_sdt[s]) max_sdt[s] = us;
          if (int'(usage[s][TID_PROC]) > max_app[s]) max_app[s] = int'(usage[s][TID_PROC]);
          // the thread must get everything that fits under its own limit
          if (int'(grant[s][TID_SDT]) != ((us + a <= lim_s) ? a : (lim_s > us ? lim_s - us : 0)))
            refused_below[s]++;
          if (int'(grant[s][TID_SDT]) < a) capped[s]++;
        end
      end

      $display("%s:", CNAME[c]);
      for (int s = 0; s < 8; s++) begin
        lim_s = SIZE[s] * PCT[c] / 100;
        exp_max = (TARGET[s] <= lim_s) ? TARGET[s] : lim_s;
        fit = TARGET[s] <= lim_s;
        $display("  struct %0d: SDT limit %0d target %0d reached %0d, app limit %0d reached %0d, SDT capped %0d cycles",
                 s, lim_s, TARGET[s], max_sdt[s], SIZE[s] - lim_s, max_app[s], capped[s]);
        check("SDT limit", int'(limit[s][TID_SDT]), lim_s);
        check("SDT working set held", max_sdt[s], exp_max);
        check("SDT always gets what fits under its limit", refused_below[s], 0);
        check("app reaches its limit", max_app[s], SIZE[s] - lim_s);
        if (TARGET[s] > 0) begin
          check("SDT cut short only where the limit is below its working set", int'(capped[s] > 0), int'(!fit));
          if (fit) n_fit++; else n_short++;
        end
      end
    end

    $display("structure-configurations that hold the working set: %0d, short: %0d", n_fit, n_short);
    checks++; if (n_fit == 0 || n_short == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
