// tb_sdt_cmp -- end-to-end test of the SDT chip's partitioning logic (sdt_cmp).
//
// The chip is simulated with its default parameters: 20 cores, each with the full
// structure sizes of the default core (IQ 194, LQ 144, SQ 112, BTB 8192, ROB 512,
// integer/float/vector registers 448/256/400). Every cycle, every core's two threads
// ask for random numbers of entries (up to the 12-wide group) in every structure
// and free random numbers of the entries they hold; long phases of heavy
// allocation drive threads into their limits. Each core's software daemon is
// stood in for by random STRP instructions that select random structures and a
// random configuration, so cores run different partitions at the same time.
// Every output of every core is compared each cycle with an independent model of
// that core (sdt_ref_pkg::core_model). At the end the bench checks that each
// mechanism happened: grants, partial grants, blocking at the limit, blocking because the whole
// structure is full, a thread above a freshly shrunk limit, thread stalls,
// flushes that empty the queues and ROB, entries kept across a flush, an STRP
// held while the previous one is applied, and all four configurations.
module tb_sdt_cmp;
  import sdt_pkg::*;
  import sdt_ref_pkg::*;

  localparam int NC = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NC-1:0]                            strp_valid, strp_ready, flush;
  strp_cmd_t [NC-1:0]                            strp_cmd;
  logic      [NC-1:0][NTHREADS-1:0]              thread_stall;
  part_req_t [NC-1:0][NSTRUCT-1:0][NTHREADS-1:0] req;
  req_t      [NC-1:0][NSTRUCT-1:0][NTHREADS-1:0] grant;
  logic      [NC-1:0][NSTRUCT-1:0][NTHREADS-1:0] blocked;
  cnt_t      [NC-1:0][NSTRUCT-1:0][NTHREADS-1:0] usage, limit;
  part_cfg_e [NC-1:0][NSTRUCT-1:0]               cur_cfg;

  sdt_cmp u_dut (.*);

  int checks = 0, failures = 0;
  core_model m [NC];

  task automatic check(string what, int c, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL core %0d %s: got %0d expected %0d at %0t", c, what, got, exp, $time);
    end
  endtask

  localparam int CYCLES = 6000;

  initial begin
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  al [NC][8][2], fr [NC][8][2];
  bit  acc [NC];
  int  mixed_cycles = 0;

  initial begin
    for (int c = 0; c < NC; c++) m[c] = new(194, 144, 112, 8192, 512, 448, 256, 400);
    strp_valid = '0; strp_cmd = '0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        // heavy phases differ per core so that cores are in different states
        bit heavy;
        heavy = (((cyc + c * 97) / 700) % 2) == 0;
        if (!strp_valid[c] && ($urandom_range(999) < 4 || (cyc % 1000) == 0 || (cyc % 1000) == 1)) begin
          strp_valid[c] = 1;
          strp_cmd[c] = '{mask: ($urandom_range(3) == 0) ? 8'hff : 8'($urandom()),
                          cfg: part_cfg_e'($urandom_range(3))};
        end
        for (int s = 0; s < 8; s++)
          for (int t = 0; t < 2; t++) begin
            int h, fmax;
            al[c][s][t] = ($urandom_range(99) < (heavy ? 80 : 30)) ? $urandom_range(heavy ? 12 : 3) : 0;
            // never free more than either the model or the block holds
            h = m[c].held(s, t);
            if (int'(usage[c][s][t]) < h) h = int'(usage[c][s][t]);
            fmax = heavy ? 1 : 12;
            fr[c][s][t] = $urandom_range(h < fmax ? h : fmax);
            req[c][s][t].alloc = req_t'(al[c][s][t]);
            req[c][s][t].free  = req_t'(fr[c][s][t]);
          end
      end
      #1;
      for (int c = 0; c < NC; c++) begin
        m[c].expect_cycle(al[c]);
        check("strp_ready", c, int'(strp_ready[c]), int'(!m[c].apply));
        check("flush", c, int'(flush[c]), int'(m[c].apply));
        for (int t = 0; t < 2; t++) check("thread_stall", c, int'(thread_stall[c][t]), int'(m[c].stall[t]));
        for (int s = 0; s < 8; s++) begin
          check("cur_cfg", c, int'(cur_cfg[c][s]), m[c].cfg[s]);
          for (int t = 0; t < 2; t++) begin
            check("grant", c, int'(grant[c][s][t]), m[c].g[s][t]);
            check("blocked", c, int'(blocked[c][s][t]), int'(m[c].use_[s][t] >= m[c].lim[s][t]));
            check("usage", c, int'(usage[c][s][t]), m[c].use_[s][t]);
            check("limit", c, int'(limit[c][s][t]), m[c].lim[s][t]);
          end
        end
        acc[c] = strp_valid[c] && !m[c].apply;
      end
      begin
        bit differ = 0;
        for (int c = 1; c < NC; c++) if (m[c].cfg[S_ROB] != m[0].cfg[S_ROB]) differ = 1;
        if (differ) mixed_cycles++;
      end
      @(posedge clk);
      for (int c = 0; c < NC; c++)
        m[c].commit_cycle(al[c], fr[c], strp_valid[c], strp_cmd[c].mask, int'(strp_cmd[c].cfg));
      #1;
      for (int c = 0; c < NC; c++) if (acc[c]) strp_valid[c] = 0;
    end

    begin
      int tp = 0, tg = 0, tbl = 0, tbf = 0, tov = 0, tst = 0, tfl = 0, tcl = 0, tkp = 0, tw = 0;
      int tc [4] = '{0, 0, 0, 0};
      for (int c = 0; c < NC; c++) begin
        tg += m[c].n_grant; tp += m[c].n_partial; tbl += m[c].n_block_limit; tbf += m[c].n_block_full;
        tov += m[c].n_over_limit; tst += m[c].n_stall; tfl += m[c].n_flush;
        tcl += m[c].n_clear; tkp += m[c].n_keep; tw += m[c].n_strp_wait;
        for (int k = 0; k < 4; k++) tc[k] += m[c].n_cfg[k];
      end
      $display("partial_grants=%0d grants=%0d limit_blocks=%0d structure_full_blocks=%0d over_limit=%0d stalls=%0d",
               tp, tg, tbl, tbf, tov, tst);
      $display("flushes=%0d queue_clears=%0d kept_across_flush=%0d strp_held=%0d cfg_applied=%0d/%0d/%0d/%0d mixed_partition_cycles=%0d",
               tfl, tcl, tkp, tw, tc[0], tc[1], tc[2], tc[3], mixed_cycles);
      checks++; if (tg == 0)  begin failures++; $display("no grant"); end
      checks++; if (tp == 0)  begin failures++; $display("no partial grant"); end
      checks++; if (tbl == 0) begin failures++; $display("no block at limit"); end
      checks++; if (tbf == 0) begin failures++; $display("no full-structure block"); end
      checks++; if (tov == 0) begin failures++; $display("never above a shrunk limit"); end
      checks++; if (tst == 0) begin failures++; $display("no stall"); end
      checks++; if (tfl == 0) begin failures++; $display("no flush"); end
      checks++; if (tcl == 0) begin failures++; $display("no queue clear"); end
      checks++; if (tkp == 0) begin failures++; $display("nothing kept across flush"); end
      checks++; if (tw == 0)  begin failures++; $display("no STRP held"); end
      checks++; if (mixed_cycles == 0) begin failures++; $display("cores never differed"); end
      for (int k = 0; k < 4; k++) begin checks++; if (tc[k] == 0) begin failures++; $display("cfg %0d unused", k); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
