// tb_sdt_core_partition -- self-checking test of one core's partitioning logic.
//
// sdt_core_partition is simulated with the full structure sizes of the default
// core. Every cycle both threads ask for random numbers of entries (up to the
// 12-wide group) in all eight structures and free random numbers of the entries
// they hold; phases of heavy allocation drive the threads into their limits.
// Random STRP instructions re-partition random sets of structures. Every output is
// compared each cycle with the independent model sdt_ref_pkg::core_model, which
// also fixes the timing: an STRP accepted at one edge flushes in the next cycle and
// the new limits hold from the edge after. A directed start checks the reset
// limits of the Baseline configuration and one STRP by hand. At the end the bench
// checks that each mechanism occurred.
module tb_sdt_core_partition;
  import sdt_pkg::*;
  import sdt_ref_pkg::*;

  localparam int NC = 1;

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

  sdt_core_partition u_dut (
    .clk, .rst_n,
    .strp_valid (strp_valid[0]), .strp_ready (strp_ready[0]), .strp_cmd (strp_cmd[0]),
    .flush (flush[0]), .thread_stall (thread_stall[0]),
    .req (req[0]), .grant (grant[0]), .blocked (blocked[0]),
    .usage (usage[0]), .limit (limit[0]), .cur_cfg (cur_cfg[0]));

  int checks = 0, failures = 0;
  core_model m [NC];

  task automatic check(string what, int c, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL core %0d %s: got %0d expected %0d at %0t", c, what, got, exp, $time);
    end
  endtask

  localparam int CYCLES = 20000;

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

    // Directed: Baseline limits after reset, then STRP {BTB, ROB} <- High.
    @(negedge clk);
    check("reset SDT BTB limit", 0, int'(limit[0][S_BTB][TID_SDT]), 4096);
    check("reset SDT IQ limit", 0, int'(limit[0][S_IQ][TID_SDT]), 97);
    strp_valid[0] = 1; strp_cmd[0] = '{mask: 8'b0001_1000, cfg: CFG_HIGH};
    @(negedge clk);
    strp_valid[0] = 0;
    check("flush one cycle after STRP", 0, int'(flush[0]), 1);
    check("old limit during flush", 0, int'(limit[0][S_ROB][TID_SDT]), 256);
    @(negedge clk);
    check("flush ends", 0, int'(flush[0]), 0);
    check("SDT BTB limit High", 0, int'(limit[0][S_BTB][TID_SDT]), 819);
    check("proc BTB limit High", 0, int'(limit[0][S_BTB][TID_PROC]), 7373);
    check("SDT ROB limit High", 0, int'(limit[0][S_ROB][TID_SDT]), 51);
    check("SDT IQ limit kept", 0, int'(limit[0][S_IQ][TID_SDT]), 97);
    m[0].set_cfg(S_BTB, 1); m[0].set_cfg(S_ROB, 1);

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        // heavy phases differ per core so that cores are in different states
        bit heavy;
        heavy = ((cyc / 700) % 2) == 0;
        if (!strp_valid[c] && ($urandom_range(999) < 4 || (cyc % 1000) == 999 || (cyc % 1000) == 0)) begin
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
      for (int k = 0; k < 4; k++) begin checks++; if (tc[k] == 0) begin failures++; $display("cfg %0d unused", k); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
