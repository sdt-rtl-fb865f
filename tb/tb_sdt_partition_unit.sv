// tb_sdt_partition_unit -- self-checking test of sdt_partition_unit.
//
// Two instances are tested side by side: a 20-entry structure that a flush empties
// (like an IQ) and a 37-entry structure that keeps its entries across a flush
// (like a register file). Each cycle the bench drives random allocate/free counts
// for both threads, occasional configuration writes and flushes, and compares the
// granted counts, blocked flags, usage and limit registers with a reference model kept in
// the bench. Phases of heavy allocation push the threads to their limits. It also
// checks by hand that a new configuration takes effect exactly one edge after
// cfg_we, and counts how often each mechanism occurred.
module tb_sdt_partition_unit;
  import sdt_pkg::*;

  localparam int ND = 2;
  localparam int SZ [ND] = '{20, 37};
  localparam bit CL [ND] = '{1'b1, 1'b0};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [ND-1:0] flush, cfg_we;
  part_cfg_e          cfg [ND];
  part_req_t [NTHREADS-1:0] req [ND];
  req_t      [NTHREADS-1:0] grant [ND];
  logic      [NTHREADS-1:0] blocked [ND];
  cnt_t      [NTHREADS-1:0] usage [ND], limit [ND];

  for (genvar d = 0; d < ND; d++) begin : g_dut
    sdt_partition_unit #(.SIZE(SZ[d]), .CLEAR_ON_FLUSH(CL[d])) u_dut (
      .clk, .rst_n, .flush(flush[d]), .cfg_we(cfg_we[d]), .cfg(cfg[d]), .req(req[d]),
      .grant(grant[d]), .blocked(blocked[d]), .usage_o(usage[d]), .limit_o(limit[d]));
  end

  int checks = 0, failures = 0;
  int m_use [ND][2], m_lim [ND][2];
  int n_partial = 0, n_grant = 0, n_block_limit = 0, n_block_total = 0, n_flush_clear = 0, n_flush_keep = 0,
      n_over_limit = 0, n_cfg [4] = '{0, 0, 0, 0};

  // SDT share of each configuration, from the percentages 50/10/20/40.
  function automatic int share(int size, int c);
    int pct [4] = '{50, 10, 20, 40};
    return size * pct[c] / 100;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int al [ND][2], fr [ND][2], taken, hm;
    bit heavy;
    int g [2], rt, ra;
    for (int d = 0; d < ND; d++) begin
      flush[d] = 0; cfg_we[d] = 0; cfg[d] = CFG_BASELINE; req[d] = '0;
      for (int t = 0; t < 2; t++) begin
        m_use[d][t] = 0;
        m_lim[d][t] = (t == 1) ? share(SZ[d], 0) : SZ[d] - share(SZ[d], 0);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Directed: a configuration write is in force one edge later.
    @(negedge clk);
    cfg_we[0] = 1; cfg[0] = CFG_HIGH;
    #1 check("limit before edge", int'(limit[0][1]), share(20, 0));
    @(negedge clk);
    cfg_we[0] = 0;
    check("SDT limit after High", int'(limit[0][1]), 2);
    check("proc limit after High", int'(limit[0][0]), 18);
    m_lim[0][1] = 2; m_lim[0][0] = 18;

    for (int cyc = 0; cyc < 20000; cyc++) begin
      heavy = ((cyc / 200) % 2) == 1;
      @(negedge clk);
      for (int d = 0; d < ND; d++) begin
        flush[d]  = ($urandom_range(99) < 3);
        cfg_we[d] = ($urandom_range(99) < 4);
        cfg[d]    = part_cfg_e'($urandom_range(3));
        for (int t = 0; t < 2; t++) begin
          al[d][t] = ($urandom_range(99) < 70) ? $urandom_range(heavy ? 12 : 4) : 0;
          // never free more than either the model or the block holds
          hm = (m_use[d][t] < int'(usage[d][t])) ? m_use[d][t] : int'(usage[d][t]);
          fr[d][t] = $urandom_range((hm < (heavy ? 2 : 12)) ? hm : (heavy ? 2 : 12));
          req[d][t].alloc = req_t'(al[d][t]);
          req[d][t].free  = req_t'(fr[d][t]);
        end
      end
      #1;
      for (int d = 0; d < ND; d++) begin
        taken = m_use[d][0] + m_use[d][1];
        for (int t = 0; t < 2; t++) begin
          rt = (m_lim[d][t] > m_use[d][t]) ? m_lim[d][t] - m_use[d][t] : 0;
          ra = (SZ[d] > taken) ? SZ[d] - taken : 0;
          g[t] = flush[d] ? 0 : al[d][t];
          if (g[t] > rt) g[t] = rt;
          if (g[t] > ra) g[t] = ra;
          taken += g[t];
          check("grant", int'(grant[d][t]), g[t]);
          check("blocked", int'(blocked[d][t]), int'(m_use[d][t] >= m_lim[d][t]));
          check("usage", int'(usage[d][t]), m_use[d][t]);
          check("limit", int'(limit[d][t]), m_lim[d][t]);
          if (g[t] != 0) n_grant++;
          if (!flush[d] && g[t] != al[d][t]) begin
            if (g[t] == rt) n_block_limit++;
            else n_block_total++;
            if (g[t] != 0) n_partial++;
          end
          if (m_use[d][t] > m_lim[d][t]) n_over_limit++;
        end
        if (flush[d]) begin
          if (CL[d]) n_flush_clear++; else n_flush_keep++;
        end
        // model update at the coming edge
        for (int t = 0; t < 2; t++) begin
          if (flush[d] && CL[d]) m_use[d][t] = 0;
          else m_use[d][t] = m_use[d][t] - fr[d][t] + g[t];
          if (cfg_we[d]) m_lim[d][t] = (t == 1) ? share(SZ[d], int'(cfg[d])) : SZ[d] - share(SZ[d], int'(cfg[d]));
        end
        if (cfg_we[d]) n_cfg[cfg[d]]++;
      end
    end

    $display("partial=%0d grants=%0d limit_blocks=%0d structure_full_blocks=%0d over_limit_cycles=%0d flush_clear=%0d flush_keep=%0d cfg=%0d/%0d/%0d/%0d",
             n_partial, n_grant, n_block_limit, n_block_total, n_over_limit, n_flush_clear, n_flush_keep,
             n_cfg[0], n_cfg[1], n_cfg[2], n_cfg[3]);
    checks++; if (n_grant == 0) failures++;
    checks++; if (n_partial == 0) failures++;
    checks++; if (n_block_limit == 0) failures++;
    checks++; if (n_block_total == 0) failures++;
    checks++; if (n_over_limit == 0) failures++;
    checks++; if (n_flush_clear == 0 || n_flush_keep == 0) failures++;
    for (int c = 0; c < 4; c++) begin checks++; if (n_cfg[c] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
