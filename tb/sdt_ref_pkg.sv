// sdt_ref_pkg -- reference model of one core's SDT partitioning, for testbenches.
//
// core_model keeps, independently of the RTL, each structure's size, the limit and
// usage of both threads, each structure's configuration and the state of the STRP
// handshake. expect_cycle() works out what the RTL should answer to one cycle's
// inputs; commit_cycle() advances the model across the clock edge. The SDT share is
// taken as size * {50,10,20,40} % (rounded down); a thread is granted as many
// requested entries as fit under its limit and in the structure for Baseline/High/Medium/Low; a
// flush empties IQ, LQ, SQ and ROB (structures 0, 1, 2, 4) and leaves the others.
// It also counts how often each mechanism occurred, for the coverage checks.
package sdt_ref_pkg;

  class core_model;
    int  size  [8];
    int  use_  [8][2];
    int  lim   [8][2];
    int  cfg   [8];
    bit  apply;              // an accepted STRP is being applied this cycle
    int  new_cfg;
    bit  [7:0] mask;
    // expected outputs of the current cycle
    int  g     [8][2];     // entries granted
    bit  stall [2];
    // coverage counters
    int  n_grant, n_partial, n_block_limit, n_block_full, n_over_limit, n_stall, n_flush,
         n_clear, n_keep, n_strp_wait;
    int  n_cfg [4];

    function new(int s0, int s1, int s2, int s3, int s4, int s5, int s6, int s7);
      size = '{s0, s1, s2, s3, s4, s5, s6, s7};
      reset();
      n_grant = 0; n_partial = 0; n_block_limit = 0; n_block_full = 0; n_over_limit = 0; n_stall = 0;
      n_flush = 0; n_clear = 0; n_keep = 0; n_strp_wait = 0;
      n_cfg = '{0, 0, 0, 0};
    endfunction

    static function int share(int sz, int c);
      int pct [4] = '{50, 10, 20, 40};
      return sz * pct[c] / 100;
    endfunction

    static function bit clears(int s);
      return s == 0 || s == 1 || s == 2 || s == 4;
    endfunction

    function void set_cfg(int s, int c);
      cfg[s] = c;
      lim[s][1] = share(size[s], c);
      lim[s][0] = size[s] - lim[s][1];
    endfunction

    function void reset();
      for (int s = 0; s < 8; s++) begin
        use_[s] = '{0, 0};
        set_cfg(s, 0);
      end
      apply = 0; mask = '0; new_cfg = 0;
    endfunction

    // al / fr: per structure and thread, entries taken / freed this cycle.
    function void expect_cycle(int al [8][2]);
      int taken;
      stall = '{0, 0};
      for (int s = 0; s < 8; s++) begin
        taken = use_[s][0] + use_[s][1];
        for (int t = 0; t < 2; t++) begin
          begin
            int rt, ra;
            rt = (lim[s][t] > use_[s][t]) ? lim[s][t] - use_[s][t] : 0;
            ra = (size[s] > taken) ? size[s] - taken : 0;
            g[s][t] = apply ? 0 : al[s][t];
            if (g[s][t] > rt) g[s][t] = rt;
            if (g[s][t] > ra) g[s][t] = ra;
            taken += g[s][t];
            if (g[s][t] != 0) n_grant++;
            if (!apply && g[s][t] != al[s][t]) begin
              if (g[s][t] == rt) n_block_limit++;
              else n_block_full++;
              if (g[s][t] != 0) n_partial++;
            end
          end
          if (al[s][t] != g[s][t]) stall[t] = 1;
          if (use_[s][t] > lim[s][t]) n_over_limit++;
        end
      end
      for (int t = 0; t < 2; t++) if (stall[t]) n_stall++;
    endfunction

    // strp_valid / strp_mask / strp_cfg: the STRP inputs of this cycle.
    function void commit_cycle(int al [8][2], int fr [8][2], bit strp_valid,
                               bit [7:0] strp_mask, int strp_cfg);
      for (int s = 0; s < 8; s++) begin
        for (int t = 0; t < 2; t++) begin
          if (apply && clears(s)) use_[s][t] = 0;
          else use_[s][t] = use_[s][t] - fr[s][t] + g[s][t];
        end
        if (apply && mask[s]) begin
          set_cfg(s, new_cfg);
          n_cfg[new_cfg]++;
        end
      end
      if (apply) begin
        n_flush++;
        for (int s = 0; s < 8; s++)
          if (use_[s][0] + use_[s][1] != 0 || clears(s)) begin
            if (clears(s)) n_clear++; else n_keep++;
          end
        apply = 0;
        if (strp_valid) n_strp_wait++;
      end else if (strp_valid) begin
        apply = 1; mask = strp_mask; new_cfg = strp_cfg;
      end
    endfunction

    // Most entries thread t may still free in structure s.
    function int held(int s, int t);
      return use_[s][t];
    endfunction
  endclass

endpackage
