// tb_sdt_repartition_ctrl -- self-checking test of sdt_repartition_ctrl.
//
// Directed part: after reset every structure is in the Baseline configuration; an
// STRP accepted at one edge must raise flush and cfg_we (equal to the mask) in the
// very next cycle only, carry the new configuration on cfg, update cur_cfg at the
// following edge, and hold strp_ready low during that flush cycle.
// Random part: STRP commands arrive at random and are held until accepted, as the
// handshake requires; every output is compared each cycle with a model in the bench.
module tb_sdt_repartition_ctrl;
  import sdt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    strp_valid, strp_ready, flush;
  strp_cmd_t               strp_cmd;
  logic      [NSTRUCT-1:0] cfg_we;
  part_cfg_e               cfg;
  part_cfg_e [NSTRUCT-1:0] cur_cfg;

  sdt_repartition_ctrl u_dut (.*);

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_cfg [NSTRUCT];
  bit m_apply;
  logic [NSTRUCT-1:0] m_mask;
  int m_new;
  int n_strp = 0, n_wait = 0;
  bit acc;

  initial begin
    strp_valid = 0; strp_cmd = '0;
    for (int s = 0; s < NSTRUCT; s++) m_cfg[s] = 0;
    m_apply = 0; m_mask = '0; m_new = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Directed: STRP (mask IQ|ROB, Low) accepted at edge N.
    @(negedge clk);
    for (int s = 0; s < NSTRUCT; s++) check("reset cfg", int'(cur_cfg[s]), 0);
    check("idle ready", int'(strp_ready), 1);
    check("idle flush", int'(flush), 0);
    strp_valid = 1; strp_cmd = '{mask: 8'b0001_0001, cfg: CFG_LOW};
    @(negedge clk);                       // cycle N+1
    strp_valid = 0;
    check("flush in N+1", int'(flush), 1);
    check("ready low in N+1", int'(strp_ready), 0);
    check("cfg_we = mask", int'(cfg_we), 32'h11);
    check("cfg", int'(cfg), int'(CFG_LOW));
    check("cur_cfg not yet", int'(cur_cfg[0]), 0);
    @(negedge clk);                       // cycle N+2
    check("flush one cycle", int'(flush), 0);
    check("cfg_we off", int'(cfg_we), 0);
    check("cur_cfg IQ", int'(cur_cfg[S_IQ]), int'(CFG_LOW));
    check("cur_cfg ROB", int'(cur_cfg[S_ROB]), int'(CFG_LOW));
    check("cur_cfg LQ kept", int'(cur_cfg[S_LQ]), 0);
    m_cfg[S_IQ] = 3; m_cfg[S_ROB] = 3;

    // Random: commands held until accepted.
    for (int cyc = 0; cyc < 20000; cyc++) begin
      if (!strp_valid && $urandom_range(99) < 40) begin
        strp_valid = 1;
        strp_cmd = '{mask: NSTRUCT'($urandom()), cfg: part_cfg_e'($urandom_range(3))};
      end
      #1;
      check("ready", int'(strp_ready), int'(!m_apply));
      check("flush", int'(flush), int'(m_apply));
      check("cfg_we", int'(cfg_we), m_apply ? int'(m_mask) : 0);
      if (m_apply) check("cfg", int'(cfg), m_new);
      for (int s = 0; s < NSTRUCT; s++) check("cur_cfg", int'(cur_cfg[s]), m_cfg[s]);
      if (strp_valid && !m_apply) n_strp++;
      if (strp_valid && m_apply) n_wait++;
      acc = strp_valid && !m_apply;
      @(posedge clk);
      if (m_apply) begin
        for (int s = 0; s < NSTRUCT; s++) if (m_mask[s]) m_cfg[s] = m_new;
        m_apply = 0;
      end else if (strp_valid) begin
        m_apply = 1; m_mask = strp_cmd.mask; m_new = int'(strp_cmd.cfg);
      end
      @(negedge clk);
      if (acc) strp_valid = 0;   // accepted at the last edge
    end
    $display("strp accepted=%0d held while busy=%0d", n_strp, n_wait);
    checks++; if (n_strp == 0 || n_wait == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
