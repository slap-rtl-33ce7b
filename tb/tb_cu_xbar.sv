// tb_cu_xbar: the GPCU-to-CU association crossbar, two GPCUs and eight CUs.
//   * reset association is the paper's example: 3 CUs (0,1,4) and 5 CUs
//     (2,3,5,6,7), i.e. SIMD12 and SIMD20;
//   * pushes reach exactly the owned CUs, with 16*rank added to the address;
//   * full flags are ORed, idle flags ANDed over the owned CUs only;
//   * a reassignment waits for the CU to be idle and not pushed;
//   * random associations and pushes compared with a reference model.
module tb_cu_xbar;
  import slap_pkg::*;
  localparam int NG = 2, NC = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_assign = 0, cfg_ready;
  logic [2:0] cfg_cu = '0;
  logic [0:0] cfg_owner = '0;
  disp_t g_disp [NG];
  logic [NG-1:0] g_own_any, g_ins_full, g_ld_full, g_st_full, g_idle;
  logic [3:0] g_ncu [NG];
  logic [NC-1:0] c_ins_push, c_ld_push, c_st_push;
  slot_t c_ins [NC];
  word_t c_addr [NC];
  logic [NC-1:0] c_ins_full = '0, c_ld_full = '0, c_st_full = '0, c_idle = '1;

  cu_xbar dut (.*);

  // reference association
  logic [NC-1:0] m_as;
  int            m_own [NC];

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic compare();
    #1;
    for (int g = 0; g < NG; g++) begin
      int n = 0; logic fi = 0, fl = 0, fs = 0, id = 1;
      for (int c = 0; c < NC; c++) if (m_as[c] && m_own[c] == g) begin
        n++; fi |= c_ins_full[c]; fl |= c_ld_full[c]; fs |= c_st_full[c]; id &= c_idle[c];
      end
      chk(g_ncu[g] == n && g_own_any[g] == (n != 0), $sformatf("gpcu %0d owns %0d, model %0d", g, g_ncu[g], n));
      chk(g_ins_full[g] == fi && g_ld_full[g] == fl && g_st_full[g] == fs && g_idle[g] == id,
          $sformatf("gpcu %0d flags", g));
    end
    for (int c = 0; c < NC; c++) begin
      int r = 0;
      for (int k = 0; k < c; k++) if (m_as[k] && m_own[k] == m_own[c]) r++;
      if (m_as[c]) begin
        chk(c_ins_push[c] == g_disp[m_own[c]].ins_push && c_ld_push[c] == g_disp[m_own[c]].ld_push &&
            c_st_push[c] == g_disp[m_own[c]].st_push, $sformatf("cu %0d pushes", c));
        if (g_disp[m_own[c]].ins_push)
          chk(c_ins[c] == g_disp[m_own[c]].ins && c_addr[c] == g_disp[m_own[c]].addr + word_t'(16 * r),
              $sformatf("cu %0d instruction/address (rank %0d)", c, r));
      end else begin
        chk(!c_ins_push[c] && !c_ld_push[c] && !c_st_push[c], $sformatf("unassigned cu %0d pushed", c));
      end
    end
  endtask

  task automatic rand_disp();
    for (int g = 0; g < NG; g++) begin
      g_disp[g] = '0;
      g_disp[g].ins_push = $urandom_range(1);
      g_disp[g].ld_push  = g_disp[g].ins_push && $urandom_range(1);
      g_disp[g].st_push  = g_disp[g].ins_push && !g_disp[g].ld_push && $urandom_range(1);
      g_disp[g].ins      = slot_t'($urandom);
      g_disp[g].addr     = word_t'($urandom) & ~word_t'(15);
    end
    c_ins_full = NC'($urandom); c_ld_full = NC'($urandom); c_st_full = NC'($urandom);
    c_idle = NC'($urandom);
  endtask

  initial begin
    m_as = '1;
    m_own = '{0, 0, 1, 1, 0, 1, 1, 1};
    g_disp[0] = '0; g_disp[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(g_ncu[0] == 3 && g_ncu[1] == 5, "reset association SIMD12 / SIMD20");
    for (int i = 0; i < 200; i++) begin @(negedge clk); rand_disp(); compare(); end
    // reassignment waits for an idle CU
    @(negedge clk);
    g_disp[0] = '0; g_disp[1] = '0; c_idle = '1; c_idle[2] = 1'b0;
    cfg_valid = 1; cfg_cu = 3'd2; cfg_assign = 1; cfg_owner = 1'b0;
    @(negedge clk);
    chk(!cfg_ready && g_ncu[0] == 3, "busy CU is not moved");
    c_idle[2] = 1'b1;
    @(negedge clk);
    cfg_valid = 0; m_own[2] = 0;
    chk(g_ncu[0] == 4 && g_ncu[1] == 4, "CU 2 moved to GPCU 0");
    // random reassignments interleaved with traffic
    for (int i = 0; i < 300; i++) begin
      logic acc;
      @(negedge clk);
      cfg_valid = 0;
      rand_disp();
      if ($urandom_range(3) == 0) begin
        cfg_valid = 1; cfg_cu = 3'($urandom); cfg_assign = ($urandom_range(5) != 0);
        cfg_owner = 1'($urandom);
      end
      #1;
      if (cfg_valid) begin
        logic exp_ready;
        exp_ready = c_idle[cfg_cu] && !c_ins_push[cfg_cu] && !c_ld_push[cfg_cu] && !c_st_push[cfg_cu];
        chk(cfg_ready == exp_ready, "cfg_ready rule");
      end
      compare();
      acc = cfg_valid && cfg_ready;
      @(posedge clk);
      if (acc) begin m_as[cfg_cu] = cfg_assign; m_own[cfg_cu] = cfg_owner; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
