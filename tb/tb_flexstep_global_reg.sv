// tb_flexstep_global_reg -- global configuration register: reset values, G.Configure with
// same-cycle priority, attribute decoding, per-core M.associate / M.check / C.check_state
// fields, all compared with a reference model over random request traffic.
module tb_flexstep_global_reg;
  import flexstep_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  gcfg_req_t  req [N];
  core_mask_t main_mask, chk_mask;
  core_attr_e attr [N];
  core_mask_t assoc [N];
  logic [N-1:0] check_en, busy;
  core_mask_t m_main, m_chk, m_assoc [N];
  logic [N-1:0] m_check, m_busy;
  int checks = 0, failures = 0;

  flexstep_global_reg #(.NCORES(N)) u_dut (.clk, .rst_n, .req, .main_mask, .chk_mask, .attr,
                                           .assoc, .check_en, .busy);
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin req[i] = '0; m_assoc[i] = '0; end
    m_main = '0; m_chk = '0; m_check = '0; m_busy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) chk(attr[i] == ATTR_COMPUTE && assoc[i] == '0, "reset");
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        req[i] = '0;
        req[i].configure = ($urandom % 10) == 0;
        req[i].main_mask = core_mask_t'($urandom % 16);
        req[i].chk_mask  = core_mask_t'($urandom % 16);
        req[i].assoc_we  = ($urandom % 4) == 0;
        req[i].assoc_mask = core_mask_t'($urandom % 16);
        req[i].check_we  = ($urandom % 4) == 0;
        req[i].check_val = 1'($urandom);
        req[i].state_we  = ($urandom % 4) == 0;
        req[i].state_val = 1'($urandom);
      end
      @(posedge clk);
      begin
        automatic bit hit = 0;
        for (int i = 0; i < N; i++) begin
          if (req[i].configure && !hit) begin
            hit = 1; m_main = req[i].main_mask; m_chk = req[i].chk_mask;
          end
          if (req[i].assoc_we) m_assoc[i] = req[i].assoc_mask;
          if (req[i].check_we) m_check[i] = req[i].check_val;
          if (req[i].state_we) m_busy[i]  = req[i].state_val;
        end
      end
      #1;
      chk(main_mask == m_main && chk_mask == m_chk, "masks");
      chk(check_en == m_check && busy == m_busy, "check_en/busy");
      for (int i = 0; i < N; i++) begin
        chk(assoc[i] == m_assoc[i], "assoc");
        chk(attr[i] == (m_main[i] ? ATTR_MAIN : m_chk[i] ? ATTR_CHECKER : ATTR_COMPUTE), "attr");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
