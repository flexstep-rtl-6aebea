// tb_flexstep_interconnect -- system interconnect with four cores: main 0 -> checkers {1, 2}
// (one-to-two broadcast) and main 3 -> checker 1 (conflict). Random back-pressure from the
// checker FIFOs. Checks: checker 2 receives exactly main 0's stream in order; checker 1 receives
// main 0's whole stream, then main 3's (no interleaving); entries to 1 and 2 from main 0 are
// written in the same cycle; main 3 is reported blocked while main 0 owns checker 1; a compute
// core never receives anything.
module tb_flexstep_interconnect;
  import flexstep_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  core_attr_e attr [N];
  core_mask_t assoc [N];
  logic [N-1:0] check_en, tx_valid, tx_pop, rx_push, rx_ready, grant_valid, blocked;
  entry_t tx_entry [N];
  entry_t rx_entry [N];
  entry_t txq [N][$];
  entry_t rxq [N][$];
  int checks = 0, failures = 0, n_block = 0, n_bcast = 0;
  localparam int LEN = 300;

  flexstep_interconnect #(.NCORES(N)) u_dut (.clk, .rst_n, .attr, .assoc, .check_en, .tx_valid,
    .tx_entry, .tx_pop, .rx_push, .rx_entry, .rx_ready, .grant_valid, .blocked);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_comb begin
    for (int i = 0; i < N; i++) begin
      tx_valid[i] = txq[i].size() > 0;
      tx_entry[i] = tx_valid[i] ? txq[i][0] : '0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (rx_push[1] && rx_push[2]) begin
      n_bcast++;
      chk(rx_entry[1] == rx_entry[2], "broadcast carries the same entry");
    end
    if (blocked[3]) n_block++;
    chk(!rx_push[0] && !rx_push[3], "no push into a main core");
    for (int i = 0; i < N; i++) begin
      if (rx_push[i]) begin
        chk(rx_ready[i], "push only when ready");
        rxq[i].push_back(rx_entry[i]);
      end
      if (tx_pop[i]) void'(txq[i].pop_front());
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    attr[0] = ATTR_MAIN; attr[1] = ATTR_CHECKER; attr[2] = ATTR_CHECKER; attr[3] = ATTR_MAIN;
    assoc[0] = 32'b0110; assoc[1] = '0; assoc[2] = '0; assoc[3] = 32'b0010;
    check_en = 4'b0000; rx_ready = '0;
    for (int k = 0; k < LEN; k++) begin
      entry_t e0, e3;
      e0 = '0; e0.kind = ENT_LDST; e0.a = 64'(k); e0.b = 64'h0;
      e3 = '0; e3.kind = ENT_LDST; e3.a = 64'(k); e3.b = 64'h3;
      txq[0].push_back(e0);
      txq[3].push_back(e3);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_en[0] = 1'b1;
    repeat (5) @(negedge clk);
    check_en[3] = 1'b1;
    fork
      forever begin
        @(negedge clk);
        rx_ready = N'($urandom) | 4'b1001;
      end
      begin
        wait (txq[0].size() == 0);
        @(negedge clk);
        check_en[0] = 1'b0;      // main 0 stops checking: releases checker 1
        wait (txq[3].size() == 0);
        repeat (5) @(negedge clk);
      end
    join_any
    chk(rxq[2].size() == LEN, "checker 2 got main 0's stream");
    chk(rxq[1].size() == 2 * LEN, "checker 1 got both streams");
    for (int k = 0; k < LEN; k++) begin
      chk(rxq[2][k].a == 64'(k) && rxq[2][k].b == 64'h0, "checker 2 order");
      chk(rxq[1][k].a == 64'(k) && rxq[1][k].b == 64'h0, "checker 1 main-0 part in order");
      chk(rxq[1][LEN + k].a == 64'(k) && rxq[1][LEN + k].b == 64'h3, "checker 1 main-3 part");
    end
    chk(n_bcast == LEN, "every main-0 entry broadcast to both checkers");
    chk(n_block > 0, "conflict reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
