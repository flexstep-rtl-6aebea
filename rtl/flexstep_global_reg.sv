// flexstep_global_reg -- global configuration register of a FlexStep SoC.
//
// Makes the attribute of every core (main, checker or plain compute core) and the channel set-up
// visible to all cores and drives the system interconnect's MUX/DEMUX controls, as the paper
// describes. Fields, all written through the custom instructions:
//   main_mask / chk_mask   G.Configure(Main_IDs, Checker_IDs): one bit per core
//   assoc[m]               M.associate from main core m: its checker core(s), one bit per core
//   check_en[m]            M.check from core m: checking enabled
//   busy[c]                C.check_state from core c: 1 = busy (replaying), 0 = idle
// Each core sends one gcfg_req_t per cycle. M/C writes only touch the issuing core's own field.
// If several cores issue G.Configure in the same cycle the lowest-numbered one wins (this
// priority, the field layout and "main wins if a core is in both masks" are this design's
// choices; the paper only says a global register holds the IDs). Reset: all cores compute,
// nothing associated, checking off, checkers idle.
module flexstep_global_reg
  import flexstep_pkg::*;
#(
  parameter int unsigned NCORES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  gcfg_req_t   req      [NCORES],
  output core_mask_t  main_mask,
  output core_mask_t  chk_mask,
  output core_attr_e  attr     [NCORES],
  output core_mask_t  assoc    [NCORES],
  output logic [NCORES-1:0] check_en,
  output logic [NCORES-1:0] busy
);
  core_mask_t main_q, chk_q;
  core_mask_t assoc_q [NCORES];
  logic [NCORES-1:0] check_q, busy_q;

  // lowest-numbered G.Configure request of this cycle
  logic       cfg_hit;
  core_mask_t cfg_main, cfg_chk;
  always_comb begin
    cfg_hit  = 1'b0;
    cfg_main = '0;
    cfg_chk  = '0;
    for (int i = NCORES - 1; i >= 0; i--) begin
      if (req[i].configure) begin
        cfg_hit  = 1'b1;
        cfg_main = req[i].main_mask;
        cfg_chk  = req[i].chk_mask;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      main_q  <= '0;
      chk_q   <= '0;
      check_q <= '0;
      busy_q  <= '0;
      for (int i = 0; i < NCORES; i++) assoc_q[i] <= '0;
    end else begin
      if (cfg_hit) begin
        main_q <= cfg_main;
        chk_q  <= cfg_chk;
      end
      for (int i = 0; i < NCORES; i++) begin
        if (req[i].assoc_we) assoc_q[i]  <= req[i].assoc_mask;
        if (req[i].check_we) check_q[i]  <= req[i].check_val;
        if (req[i].state_we) busy_q[i]   <= req[i].state_val;
      end
    end
  end

  assign main_mask = main_q;
  assign chk_mask  = chk_q;
  assign check_en  = check_q;
  assign busy      = busy_q;
  always_comb begin
    for (int i = 0; i < NCORES; i++) begin
      assoc[i] = assoc_q[i];
      if (main_q[i])     attr[i] = ATTR_MAIN;
      else if (chk_q[i]) attr[i] = ATTR_CHECKER;
      else               attr[i] = ATTR_COMPUTE;
    end
  end
endmodule
