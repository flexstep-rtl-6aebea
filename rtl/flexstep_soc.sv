// flexstep_soc -- FlexStep error-detection fabric of a multi-core SoC (top level).
//
// NCORES identical FlexStep units, one per core, a global configuration register and the
// system interconnect that links the units' Data Buffer FIFOs. Any core can be made a main core,
// a checker core or a compute core at run time (G.Configure); a main core's checking segments
// are replayed asynchronously on the checker core(s) it is associated with (M.associate), one,
// two or more at a time. The default of four cores is the SoC whose area and power the paper
// reports; the host cores themselves (in-order Rocket cores with their L1/L2 caches) are outside
// this module, and each core's connection points are brought out as arrays of ports indexed by
// core number (see flexstep_unit for their meaning and timing).
module flexstep_soc
  import flexstep_pkg::*;
#(
  parameter int unsigned NCORES   = 4,
  parameter int unsigned DEPTH    = 64,
  parameter int unsigned IC_LIMIT = IC_LIMIT_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  // host cores: commit stage
  input  logic [NCORES-1:0] cm_valid,
  input  commit_t           cm          [NCORES],
  output logic [NCORES-1:0] cm_ready,
  output logic [XLEN-1:0]   byp_rdata   [NCORES],
  // host cores: register files and pc
  output logic [RIDX_W-1:0] rf_raddr    [NCORES],
  input  logic [XLEN-1:0]   rf_rdata    [NCORES],
  output logic [NCORES-1:0] rf_we,
  output logic [RIDX_W-1:0] rf_waddr    [NCORES],
  output logic [XLEN-1:0]   rf_wdata    [NCORES],
  output logic [NCORES-1:0] redir_valid,
  output logic [PC_W-1:0]   redir_pc    [NCORES],
  // host cores: custom instructions
  input  logic [NCORES-1:0] isa_valid,
  input  logic [31:0]       isa_instr   [NCORES],
  input  logic [XLEN-1:0]   isa_rs1     [NCORES],
  input  logic [XLEN-1:0]   isa_rs2     [NCORES],
  input  logic [PC_W-1:0]   isa_npc     [NCORES],
  output logic [NCORES-1:0] isa_ready,
  output logic [XLEN-1:0]   isa_rd      [NCORES],
  // status
  output core_attr_e        attr        [NCORES],
  output logic [NCORES-1:0] seg_end_pulse,
  output logic [NCORES-1:0] err_pulse,
  output logic [NCORES-1:0] stall_fifo,
  output logic [NCORES-1:0] channel_blocked,
  output logic [NCORES-1:0] seg_open
);
  gcfg_req_t         gcfg_req [NCORES];
  core_mask_t        main_mask, chk_mask;
  core_mask_t        assoc    [NCORES];
  logic [NCORES-1:0] check_en, busy;

  logic [NCORES-1:0] tx_valid, tx_pop, rx_push, rx_ready, grant_valid;
  entry_t            tx_entry [NCORES];
  entry_t            rx_entry [NCORES];

  flexstep_global_reg #(.NCORES(NCORES)) u_greg (
    .clk, .rst_n, .req(gcfg_req), .main_mask, .chk_mask, .attr, .assoc, .check_en, .busy
  );

  flexstep_interconnect #(.NCORES(NCORES)) u_xbar (
    .clk, .rst_n, .attr, .assoc, .check_en,
    .tx_valid, .tx_entry, .tx_pop, .rx_push, .rx_entry, .rx_ready,
    .grant_valid, .blocked(channel_blocked)
  );

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    logic [IC_W-1:0]              inst_count;
    logic [$clog2(DEPTH+1)-1:0]   fifo_count;
    flexstep_unit #(.NCORES(NCORES), .DEPTH(DEPTH), .IC_LIMIT(IC_LIMIT)) u_unit (
      .clk, .rst_n,
      .cm_valid(cm_valid[i]), .cm(cm[i]), .cm_ready(cm_ready[i]), .byp_rdata(byp_rdata[i]),
      .rf_raddr(rf_raddr[i]), .rf_rdata(rf_rdata[i]), .rf_we(rf_we[i]), .rf_waddr(rf_waddr[i]),
      .rf_wdata(rf_wdata[i]), .redir_valid(redir_valid[i]), .redir_pc(redir_pc[i]),
      .isa_valid(isa_valid[i]), .isa_instr(isa_instr[i]), .isa_rs1(isa_rs1[i]),
      .isa_rs2(isa_rs2[i]), .isa_npc(isa_npc[i]), .isa_ready(isa_ready[i]), .isa_rd(isa_rd[i]),
      .attr(attr[i]), .check_en(check_en[i]), .busy(busy[i]), .main_mask, .chk_mask,
      .gcfg_req(gcfg_req[i]),
      .tx_valid(tx_valid[i]), .tx_entry(tx_entry[i]), .tx_pop(tx_pop[i]),
      .rx_push(rx_push[i]), .rx_entry(rx_entry[i]), .rx_ready(rx_ready[i]),
      .seg_end_pulse(seg_end_pulse[i]), .err_pulse(err_pulse[i]), .stall_fifo(stall_fifo[i]),
      .seg_open(seg_open[i]), .inst_count(inst_count), .fifo_count(fifo_count)
    );
  end
endmodule
