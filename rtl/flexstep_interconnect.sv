// flexstep_interconnect -- System Interconnect of the Data Buffering and Channelling units.
//
// A fully connected MUX-DEMUX network between the Data Buffer FIFOs of all cores. Its controls
// come from the global register: a main core m sends to every checker core whose bit is set in
// assoc[m], so one-to-one (dual-core), one-to-two (triple-core) and wider channels are all the
// same mechanism. An entry leaves a main core's FIFO only when every associated checker FIFO can
// take it in that cycle, and is then written into all of them at once (broadcast).
//
// Conflict resolution: a checker core is owned by one main core at a time (owner/grant register
// per checker). A main core that wants a checker owned by another main keeps its entries in its
// own FIFO until the checker is released. A checker is released when its owner has neither
// checking enabled for it nor entries left to send; checking is only disabled in the kernel, where
// a segment has just ended, so ownership never changes inside a segment. The next owner is the
// lowest-numbered requesting main core. The owner/release rule and the priority are this design's
// choices; the paper states only that one main core's FIFO is permitted to send while the other
// buffers. blocked[m] flags a main core with data that is waiting for such a conflict.
// Ownership is registered (one cycle to grant); the data path is combinational.
module flexstep_interconnect
  import flexstep_pkg::*;
#(
  parameter int unsigned NCORES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  core_attr_e        attr     [NCORES],
  input  core_mask_t        assoc    [NCORES],
  input  logic [NCORES-1:0] check_en,
  // main side: heads of the cores' FIFOs
  input  logic [NCORES-1:0] tx_valid,
  input  entry_t            tx_entry [NCORES],
  output logic [NCORES-1:0] tx_pop,
  // checker side: writes into the cores' FIFOs
  output logic [NCORES-1:0] rx_push,
  output entry_t            rx_entry [NCORES],
  input  logic [NCORES-1:0] rx_ready,
  // status
  output logic [NCORES-1:0] grant_valid,
  output logic [NCORES-1:0] blocked
);
  localparam int unsigned IW = (NCORES > 1) ? $clog2(NCORES) : 1;

  logic [IW-1:0]     owner_q [NCORES];
  logic [NCORES-1:0] gv_q;

  // req[c][m]: main m asks for checker c
  logic [NCORES-1:0] req [NCORES];
  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      for (int m = 0; m < NCORES; m++) begin
        req[c][m] = (attr[m] == ATTR_MAIN) && (attr[c] == ATTR_CHECKER) && assoc[m][c] &&
                    (check_en[m] || tx_valid[m]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gv_q <= '0;
      for (int c = 0; c < NCORES; c++) owner_q[c] <= '0;
    end else begin
      for (int c = 0; c < NCORES; c++) begin
        if (!(gv_q[c] && req[c][owner_q[c]])) begin
          gv_q[c] <= 1'b0;
          for (int m = NCORES - 1; m >= 0; m--) begin
            if (req[c][m]) begin
              gv_q[c]    <= 1'b1;
              owner_q[c] <= IW'(m);
            end
          end
        end
      end
    end
  end

  // a main core may send when it owns every checker it is associated with and all have room
  logic [NCORES-1:0] has_target, owns_all, room_all;
  always_comb begin
    for (int m = 0; m < NCORES; m++) begin
      has_target[m] = 1'b0;
      owns_all[m]   = 1'b1;
      room_all[m]   = 1'b1;
      for (int c = 0; c < NCORES; c++) begin
        if (assoc[m][c] && attr[c] == ATTR_CHECKER) begin
          has_target[m] = 1'b1;
          if (!(gv_q[c] && owner_q[c] == IW'(m))) owns_all[m] = 1'b0;
          if (!rx_ready[c]) room_all[m] = 1'b0;
        end
      end
      tx_pop[m]  = tx_valid[m] && (attr[m] == ATTR_MAIN) && has_target[m] && owns_all[m] &&
                   room_all[m];
      blocked[m] = tx_valid[m] && (attr[m] == ATTR_MAIN) && has_target[m] && !owns_all[m];
    end
  end

  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      rx_entry[c] = tx_entry[owner_q[c]];
      rx_push[c]  = gv_q[c] && (attr[c] == ATTR_CHECKER) && tx_pop[owner_q[c]] &&
                    assoc[owner_q[c]][c];
    end
  end

  assign grant_valid = gv_q;
endmodule
