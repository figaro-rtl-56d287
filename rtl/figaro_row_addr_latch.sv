// figaro_row_addr_latch -- per-subarray row address latch and row address MUX.
//
// A conventional bank latches one row address for the whole bank, so only one
// wordline can be held. FIGARO gives every subarray its own latch for the
// partially predecoded row address. When the bank issues ACTIVATE to this
// subarray (act_sel), the MUX passes the live row address bus to the local row
// decoder in that same cycle and the latch captures it; from the next cycle on
// the decoder is fed from the latch, so the wordline stays asserted while the
// shared row address bus moves on to a second ACTIVATE in another subarray
// (the destination of a RELOC). PRECHARGE (pre) drops the wordline of every
// subarray in the bank.
//
// Interface: act_sel and pre are one-cycle strobes from the bank control;
// row_bus_pred is the 40-bit predecoded row address of the current command.
// wl_on / wl_pred go to the local row decoder. Timing: wl_on rises in the
// cycle of act_sel (combinational) and falls in the cycle of pre.
//
// From the paper: one latch of the 40-bit predecoded row address per
// subarray and a MUX choosing latch or bus. Own choices: the select is
// derived from act_sel, reset clears the latch, and precharge wins over an
// activate in the same cycle (never issued by the controller).
module figaro_row_addr_latch #(
  parameter int unsigned PRED_W = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              act_sel,       // ACTIVATE to this subarray now
  input  logic              pre,           // bank PRECHARGE
  input  logic [PRED_W-1:0] row_bus_pred,  // shared predecoded row address bus
  output logic              wl_on,         // a wordline of this subarray is raised
  output logic [PRED_W-1:0] wl_pred        // address seen by the local row decoder
);
  logic [PRED_W-1:0] latch_q;
  logic              held_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      latch_q <= '0;
      held_q  <= 1'b0;
    end else if (pre) begin
      held_q  <= 1'b0;
    end else if (act_sel) begin
      latch_q <= row_bus_pred;
      held_q  <= 1'b1;
    end
  end

  // row address MUX: live bus while being activated, latched address after
  always_comb begin
    wl_pred = act_sel ? row_bus_pred : latch_q;
    wl_on   = !pre && (act_sel || held_q);
  end
endmodule
