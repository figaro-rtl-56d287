// dram_bank_array -- BEHAVIOURAL MODEL (not synthesizable) of the analog part
// of one DRAM bank: cell arrays, local row buffers (LRBs, sense amplifiers),
// global bitlines and the global row buffer (GRB), as FIGARO uses them.
//
// Each subarray has an LRB of N_COLS columns. A column of an LRB is either
// precharged (floating) or driven (its sense amplifiers hold a full value).
//   * Sense (act_sel of a subarray, with the row from its local row decoder):
//     every driven column writes its value into the cell of the opened row;
//     every precharged column latches the cell's value. After it the whole
//     LRB is driven and the wordline stays up. This is what lets RELOC write
//     only the relocated columns of the destination row.
//   * Column transfer: a subarray with lrb_to_gbl puts its selected column on
//     the global bitlines, the GRB latches it (and drives it to the I/O on a
//     read). On a write the I/O loads the GRB. Every subarray with gbl_to_lrb
//     takes the global-bitline value into its selected column, which becomes
//     driven; if its wordline is up the cell is overwritten too. This models
//     the GRB's stronger drive flipping a precharged or open LRB column.
//   * Precharge: all columns of all LRBs return to the precharged state.
// Fast and slow subarrays behave the same here; their different timing is
// enforced by the memory controller. The model does not check timing.
//
// Storage: the cells are an associative array keyed by (subarray, row,
// column), so only written columns use memory; unwritten cells read 0.
// Interface timing: all updates at the rising clock edge; rdata shows the GRB
// register, valid from the cycle after a READ.
// Tool notes: the model updates its state with blocking assignments inside
// one clocked process on purpose (sense, then column transfer, in the same
// edge, in order); nothing else reads that state in the same time step.
module dram_bank_array #(
  parameter int unsigned N_SA      = 66,
  parameter int unsigned N_SLOW_SA = 64,
  parameter int unsigned ROWS_SLOW = 512,
  parameter int unsigned ROWS_FAST = 32,
  parameter int unsigned N_COLS    = 128,
  parameter int unsigned COL_W     = 7,
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned PRED_W    = 40
) (
  input  logic                           clk,
  input  logic [N_SA-1:0]                act_sel,
  input  logic [N_SA-1:0]                wl_on,
  input  logic [N_SA-1:0][PRED_W-1:0]    wl_pred,
  input  logic [N_SA-1:0][COL_W-1:0]     col,
  input  logic [N_SA-1:0]                lrb_to_gbl,
  input  logic [N_SA-1:0]                gbl_to_lrb,
  input  logic                           pre,
  input  logic                           wr,
  input  logic [DATA_W-1:0]              wdata,
  output logic [DATA_W-1:0]              rdata,
  output logic                           multi_drive  // two LRBs drove the global bitlines
);
  logic [DATA_W-1:0] cells [longint unsigned];   // (subarray, row, column)
  logic [DATA_W-1:0] pend  [longint unsigned];   // (subarray, column) of precharged LRBs
  int unsigned       open_row [N_SA];
  logic [N_SA-1:0]   sensed;
  logic [DATA_W-1:0] grb;

  function automatic longint unsigned key(int unsigned sa, int unsigned row, int unsigned c);
    return (longint'(sa) * ROWS_SLOW + row) * N_COLS + c;
  endfunction

  function automatic longint unsigned pkey(int unsigned sa, int unsigned c);
    return longint'(sa) * N_COLS + c;
  endfunction

  function automatic int unsigned row_of(input logic [PRED_W-1:0] p, int unsigned sa);
    int unsigned r = 0;
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < 8; i++)
        if (p[g*8 + i]) r |= i << (g*3);
    return r % ((sa < N_SLOW_SA) ? ROWS_SLOW : ROWS_FAST);
  endfunction

  // value held by column c of subarray s's LRB
  function automatic logic [DATA_W-1:0] lrb_value(int unsigned s, int unsigned c);
    if (sensed[s])
      return cells.exists(key(s, open_row[s], c)) ? cells[key(s, open_row[s], c)] : '0;
    return pend.exists(pkey(s, c)) ? pend[pkey(s, c)] : '0;
  endfunction

  initial begin
    grb    = '0;
    sensed = '0;
    for (int s = 0; s < N_SA; s++) open_row[s] = 0;
  end

  always @(posedge clk) begin
    logic [DATA_W-1:0] gbl;
    int                nsrc;
    if (pre) begin
      sensed = '0;
      pend.delete();
    end
    // sensing: columns already driven into the LRB overwrite the row's cells
    for (int s = 0; s < N_SA; s++) begin
      if (act_sel[s]) begin
        open_row[s] = row_of(wl_pred[s], s);
        sensed[s]   = 1'b1;
        for (int c = 0; c < N_COLS; c++)
          if (pend.exists(pkey(s, c))) begin
            cells[key(s, open_row[s], c)] = pend[pkey(s, c)];
            pend.delete(pkey(s, c));
          end
      end
    end
    // column transfer over the global bitlines
    gbl  = wr ? wdata : grb;
    nsrc = 0;
    for (int s = 0; s < N_SA; s++)
      if (lrb_to_gbl[s]) begin
        gbl = lrb_value(s, int'(col[s]));
        nsrc++;
      end
    multi_drive <= nsrc > 1;
    for (int s = 0; s < N_SA; s++)
      if (gbl_to_lrb[s]) begin
        if (sensed[s] && wl_on[s]) cells[key(s, open_row[s], int'(col[s]))] = gbl;
        else                       pend[pkey(s, int'(col[s]))] = gbl;
      end
    grb   = gbl;
    rdata <= gbl;
  end
endmodule
