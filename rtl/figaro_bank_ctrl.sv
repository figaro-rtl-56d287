// figaro_bank_ctrl -- command decode and subarray steering of one FIGARO bank.
//
// The block turns the bank's commands into per-subarray controls. It keeps
// track of which subarrays have a raised wordline (open mask), which one holds
// the RELOC source row (the first subarray activated after a PRECHARGE) and
// which was activated last (the one READ/WRITE address).
//   ACT   : act_sel of the addressed subarray, predecoded row address on the
//           shared row bus. A second ACT to another subarray without a
//           PRECHARGE is legal (it is how a RELOC destination row is written).
//   RD/WR : the last activated subarray gets ROLE_SRC (read) or ROLE_DST
//           (write) with the command's column; rd/wr steer the global row
//           buffer to/from the chip I/O.
//   RELOC : the source subarray gets ROLE_SRC with the source column, the
//           destination subarray ROLE_DST with the destination column, both in
//           the same cycle, so one column moves LRB -> GRB -> LRB.
//   PRE   : closes every subarray of the bank.
// proto_err flags a command that the substrate cannot carry out (RELOC with no
// open source row, RELOC into the source subarray or into a subarray with a
// raised wordline, column command with nothing open, ACT to an open subarray).
//
// Interface: cmd_valid/cmd for this bank (bank field ignored). All outputs
// except the state are combinational from the command of the cycle; the open
// mask and the source/last registers update at the clock edge.
//
// From the paper: RELOC carries only the source column (the source is the
// already-activated row) plus destination subarray and column; the bank must
// accept several ACTs without a PRECHARGE; the per-subarray column MUX picks
// source or destination address. Own choices: which subarray counts as source
// (first activated after PRECHARGE), READ/WRITE go to the last activated
// subarray, and the error checks.
module figaro_bank_ctrl
  import figaro_pkg::*;
#(
  parameter int unsigned N_SA   = 66,
  parameter int unsigned SA_W   = 7,
  parameter int unsigned COL_W  = 7,
  parameter int unsigned LROW_W = 9,
  parameter int unsigned PRED_W = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  input  dram_cmd_t              cmd,
  output logic [N_SA-1:0]        act_sel,
  output logic                   pre,
  output col_role_e [N_SA-1:0]   role,
  output logic [COL_W-1:0]       col_src,
  output logic [COL_W-1:0]       col_dst,
  output logic [PRED_W-1:0]      row_bus_pred,
  output logic                   rd,          // GRB -> chip I/O
  output logic                   wr,          // chip I/O -> GRB
  output logic [N_SA-1:0]        open_mask,
  output logic                   proto_err
);
  logic [SA_W-1:0] src_q, last_q;
  logic            src_v_q;
  logic [N_SA-1:0] open_q;

  wire is_act   = cmd_valid && cmd.cmd == CMD_ACT;
  wire is_rd    = cmd_valid && cmd.cmd == CMD_RD;
  wire is_wr    = cmd_valid && cmd.cmd == CMD_WR;
  wire is_pre   = cmd_valid && cmd.cmd == CMD_PRE;
  wire is_reloc = cmd_valid && cmd.cmd == CMD_RELOC;

  always_comb begin
    act_sel      = '0;
    role         = '{default: ROLE_NONE};
    col_src      = cmd.col;
    col_dst      = cmd.col;
    row_bus_pred = predecode_row(15'({cmd.sa, cmd.row}));
    rd           = is_rd;
    wr           = is_wr;
    pre          = is_pre;
    proto_err    = 1'b0;
    if (is_act) begin
      if (int'(cmd.sa) < N_SA) act_sel[cmd.sa] = 1'b1;
      proto_err = int'(cmd.sa) >= N_SA || open_q[cmd.sa];
    end
    if (is_rd || is_wr) begin
      role[last_q] = is_rd ? ROLE_SRC : ROLE_DST;
      proto_err    = !open_q[last_q];
    end
    if (is_reloc) begin
      col_dst = cmd.dst_col;
      if (int'(cmd.dst_sa) < N_SA && cmd.dst_sa != src_q) begin
        role[src_q]      = ROLE_SRC;
        role[cmd.dst_sa] = ROLE_DST;
      end
      proto_err = !src_v_q || int'(cmd.dst_sa) >= N_SA || cmd.dst_sa == src_q
                  || open_q[cmd.dst_sa];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q  <= '0;
      src_q   <= '0;
      src_v_q <= 1'b0;
      last_q  <= '0;
    end else if (is_pre) begin
      open_q  <= '0;
      src_v_q <= 1'b0;
    end else if (is_act && int'(cmd.sa) < N_SA) begin
      open_q[cmd.sa] <= 1'b1;
      last_q         <= cmd.sa;
      if (!src_v_q) begin
        src_q   <= cmd.sa;
        src_v_q <= 1'b1;
      end
    end
  end

  assign open_mask = open_q;

  // one ACTIVATE at a time on the shared row address bus
  assert property (@(posedge clk) disable iff (!rst_n) $countones(act_sel) <= 1);
endmodule
