// fssc_f_unit: reconfigurable F processing unit (Eq. (1)) with P_e lanes.
//
// The lanes are split into groups, one per low-stage field: the group that
// produces the stage-c field (c = log2(PE)-1 .. 1) has 2^c lanes and reads the
// stage c+1 field of the packed low-stage alpha word. Lane outputs are laid out
// so that lane i is word position PE+i, i.e. every group writes exactly the
// field of its child stage.
//   * high = 1: a high-stage step; lane i combines a_in[i] (bank 0) with
//     a_in[i+PE] (bank 1) and `lane` is the child's half word.
//   * high = 0, dbl = 0: one F on the node at stage `stage` (<= log2 PE).
//   * high = 0, dbl = 1: F x2. The group below the first F takes its inputs
//     from the first group's outputs through a multiplexer instead of from
//     memory (cascade), so two tree levels are produced in one step, and both
//     results are written (lo_mask covers both fields).
// The two spare lanes at the bottom are only used at high stage.
// Purely combinational; the write happens in the alpha RAM.
module fssc_f_unit import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  logic            high,
  input  logic [3:0]      stage,
  input  logic            dbl,
  input  llr_t            a_in    [2*PE],
  output llr_t            lane    [PE],
  output llr_t            lo_data [2*PE],
  output logic [2*PE-1:0] lo_mask
);
  localparam int LOGPE = $clog2(PE);

  for (genvar c = LOGPE - 1; c >= 1; c--) begin : g_grp
    localparam int W   = 1 << c;
    localparam int L0  = PE - (1 << (c + 1));
    localparam int XI0 = 2 * PE - (1 << (c + 2));
    llr_t o [W];
    if (c < LOGPE - 1) begin : g_cs
      logic casc;   // this group takes the group above as input (second F of F x2)
      assign casc = dbl && !high && (stage == 4'(c + 2));
    end
    for (genvar j = 0; j < W; j++) begin : g_l
      llr_t x, y;
      if (c < LOGPE - 1) begin : g_mux
        always_comb begin
          if (high)      begin x = a_in[L0 + j];        y = a_in[L0 + j + PE]; end
          else if (g_cs.casc) begin x = g_grp[c + 1].o[j];   y = g_grp[c + 1].o[j + W]; end
          else           begin x = a_in[XI0 + j];       y = a_in[XI0 + j + W]; end
        end
      end else begin : g_top
        always_comb begin
          if (high) begin x = a_in[L0 + j]; y = a_in[L0 + j + PE]; end
          else      begin x = a_in[XI0 + j]; y = a_in[XI0 + j + W]; end
        end
      end
      assign o[j] = f_op(x, y);
      assign lane[L0 + j] = o[j];
    end
  end

  // spare lanes
  assign lane[PE-2] = high ? f_op(a_in[PE-2], a_in[2*PE-2]) : '0;
  assign lane[PE-1] = high ? f_op(a_in[PE-1], a_in[2*PE-1]) : '0;

  always_comb begin
    for (int k = 0; k < 2 * PE; k++) begin
      lo_data[k] = (k >= PE) ? lane[k - PE] : '0;
      lo_mask[k] = 1'b0;
    end
    for (int t = 2; t < LOGPE; t++)
      for (int k = 0; k < (1 << t); k++) begin
        if (32'(stage) == t + 1)           lo_mask[lo_off(PE, t) + k] = 1'b1;
        if (dbl && 32'(stage) == t + 2)    lo_mask[lo_off(PE, t) + k] = 1'b1;
      end
  end
endmodule
