// fssc_datapath: all processing units of the decoder and the selection of
// their results (alpha' towards the alpha memory, beta' towards a beta unit or
// the codeword memory).
//
// Units: the reconfigurable F unit (F, F x2), the G0 unit (G0, G0 x2), the
// merged G-F, F-G0 and F-Rep units, the special-node cluster (Rep, SPC, ML,
// RepSPC, Rep-RepSPC, Rep-Rate1, Rate0-ML), the original G path with Sign,
// SPC and combine (G, P-R1, P-01, P-RSPC, P-0SPC), and the C/C0 unit
// (C, C0, x2, x3). Every unit sees the same operands; the opcode picks the
// result, so one operation (merged or not) completes per clock.
// G0 x2 and F-G0 also run on a node of one word (stage log2(PE)+1, 2*PE
// inputs, the largest size the paper lists for them); all other merged
// operations are low-stage only.
// A node at stage S > log2(PE) is processed a word at a time (high = 1):
// `bank` selects the half word of the beta words that belongs to this step and
// `obank` the half of the alpha word the P_e new LLRs are written to.
// Purely combinational; the memories register the results.
module fssc_datapath import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  op_e             op,
  input  logic [3:0]      stage,
  input  logic            bank,
  input  logic            obank,
  input  llr_t            a      [2*PE],
  input  logic [2*PE-1:0] b0,
  input  logic [2*PE-1:0] b1,
  output logic            a_we,
  output llr_t            a_wdata [2*PE],
  output logic [2*PE-1:0] a_wmask,
  output logic            b_we,
  output logic [2*PE-1:0] b_wdata,
  output logic [2*PE-1:0] b_wmask
);
  localparam int LOGPE = $clog2(PE);
  logic high;
  assign high = 32'(stage) > LOGPE;

  // ---- F / F x2
  llr_t f_lane [PE], f_lo [2*PE];
  logic [2*PE-1:0] f_mask;
  fssc_f_unit #(.PE(PE)) u_f (.high(high), .stage(stage), .dbl(op == OP_F2), .a_in(a),
                              .lane(f_lane), .lo_data(f_lo), .lo_mask(f_mask));
  // ---- G0 / G0 x2
  llr_t g0_lane [PE], g0_lo [2*PE];
  logic [2*PE-1:0] g0_mask;
  fssc_g0_unit #(.PE(PE)) u_g0 (.high(high), .stage(stage), .dbl(op == OP_G02), .a_in(a),
                                .lane(g0_lane), .lo_data(g0_lo), .lo_mask(g0_mask));
  // ---- G-F, F-G0, F-Rep
  llr_t gf_lo [2*PE], fg0_lo [2*PE];
  logic [2*PE-1:0] gf_mask, fg0_mask, frep_b, frep_mask;
  fssc_gf_unit   #(.PE(PE)) u_gf   (.stage(stage), .a(a), .b0(b0), .lo_data(gf_lo), .lo_mask(gf_mask));
  fssc_fg0_unit  #(.PE(PE)) u_fg0  (.stage(stage), .a(a), .lo_data(fg0_lo), .lo_mask(fg0_mask));
  fssc_frep_unit #(.PE(PE)) u_frep (.stage(stage), .a(a), .b_out(frep_b), .b_mask(frep_mask));
  // ---- special nodes
  logic [2*PE-1:0] leaf_b, leaf_mask;
  fssc_leaf_unit #(.PE(PE)) u_leaf (.op(op), .stage(stage), .a(a), .b_out(leaf_b), .b_mask(leaf_mask));
  // ---- G path (G, P-R1, P-01, P-RSPC, P-0SPC)
  logic [1:0] gp_mode;
  logic       gp_zero;
  llr_t       gp_lane [PE], gp_lo [2*PE];
  logic [2*PE-1:0] gp_mask, gp_b, gp_bmask;
  always_comb begin
    unique case (op)
      OP_PR1, OP_P01:     gp_mode = 2'd1;
      OP_PRSPC, OP_P0SPC: gp_mode = 2'd2;
      default:            gp_mode = 2'd0;
    endcase
  end
  assign gp_zero = (op == OP_P01) || (op == OP_P0SPC);
  fssc_g_path #(.PE(PE)) u_gp (.high(high), .stage(stage), .mode(gp_mode), .zero_l(gp_zero),
                               .bank(bank), .a(a), .b0(b0), .lane(gp_lane), .lo_data(gp_lo),
                               .lo_mask(gp_mask), .b_out(gp_b), .b_mask(gp_bmask));
  // ---- C / C0
  logic [1:0] c_cnt;
  logic       c_zero;
  logic [2*PE-1:0] c_b, c_mask;
  assign c_cnt  = (op == OP_C3 || op == OP_C03) ? 2'd3 : (op == OP_C2 || op == OP_C02) ? 2'd2 : 2'd1;
  assign c_zero = (op == OP_C0 || op == OP_C02 || op == OP_C03);
  fssc_c_unit #(.PE(PE)) u_c (.high(high), .stage(stage), .cnt(c_cnt), .zero_l(c_zero), .bank(bank),
                              .b0(b0), .b1(b1), .out(c_b), .out_mask(c_mask));

  // ---- G0 x2 and F-G0 on a one-word node (stage log2(PE)+1, 2*PE inputs):
  // the second step (G0) runs on the P_e lanes of the first (G0 or F) and
  // only its P_e/2 results are written, at the stage log2(PE)-1 field
  llr_t            w1_lo [2*PE];
  logic [2*PE-1:0] w1_mask;
  always_comb begin
    for (int k = 0; k < 2 * PE; k++) begin
      w1_lo[k]   = '0;
      w1_mask[k] = 1'b0;
    end
    for (int j = 0; j < PE / 2; j++) begin
      w1_lo[lo_off(PE, LOGPE - 1) + j] = (op == OP_FG0) ? g_op(f_lane[j], f_lane[j + PE / 2], 1'b0)
                                                        : g_op(g0_lane[j], g0_lane[j + PE / 2], 1'b0);
      w1_mask[lo_off(PE, LOGPE - 1) + j] = 1'b1;
    end
  end

  // ---- result selection
  always_comb begin
    a_we = 1'b0;
    b_we = 1'b0;
    a_wmask = '0;
    b_wdata = '0;
    b_wmask = '0;
    for (int k = 0; k < 2 * PE; k++) a_wdata[k] = '0;
    case (op)
      OP_F, OP_F2, OP_G, OP_G0, OP_G02: begin
        a_we = 1'b1;
        if (high) begin
          for (int k = 0; k < PE; k++) begin
            a_wdata[k]      = (op == OP_G) ? gp_lane[k] : (op == OP_G0) ? g0_lane[k] : f_lane[k];
            a_wdata[k + PE] = a_wdata[k];
          end
          a_wmask = obank ? {{PE{1'b1}}, {PE{1'b0}}} : {{PE{1'b0}}, {PE{1'b1}}};
        end else begin
          a_wdata = (op == OP_G) ? gp_lo : (op == OP_G0 || op == OP_G02) ? g0_lo : f_lo;
          a_wmask = (op == OP_G) ? gp_mask : (op == OP_G0 || op == OP_G02) ? g0_mask : f_mask;
        end
      end
      OP_GF:  begin a_we = 1'b1; a_wdata = gf_lo;  a_wmask = gf_mask;  end
      OP_FG0: begin a_we = 1'b1; a_wdata = fg0_lo; a_wmask = fg0_mask; end
      OP_C, OP_C0, OP_C2, OP_C3, OP_C02, OP_C03: begin
        b_we = 1'b1; b_wdata = c_b; b_wmask = c_mask;
      end
      OP_PR1, OP_P01, OP_PRSPC, OP_P0SPC: begin
        b_we = 1'b1; b_wdata = gp_b; b_wmask = gp_bmask;
      end
      OP_FREP: begin b_we = 1'b1; b_wdata = frep_b; b_wmask = frep_mask; end
      OP_REP, OP_SPC, OP_ML, OP_REPSPC, OP_REPREPSPC, OP_REPRATE1, OP_RATE0ML: begin
        b_we = 1'b1; b_wdata = leaf_b; b_wmask = leaf_mask;
      end
      default: ;
    endcase
    if (high && (op == OP_G02 || op == OP_FG0)) begin
      a_we    = 1'b1;
      a_wdata = w1_lo;
      a_wmask = w1_mask;
    end
  end
endmodule
