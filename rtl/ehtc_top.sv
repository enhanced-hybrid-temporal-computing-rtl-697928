// ehtc_top -- two-tile E-HTC MAC engine: a 2M-input dot product (8 inputs at the
// defaults) built from two M-input MAC tiles, as an 8-point DCT output is built
// from two 4-input HTC MACs.
//
// One pass controller and one shared up-counter sequence both tiles, so all 2M
// temporal and regulated bitstream generators read the same counter. Each tile
// reduces its M products to an exact count of ones; an exact binary adder joins the
// two tile results into value_sum. A pass takes 2^NBITS cycles (256 at the
// default, 2.56 us at a 10 ns clock); passes can run back to back.
//
// The tile flavours are parameters. The default puts one exact accumulator tile
// (ADDER0 = EMBA) next to one threshold scaled adder tile (ADDER1 = DTSA) so that
// both adders of the design are present; set both to the same flavour for an
// all-EMBA or all-DTSA engine. Tile 1's DTSA output stream and its temporal
// re-encoding are brought out as gb1 and tb1 for a following HTC stage.
//
// In-stream chaining: with chain high when a pass is started, lane 0 of tile 0
// uses tb1 -- the temporal re-encoding of tile 1's DTSA output from the previous
// pass, i.e. (tile-1 dot product)/M -- as its TB operand instead of xb0[0]. This
// makes a two-stage HTC computation without leaving the bitstream domain; xb0[0]
// is then ignored. It needs ADDER1 = ADDER_DTSA (an EMBA tile has no stream
// output). The chain wiring to lane 0 is this implementation's choice.
//
// Interface: raise start for one cycle (or keep it high for continuous passes)
// with the operands and mode valid in that cycle; they are registered. done
// pulses one cycle after the last bitstream cycle; ones*, value* are then valid and
// hold until the next pass ends. Values carry NBITS fractional bits (see ehtc_mac).
// How the two tiles' results are combined is this implementation's choice.
module ehtc_top
  import ehtc_pkg::*;
#(
  parameter int unsigned M      = M_DEF,
  parameter int unsigned NBITS  = NBITS_DEF,
  parameter adder_e      ADDER0 = ADDER_EMBA,
  parameter adder_e      ADDER1 = ADDER_DTSA,
  localparam int unsigned CW    = cnt_w(M, NBITS),
  localparam int unsigned VW    = CW + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    bipolar,
  input  logic                    chain,    // next pass: tile 0 lane 0 takes tb1 as its TB
  input  logic [M-1:0][NBITS-1:0] xb0,
  input  logic [M-1:0][NBITS-1:0] yb0,
  input  logic [M-1:0][NBITS-1:0] xb1,
  input  logic [M-1:0][NBITS-1:0] yb1,
  output logic                    busy,
  output logic                    done,
  output logic [CW-1:0]           ones0,
  output logic [CW-1:0]           ones1,
  output logic signed [VW-1:0]    value0,
  output logic signed [VW-1:0]    value1,
  output logic signed [VW:0]      value_sum,
  output logic                    gb1,
  output logic                    tb1
);

  pass_t            ctl;
  logic [NBITS-1:0] count;
  logic             valid0, valid1, gb0_unused, tb0_unused;

  pass_fsm #(.NBITS(NBITS)) u_fsm (
    .clk, .rst_n, .start, .count, .ctl, .busy, .done
  );

  up_counter #(.NBITS(NBITS)) u_cnt (
    .clk, .rst_n, .clr(ctl.clr), .en(ctl.en), .count
  );

  ehtc_mac #(.M(M), .NBITS(NBITS), .ADDER(ADDER0)) u_mac0 (
    .clk, .rst_n, .bipolar, .xb(xb0), .yb(yb0), .count,
    .tb_ext(M'(tb1)), .ext_sel(M'(chain)), .ctl,
    .ones(ones0), .value(value0), .valid(valid0), .gb(gb0_unused), .tb(tb0_unused)
  );

  ehtc_mac #(.M(M), .NBITS(NBITS), .ADDER(ADDER1)) u_mac1 (
    .clk, .rst_n, .bipolar, .xb(xb1), .yb(yb1), .count,
    .tb_ext('0), .ext_sel('0), .ctl,
    .ones(ones1), .value(value1), .valid(valid1), .gb(gb1), .tb(tb1)
  );

  // Exact binary addition of the two tile results.
  assign value_sum = (VW+1)'(value0) + (VW+1)'(value1);

  // Both tiles finish in the same cycle as the controller.
  a_valid_sync: assert property (@(posedge clk) disable iff (!rst_n) (valid0 == done) && (valid1 == done));

endmodule
