// ehtc_mac -- one M-input E-HTC multiplier-accumulator tile (M = 4: a 4x4 MAC).
//
// Computes the dot product sum_i xb[i] * yb[i] of M pairs of NBITS-bit operands in
// one pass of 2^NBITS cycles. Each xb[i] drives a temporal bitstream generator and
// each yb[i] a regulated bitstream generator, both reading the shared counter; an
// HTC multiplier (AND in unipolar mode, XNOR in bipolar mode) combines them into one
// product bit per cycle, and the M product streams are summed by the tile's E-HTC
// adder:
//   ADDER_EMBA  exact binary accumulator (emba), binary result only;
//   ADDER_DTSA  threshold scaled adder (dtsa) whose output stream Y goes both to
//               a bitstream-to-binary converter (bs2bin) and to a GB-to-TB
//               converter (gb2tb) for a following HTC stage.
// Either way, `ones` is the exact number of product ones of the pass.
//
// Number formats. Unipolar: operands are unsigned fractions x / 2^NBITS and the
// result value = ones / 2^NBITS in [0, M]. Bipolar: operands are two's complement
// fractions x / 2^(NBITS-1) in [-1, 1); a generator is fed x + 2^(NBITS-1) (the
// operand with its sign bit inverted) so that its stream holds a fraction
// p = (X+1)/2 of ones, and the result value = (2*ones - M*2^NBITS) / 2^NBITS, the
// sum of the M products 2p-1. `value` is that number as a signed integer with
// NBITS fractional bits, in both modes. Bipolar XNOR products of the deterministic
// RB/TB streams are close to, not equal to, the exact products.
//
// In-stream chaining: each lane can take its TB operand from tb_ext instead of its
// own TB generator (ext_sel, registered with the operands). This is how a result
// re-encoded by a DTSA tile's GB-to-TB converter enters the next MAC stage; the
// stream must be aligned with the shared counter, as gb2tb's output is.
//
// Operands and mode are registered when the pass controller raises ctl.load, so
// they may change while a pass runs. Results (ones, value) are registered on the
// last cycle and valid pulses one cycle later; they hold until the next pass ends.
// The operand registers, the run-time mode pin and the per-lane ext_sel select
// are this implementation's choices; the generator, multiplier and adder structure follows the design.
module ehtc_mac
  import ehtc_pkg::*;
#(
  parameter int unsigned M      = M_DEF,
  parameter int unsigned NBITS  = NBITS_DEF,
  parameter adder_e      ADDER  = ADDER_EMBA,
  localparam int unsigned CW    = cnt_w(M, NBITS),
  localparam int unsigned VW    = CW + 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      bipolar,  // mode of the next pass
  input  logic [M-1:0][NBITS-1:0]   xb,       // operands for the TB generators
  input  logic [M-1:0][NBITS-1:0]   yb,       // operands for the RB generators
  input  logic [NBITS-1:0]          count,    // shared up-counter
  input  logic [M-1:0]              tb_ext,   // external TB streams (in-stream chaining)
  input  logic [M-1:0]              ext_sel,  // per lane, for the next pass: 1 = use tb_ext
  input  pass_t                     ctl,
  output logic [CW-1:0]             ones,     // product ones of the last pass
  output logic signed [VW-1:0]      value,    // MAC value, NBITS fraction bits
  output logic                      valid,
  output logic                      gb,       // DTSA output stream (0 for EMBA)
  output logic                      tb        // its TB form, one pass later (0 for EMBA)
);

  localparam logic [NBITS-1:0] SIGN = NBITS'(1) << (NBITS - 1);

  logic [M-1:0][NBITS-1:0] xr, yr;
  logic                    bip, res_bip;
  logic [M-1:0]            sel;
  logic [M-1:0]            t, r, p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xr      <= '0;
      yr      <= '0;
      bip     <= 1'b0;
      res_bip <= 1'b0;
      sel     <= '0;
    end else begin
      if (ctl.load) begin
        xr  <= xb;
        yr  <= yb;
        bip <= bipolar;
        sel <= ext_sel;
      end
      if (ctl.en && ctl.last) res_bip <= bip;
    end
  end

  for (genvar i = 0; i < M; i++) begin : g_lane
    logic [NBITS-1:0] xcode, ycode;
    logic             t_gen;
    assign xcode = bip ? (xr[i] ^ SIGN) : xr[i];
    assign ycode = bip ? (yr[i] ^ SIGN) : yr[i];
    tb_gen   #(.NBITS(NBITS)) u_tb  (.count(count), .code(xcode), .tb(t_gen));
    // A lane takes either its own TB generator or a TB stream from an earlier
    // stage (the GB-to-TB output of a DTSA tile), cycle-aligned with count.
    assign t[i] = sel[i] ? tb_ext[i] : t_gen;
    rb_gen   #(.NBITS(NBITS)) u_rb  (.count(count), .code(ycode), .rb(r[i]));
    htc_mult                  u_mul (.bipolar(bip), .t(t[i]), .r(r[i]), .p(p[i]));
  end

  if (ADDER == ADDER_EMBA) begin : g_emba
    logic [sum_w(M)-1:0] cycle_sum;
    emba #(.M(M), .NBITS(NBITS)) u_emba (
      .clk, .rst_n, .p, .ctl, .cycle_sum, .acc(ones), .valid
    );
    // The exact accumulator has no stream output.
    assign gb = 1'b0;
    assign tb = 1'b0;
  end else begin : g_dtsa
    logic [sum_w(M)-1:0]      cycle_sum;
    logic [$clog2(2*M)-1:0]   a;
    logic [res_w(M)-1:0]      q_next;
    logic [$clog2((2**NBITS)+1)-1:0] ycount;
    dtsa   #(.M(M))               u_dtsa (.clk, .rst_n, .p, .ctl, .cycle_sum, .a, .y(gb), .q_next);
    bs2bin #(.M(M), .NBITS(NBITS)) u_bin (.clk, .rst_n, .y(gb), .q_next, .ctl, .ones, .ycount, .valid);
    gb2tb  #(.NBITS(NBITS))        u_tb  (.clk, .rst_n, .gb, .ctl, .tb);
  end

  // Bitstream-to-value: unipolar ones; bipolar 2*ones - M*2^NBITS.
  localparam logic signed [VW-1:0] BIAS = VW'(M) <<< NBITS;
  assign value = res_bip ? ((VW'(ones) <<< 1) - BIAS) : VW'(ones);

endmodule
