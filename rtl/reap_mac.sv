// reap_mac: REAP MAC, the approximate posit(8,2) dot-product-accumulate engine.
//
// Computes out = acc + sum_{i<VEC} a_i (x~) b_i, where (x~) is the approximate
// logarithmic product of approx_mult, in six pipeline stages, each closed by a
// register (a new operation may enter every cycle; the result of an operation is
// valid MAC latency = 6 clock edges after the edge that samples its operands):
//   1 DECODE     posit_decoder for every a_i, b_i and for acc; product sign is the
//                XOR of the operand signs, product scale e_ab the sum of the scales.
//   2 MULTIPLY   approx_mult on the fractions; in parallel the maximum scale emax
//                over all non-zero products and the accumulator.
//   3 ALIGNMENT  shift amounts emax - e_i, every mantissa shifted right to emax
//                (bits below FW fraction bits are dropped), then two's complement
//                for negative terms.
//   4 ACCUMULATE recursive CSA tree over the VEC+1 terms and a final adder.
//                A running-sum register makes cyclic accumulation possible: when an
//                operation carries acc_fb=1, the acc input is ignored and the new
//                partial sum is aligned against the previous operation's sum (the
//                larger scale wins) and added to it. Back-to-back operations thus
//                accumulate one per cycle; a kernel of K steps needs K cycles plus
//                the pipeline fill. If the sum comes near the top of the W-bit
//                word it is shifted right one place and its scale incremented.
//   5 NORMALIZE  sign and magnitude, leading-zero count, scale re-adjustment
//                fe = e + (W-1-FW) - lzc, mantissa shifted left by lzc.
//   6 ENCODE     posit_encoder packs a posit(ACC_NB,2) with round-to-nearest-even.
// A NaR operand makes the result NaR; a NaR in the running sum stays until an
// operation with acc_fb=0 restarts it.
// The stage order, the blocks in each stage and the approximate multiplier follow
// the published REAP datapath. The accumulator width (posit(16,2)), the
// alignment width FW, the running-sum form of cyclic accumulation, truncation
// during alignment and reset behaviour are this design's own choices.
module reap_mac #(
  parameter int unsigned VEC    = 4,
  parameter int unsigned IN_NB  = 8,
  parameter int unsigned ES     = 2,
  parameter int unsigned ACC_NB = 16,
  parameter int unsigned FW     = 16,
  parameter int unsigned TRUNC  = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IN_NB-1:0]  va [VEC],
  input  logic [IN_NB-1:0]  vb [VEC],
  input  logic [ACC_NB-1:0] acc,
  input  logic              acc_fb,
  output logic              out_valid,
  output logic [ACC_NB-1:0] out
);
  localparam int unsigned SW   = raman_pkg::EXP_W;
  localparam int unsigned FB   = IN_NB - 3 - ES;    // operand fraction bits
  localparam int unsigned FBA  = ACC_NB - 3 - ES;   // accumulator fraction bits
  localparam int unsigned HB   = $clog2(VEC + 2);   // tree headroom
  localparam int unsigned W    = FW + 2 + HB + 5;   // accumulation word
  localparam int unsigned NT   = VEC + 1;           // terms incl. accumulator
  localparam int unsigned CW   = $clog2(W + 1);
  localparam logic signed [SW-1:0] EMIN = -(SW'(1) <<< (SW - 2));

  typedef logic signed [SW-1:0] scale_t;

  // ---------------- stage 1: decode ----------------
  logic [VEC-1:0] d_sa, d_sb, d_za, d_zb, d_na, d_nb;
  scale_t         d_ea [VEC];
  scale_t         d_eb [VEC];
  logic [FB-1:0]  d_fa [VEC];
  logic [FB-1:0]  d_fb [VEC];
  logic           d_sc, d_zc, d_nc;
  scale_t         d_ec;
  logic [FBA-1:0] d_mc;

  for (genvar i = 0; i < VEC; i++) begin : g_dec
    posit_decoder #(.NB(IN_NB), .ES(ES), .SW(SW)) u_da (
      .p(va[i]), .sign(d_sa[i]), .zero(d_za[i]), .nar(d_na[i]), .scale(d_ea[i]), .frac(d_fa[i]));
    posit_decoder #(.NB(IN_NB), .ES(ES), .SW(SW)) u_db (
      .p(vb[i]), .sign(d_sb[i]), .zero(d_zb[i]), .nar(d_nb[i]), .scale(d_eb[i]), .frac(d_fb[i]));
  end
  posit_decoder #(.NB(ACC_NB), .ES(ES), .SW(SW)) u_dc (
    .p(acc), .sign(d_sc), .zero(d_zc), .nar(d_nc), .scale(d_ec), .frac(d_mc));

  logic           r1_v, r1_fb, r1_nar;
  logic [VEC-1:0] r1_s, r1_z;
  scale_t         r1_e [VEC];
  logic [FB-1:0]  r1_ma [VEC];
  logic [FB-1:0]  r1_mb [VEC];
  logic           r1_sc, r1_zc;
  scale_t         r1_ec;
  logic [FBA-1:0] r1_mc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1_v <= 1'b0;
    end else begin
      r1_v <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      r1_fb  <= acc_fb;
      r1_nar <= (|d_na) | (|d_nb) | (d_nc & ~acc_fb);
      for (int i = 0; i < int'(VEC); i++) begin
        r1_s[i]  <= d_sa[i] ^ d_sb[i];           // XOR of the operand signs
        r1_z[i]  <= d_za[i] | d_zb[i];
        r1_e[i]  <= d_ea[i] + d_eb[i];           // exponent add
        r1_ma[i] <= d_fa[i];
        r1_mb[i] <= d_fb[i];
      end
      r1_sc <= d_sc;
      r1_zc <= d_zc | acc_fb;                    // acc ignored when accumulating cyclically
      r1_ec <= d_ec;
      r1_mc <= d_mc;
    end
  end

  // ---------------- stage 2: multiply + max exponent ----------------
  logic [FB+1:0] m_mr [VEC];
  scale_t        m_emax;

  for (genvar i = 0; i < VEC; i++) begin : g_mul
    approx_mult #(.FB(FB), .TRUNC(TRUNC)) u_mul (.fa(r1_ma[i]), .fb(r1_mb[i]), .mr(m_mr[i]));
  end

  always_comb begin
    m_emax = EMIN;
    for (int i = 0; i < int'(VEC); i++)
      if (!r1_z[i] && r1_e[i] > m_emax) m_emax = r1_e[i];
    if (!r1_zc && r1_ec > m_emax) m_emax = r1_ec;
  end

  logic           r2_v, r2_fb, r2_nar;
  logic [VEC-1:0] r2_s, r2_z;
  scale_t         r2_e [VEC];
  logic [FB+1:0]  r2_mr [VEC];
  logic           r2_sc, r2_zc;
  scale_t         r2_ec, r2_emax;
  logic [FBA-1:0] r2_mc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r2_v <= 1'b0;
    else        r2_v <= r1_v;
  end

  always_ff @(posedge clk) begin
    if (r1_v) begin
      r2_fb   <= r1_fb;
      r2_nar  <= r1_nar;
      r2_s    <= r1_s;
      r2_z    <= r1_z;
      r2_e    <= r1_e;
      r2_mr   <= m_mr;
      r2_sc   <= r1_sc;
      r2_zc   <= r1_zc;
      r2_ec   <= r1_ec;
      r2_mc   <= r1_mc;
      r2_emax <= m_emax;
    end
  end

  // ---------------- stage 3: alignment + two's complement ----------------
  logic [W-1:0] a_term [NT];

  function automatic logic [W-1:0] align_term(input logic [W-1:0] mant, input scale_t emax,
                                              input scale_t e, input logic neg, input logic z);
    int           d;
    logic [W-1:0] t;
    d = int'(emax) - int'(e);                    // 'Add': shift amount emax - e_i
    t = (d >= int'(W)) ? '0 : (mant >> d);       // mantissa align
    if (z)   t = '0;
    if (neg) t = ~t + 1'b1;                      // 2's complement
    return t;
  endfunction

  always_comb begin
    for (int i = 0; i < int'(VEC); i++)
      a_term[i] = align_term(W'({r2_mr[i], {(FW - FB){1'b0}}}), r2_emax, r2_e[i], r2_s[i], r2_z[i]);
    a_term[VEC] = align_term(W'({2'b01, r2_mc, {(FW - FBA){1'b0}}}), r2_emax, r2_ec, r2_sc, r2_zc);
  end

  logic         r3_v, r3_fb, r3_nar;
  logic [W-1:0] r3_term [NT];
  scale_t       r3_emax;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r3_v <= 1'b0;
    else        r3_v <= r2_v;
  end

  always_ff @(posedge clk) begin
    if (r2_v) begin
      r3_fb   <= r2_fb;
      r3_nar  <= r2_nar;
      r3_term <= a_term;
      r3_emax <= r2_emax;
    end
  end

  // ---------------- stage 4: accumulation ----------------
  logic [W-1:0]        t_sum, t_carry;
  logic signed [W-1:0] sp, run_s, acc_s, ren_s;
  scale_t              run_e, acc_e, ren_e;
  logic                run_nar, acc_nar;

  csa_tree #(.M(NT), .W(W)) u_tree (.terms(r3_term), .sum(t_sum), .carry(t_carry));

  int et;

  always_comb begin
    et      = int'(r3_emax);
    sp      = signed'(t_sum + t_carry);          // final 'Add'
    acc_s   = sp;
    acc_e   = r3_emax;
    acc_nar = r3_nar;
    if (r3_fb) begin
      acc_nar = r3_nar | run_nar;
      if (sp == '0) begin
        acc_s = run_s;
        acc_e = run_e;
      end else if (run_s != '0) begin
        et    = (int'(r3_emax) > int'(run_e)) ? int'(r3_emax) : int'(run_e);
        acc_s = (sp >>> (et - int'(r3_emax))) + (run_s >>> (et - int'(run_e)));
        acc_e = scale_t'(et);
      end
    end
    // keep one bit of headroom for the next cyclic addition
    if ((acc_s[W-1] != acc_s[W-2]) || (acc_s[W-1] != acc_s[W-3])) begin
      ren_s = acc_s >>> 1;
      ren_e = acc_e + 1'b1;
    end else begin
      ren_s = acc_s;
      ren_e = acc_e;
    end
  end

  logic                r4_v, r4_nar;
  logic signed [W-1:0] r4_s;
  scale_t              r4_e;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r4_v    <= 1'b0;
      run_s   <= '0;
      run_e   <= EMIN;
      run_nar <= 1'b0;
    end else begin
      r4_v <= r3_v;
      if (r3_v) begin
        run_s   <= ren_s;
        run_e   <= ren_e;
        run_nar <= acc_nar;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (r3_v) begin
      r4_s   <= ren_s;
      r4_e   <= ren_e;
      r4_nar <= acc_nar;
    end
  end

  // ---------------- stage 5: normalize ----------------
  logic [W-1:0]  n_sm;
  logic [CW-1:0] n_lz;
  logic          n_zero;
  logic [W-1:0]  n_shift;   // bit W-1 is the hidden one, dropped
  scale_t        n_fe;

  always_comb n_sm = r4_s[W-1] ? W'(-r4_s) : W'(r4_s);
  lzc #(.W(W)) u_lzc (.in(n_sm), .count(n_lz), .all_zero(n_zero));
  always_comb begin
    n_fe    = r4_e + scale_t'(W - 1 - FW) - scale_t'(n_lz);   // exponent adjustment
    n_shift = n_sm << n_lz;                                   // mantissa normalisation
  end

  logic         r5_v, r5_fs, r5_zero, r5_nar;
  scale_t       r5_fe;
  logic [W-2:0] r5_fm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r5_v <= 1'b0;
    else        r5_v <= r4_v;
  end

  always_ff @(posedge clk) begin
    if (r4_v) begin
      r5_fs   <= r4_s[W-1];
      r5_fe   <= n_fe;
      r5_fm   <= n_shift[W-2:0];
      r5_zero <= n_zero;
      r5_nar  <= r4_nar;
    end
  end

  // ---------------- stage 6: encode and rounding ----------------
  logic [ACC_NB-1:0] e_out;

  posit_encoder #(.NB(ACC_NB), .ES(ES), .FWIN(W - 1), .SW(SW)) u_enc (
    .sign(r5_fs), .zero(r5_zero), .nar(r5_nar), .scale(r5_fe), .frac(r5_fm),
    .sticky_in(1'b0), .p(e_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= r5_v;
      if (r5_v) out <= e_out;
    end
  end
endmodule
