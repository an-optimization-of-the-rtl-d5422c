// fft32: fully parallel, fully pipelined 32-point FFT of real samples.
//
// Every clock cycle the block takes a window of 32 real samples x0..x31 and,
// seven cycles later, delivers the complex bins X0..X16 (the bins X17..X31 of
// a real input are the complex conjugates of X15..X1 and are not formed).
// The structure is a radix-2 decimation-in-frequency flow graph in which all
// butterflies of one stage are evaluated in parallel:
//   A  : A_n = x_n + x_{n+16},  A_{n+16} = x_n - x_{n+16}
//   even half (X0, X2, ..., X16): a 16-point DiF FFT of A0..A15 with stages
//        B, C, D (real products by alpha, beta, gamma), E, F, output
//   odd half  (X1, X3, ..., X15): A16..A19 and A24..A27 are multiplied by
//        lambda = 1/gamma in stage B, which turns the gamma-stage of the plain
//        algorithm into a pure delay that is dropped; the twiddle constants of
//        the E products are pre-multiplied by gamma (alpha' = gamma*alpha,
//        ...), and lanes 16, 20, 24, 28 get an explicit gamma product.
// Every butterfly equation is the one printed in the flow-graph figure of the
// optimised FFT, transcribed box by box. Only real multiplications are used.
//
// Stage widths grow by one bit per stage (A = IN_W+1 ... F = IN_W+6) and the
// output column keeps IN_W+6 bits (20 bits for a 14-bit ADC); these widths
// follow the description of the engine. The coefficient format (COEF_W-bit
// signed, COEF_FRAC fractional bits, each product rounded to an integer) is
// this design's choice. The odd-lane products drawn across the D and E columns
// are registered in D and summed in E, so both halves are 7 stages deep.
//
// Sign convention: the output labels of the figure are followed. For
// k = 4, 6, 8 they give the imaginary part with the opposite sign to
// X_k = sum x_n exp(-2 pi i k n / 32); all other bins, and every |X_k|,
// match that definition.
//
// Interface: x[0..31] in (x31 newest), in_valid tags the window; re/im[0..16]
// out with out_valid, latency 7 cycles, throughput one FFT per cycle.
// Synchronous active-low reset clears the pipeline.
module fft32 #(
  parameter int IN_W      = 14,
  parameter int COEF_W    = 18,
  parameter int COEF_FRAC = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic signed [IN_W-1:0]        x        [32],
  input  logic                          in_valid,
  output logic signed [IN_W+5:0]        re       [17],
  output logic signed [IN_W+5:0]        im       [17],
  output logic                          out_valid
);
  import wt_pkg::fx, wt_pkg::PI;

  localparam int WW = IN_W + 8;   // working width of the combinational terms
  localparam int WA = IN_W + 1;
  localparam int WB = IN_W + 2;
  localparam int WC = IN_W + 3;
  localparam int WD = IN_W + 4;
  localparam int WE = IN_W + 5;
  localparam int WF = IN_W + 6;
  localparam int WX = IN_W + 6;

  typedef logic signed [WW-1:0]     w_t;
  typedef logic signed [COEF_W-1:0] c_t;
  typedef logic signed [WA-1:0]     a_t;
  typedef logic signed [WB-1:0]     b_t;
  typedef logic signed [WC-1:0]     cc_t;
  typedef logic signed [WD-1:0]     d_t;
  typedef logic signed [WE-1:0]     e_t;
  typedef logic signed [WF-1:0]     f_t;
  typedef logic signed [WX-1:0]     x_t;

  // Real constants of the twiddle factors (W_C .. W_F) and their redefinitions.
  localparam real G  = $cos(PI/4.0);
  localparam c_t K_G   = c_t'(fx(G,                    COEF_FRAC));   // gamma
  localparam c_t K_LAM = c_t'(fx(1.0/G,                COEF_FRAC));   // lambda
  localparam c_t K_A   = c_t'(fx($cos(PI/8.0),         COEF_FRAC));   // alpha
  localparam c_t K_B   = c_t'(fx($sin(PI/8.0),         COEF_FRAC));   // beta
  localparam c_t K_AP  = c_t'(fx(G*$cos(PI/8.0),       COEF_FRAC));   // alpha'
  localparam c_t K_BP  = c_t'(fx(G*$sin(PI/8.0),       COEF_FRAC));   // beta'
  localparam c_t K_XIP = c_t'(fx(G*$cos(PI/16.0),      COEF_FRAC));   // xi'
  localparam c_t K_ETP = c_t'(fx(G*$sin(PI/16.0),      COEF_FRAC));   // eta'
  localparam c_t K_SGP = c_t'(fx(G*$cos(3.0*PI/16.0),  COEF_FRAC));   // sigma'
  localparam c_t K_RHP = c_t'(fx(G*$sin(3.0*PI/16.0),  COEF_FRAC));   // rho'

  // Rounded fixed-point product v * c / 2^COEF_FRAC.
  function automatic w_t mul(input w_t v, input c_t c);
    logic signed [WW+COEF_W-1:0] p;
    p = (WW+COEF_W)'(v) * (WW+COEF_W)'(c);
    p = p + (WW+COEF_W)'(1 <<< (COEF_FRAC-1));
    return w_t'(p >>> COEF_FRAC);
  endfunction

  // ---------------- pipeline registers ----------------
  a_t  a_q [32];
  b_t  b_q [32];
  cc_t c_q [32];
  d_t  d_q [32];          // D0..D15 of the even half, D16..D31 pass-through of C
  d_t  d9a, d9b, d11a, d11b, d13a, d13b, d15a, d15b;
  d_t  dp1 [16:31];       // odd-half products registered in stage D
  d_t  dp2 [16:31];
  e_t  e_q [32];
  f_t  f_q [32];
  logic [6:0] vld;

  // sign-extended views of each stage
  w_t xa [32], wa [32], wb [32], wc [32], wd [32], we [32], wf [32];
  always_comb begin
    for (int i = 0; i < 32; i++) begin
      xa[i] = w_t'(x[i]);
      wa[i] = w_t'(a_q[i]);
      wb[i] = w_t'(b_q[i]);
      wc[i] = w_t'(c_q[i]);
      wd[i] = w_t'(d_q[i]);
      we[i] = w_t'(e_q[i]);
      wf[i] = w_t'(f_q[i]);
    end
  end

  // ---------------- next-state of every stage ----------------
  w_t na [32], nb [32], nc [32], nd [32], ne [32], nf [32], nxr [17], nxi [17];
  w_t nd9a, nd9b, nd11a, nd11b, nd13a, nd13b, nd15a, nd15b;
  w_t np1 [16:31], np2 [16:31];

  // stage A
  always_comb
    for (int n = 0; n < 16; n++) begin
      na[n]    = xa[n] + xa[n+16];
      na[n+16] = xa[n] - xa[n+16];
    end

  // stage B
  always_comb begin
    for (int n = 0; n < 8; n++) begin
      nb[n]   = wa[n] + wa[n+8];
      nb[n+8] = wa[n] - wa[n+8];
    end
    for (int n = 0; n < 4; n++) begin
      nb[16+n] = mul(wa[16+n], K_LAM);
      nb[24+n] = mul(wa[24+n], K_LAM);
      nb[20+n] = wa[20+n] - wa[28+n];
      nb[28+n] = wa[20+n] + wa[28+n];
    end
  end

  // stage C
  always_comb begin
    for (int n = 0; n < 4; n++) begin
      nc[n]    = wb[n] + wb[n+4];
      nc[n+4]  = wb[n] - wb[n+4];
      nc[16+n] = wb[16+n] + wb[20+n];
      nc[20+n] = wb[16+n] - wb[20+n];
      nc[24+n] = wb[24+n] + wb[28+n];
      nc[28+n] = wb[24+n] - wb[28+n];
    end
    nc[8]  = wb[8];
    nc[9]  = wb[9]  + wb[15];
    nc[10] = wb[10] + wb[14];
    nc[11] = wb[11] + wb[13];
    nc[12] = wb[12];
    nc[13] = wb[11] - wb[13];
    nc[14] = wb[10] - wb[14];
    nc[15] = wb[9]  - wb[15];
  end

  // stage D
  always_comb begin
    for (int i = 0; i < 32; i++) nd[i] = wc[i];      // default: pass (D16, D20, D24, D28 = C)
    nd[0] = wc[0] + wc[2];
    nd[1] = wc[1] + wc[3];
    nd[2] = wc[0] - wc[2];
    nd[3] = wc[1] - wc[3];
    nd[4] = wc[4];
    nd[5] = wc[5] + wc[7];
    nd[6] = wc[6];
    nd[7] = wc[5] - wc[7];
    nd[8] = wc[8];
    nd[9] = '0; nd[11] = '0; nd[13] = '0; nd[15] = '0;   // replaced by the A/B pairs
    nd[10] = mul(wc[10], K_G);
    nd[12] = wc[12];
    nd[14] = mul(wc[14], K_G);
    nd9a  = mul(wc[9],  K_A);  nd9b  = mul(wc[9],  K_B);
    nd11a = mul(wc[11], K_A);  nd11b = mul(wc[11], K_B);
    nd13a = mul(wc[13], K_A);  nd13b = mul(wc[13], K_B);
    nd15a = mul(wc[15], K_A);  nd15b = mul(wc[15], K_B);
    // odd half: the two products of each E box
    for (int i = 16; i < 32; i++) begin np1[i] = '0; np2[i] = '0; end
    np1[17] = mul(wc[17], K_XIP);  np2[17] = mul(wc[25], K_ETP);
    np1[18] = mul(wc[18], K_AP);   np2[18] = mul(wc[26], K_BP);
    np1[19] = mul(wc[19], K_SGP);  np2[19] = mul(wc[27], K_RHP);
    np1[21] = mul(wc[21], K_RHP);  np2[21] = mul(wc[29], K_SGP);
    np1[22] = mul(wc[22], K_BP);   np2[22] = mul(wc[30], K_AP);
    np1[23] = mul(wc[23], K_XIP);  np2[23] = mul(wc[31], K_ETP);
    np1[25] = mul(wc[25], K_XIP);  np2[25] = mul(wc[17], K_ETP);
    np1[26] = mul(wc[26], K_AP);   np2[26] = mul(wc[18], K_BP);
    np1[27] = mul(wc[27], K_SGP);  np2[27] = mul(wc[19], K_RHP);
    np1[29] = mul(wc[21], K_SGP);  np2[29] = mul(wc[29], K_RHP);
    np1[30] = mul(wc[22], K_AP);   np2[30] = mul(wc[30], K_BP);
    np1[31] = mul(wc[23], K_ETP);  np2[31] = mul(wc[31], K_XIP);
  end

  // stage E
  w_t p1 [16:31], p2 [16:31];
  always_comb begin
    for (int i = 16; i < 32; i++) begin p1[i] = w_t'(dp1[i]); p2[i] = w_t'(dp2[i]); end
    ne[0]  = wd[0] + wd[1];
    ne[1]  = wd[0] - wd[1];
    ne[2]  = wd[2];
    ne[3]  = wd[3];
    ne[4]  = wd[4];
    ne[5]  = -mul(wd[5], K_G);
    ne[6]  = wd[6];
    ne[7]  = mul(wd[7], K_G);
    ne[8]  = wd[8] + wd[14];
    ne[9]  = w_t'(d9a) - w_t'(d11b);
    ne[10] = wd[10] + wd[12];
    ne[11] = w_t'(d11a) + w_t'(d9b);
    ne[12] = wd[10] - wd[12];
    ne[13] = w_t'(d15b) - w_t'(d13a);
    ne[14] = wd[8] - wd[14];
    ne[15] = w_t'(d13b) + w_t'(d15a);
    ne[16] = mul(wd[16], K_G);
    ne[20] = mul(wd[20], K_G);
    ne[24] = mul(wd[24], K_G);
    ne[28] = mul(wd[28], K_G);
    ne[17] = p1[17] - p2[17];
    ne[18] = p1[18] - p2[18];
    ne[19] = p1[19] - p2[19];
    ne[21] = p1[21] - p2[21];
    ne[22] = p1[22] + p2[22];
    ne[23] = p1[23] + p2[23];
    ne[25] = p1[25] + p2[25];
    ne[26] = p1[26] + p2[26];
    ne[27] = p1[27] + p2[27];
    ne[29] = p1[29] + p2[29];
    ne[30] = p1[30] - p2[30];
    ne[31] = p1[31] - p2[31];
  end

  // stage F
  always_comb begin
    nf[0]  = we[0];
    nf[1]  = we[1];
    nf[2]  = we[2];
    nf[3]  = we[3];
    nf[4]  = we[4] + we[7];
    nf[5]  = we[6] - we[5];
    nf[6]  = we[6] + we[5];
    nf[7]  = we[4] - we[7];
    nf[8]  = we[8] + we[15];
    nf[9]  = we[12] - we[9];
    nf[10] = we[10] + we[11];
    nf[11] = we[10] - we[11];
    nf[12] = we[12] + we[9];
    nf[13] = we[14] - we[13];
    nf[14] = we[14] + we[13];
    nf[15] = we[8] - we[15];
    for (int b = 16; b < 32; b += 4) begin
      nf[b]   = we[b]   + we[b+2];
      nf[b+1] = we[b+1] + we[b+3];
      nf[b+2] = we[b]   - we[b+2];
      nf[b+3] = we[b+1] - we[b+3];
    end
  end

  // output column (labels "-Im X" are negated so the ports carry Im X)
  always_comb begin
    nxr[0]  = wf[0];               nxi[0]  = '0;
    nxr[16] = wf[1];               nxi[16] = '0;
    nxr[8]  = wf[2];               nxi[8]  = wf[3];
    nxr[4]  = wf[4];               nxi[4]  = wf[5];
    nxr[12] = wf[7];               nxi[12] = wf[6];
    nxr[2]  = wf[8];               nxi[2]  = -wf[10];
    nxr[10] = wf[13];              nxi[10] = wf[9];
    nxr[14] = wf[15];              nxi[14] = wf[11];
    nxr[6]  = wf[14];              nxi[6]  = wf[12];
    nxr[1]  = wf[16] + wf[17];     nxi[1]  = -(wf[24] + wf[25]);
    nxr[15] = wf[16] - wf[17];     nxi[15] = wf[24] - wf[25];
    nxr[7]  = wf[18] + wf[27];     nxi[7]  = wf[26] - wf[19];
    nxr[9]  = wf[18] - wf[27];     nxi[9]  = -(wf[19] + wf[26]);
    nxr[3]  = wf[20] + wf[31];     nxi[3]  = wf[30] - wf[21];
    nxr[13] = wf[20] - wf[31];     nxi[13] = -(wf[21] + wf[30]);
    nxr[5]  = wf[22] + wf[23];     nxi[5]  = -(wf[28] + wf[29]);
    nxr[11] = wf[22] - wf[23];     nxi[11] = wf[28] - wf[29];
  end

  // ---------------- registers ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) begin
        a_q[i] <= '0; b_q[i] <= '0; c_q[i] <= '0; d_q[i] <= '0; e_q[i] <= '0; f_q[i] <= '0;
      end
      for (int i = 16; i < 32; i++) begin dp1[i] <= '0; dp2[i] <= '0; end
      {d9a, d9b, d11a, d11b, d13a, d13b, d15a, d15b} <= '0;
      for (int k = 0; k < 17; k++) begin re[k] <= '0; im[k] <= '0; end
      vld <= '0;
    end else begin
      for (int i = 0; i < 32; i++) begin
        a_q[i] <= a_t'(na[i]);
        b_q[i] <= b_t'(nb[i]);
        c_q[i] <= cc_t'(nc[i]);
        d_q[i] <= d_t'(nd[i]);
        e_q[i] <= e_t'(ne[i]);
        f_q[i] <= f_t'(nf[i]);
      end
      for (int i = 16; i < 32; i++) begin dp1[i] <= d_t'(np1[i]); dp2[i] <= d_t'(np2[i]); end
      d9a  <= d_t'(nd9a);  d9b  <= d_t'(nd9b);
      d11a <= d_t'(nd11a); d11b <= d_t'(nd11b);
      d13a <= d_t'(nd13a); d13b <= d_t'(nd13b);
      d15a <= d_t'(nd15a); d15b <= d_t'(nd15b);
      for (int k = 0; k < 17; k++) begin re[k] <= x_t'(nxr[k]); im[k] <= x_t'(nxi[k]); end
      vld <= {vld[5:0], in_valid};
    end
  end

  assign out_valid = vld[6];

endmodule
