// pd_pattern_filter: shift register and pattern filtering of the PD-FFNE.
//
// The five aligned detector streams (Dpre, Dpost, Dcomp, Dxp, Dxn) enter a
// 5-deep shift register, so the filter sees symbols k-2..k+2 around the
// centre symbol k. Let M[j] = (Dpre[j] != Dpost[j]) and X[j] = (Dxp[j] !=
// Dxn[j]) (the auxiliary pair flags a sample of small magnitude, |V| < hx).
// The output for symbol k is the agreed decision, or Dpost[k] when the
// branches disagree, unless a correction pattern covers k:
//   Pattern 1 (centre k): M[k] and one branch holds three equal decisions
//     on k-1..k+1 -> that branch is distrusted, take the other at k.
//   Pattern 2 (centre j): M[j-1] & !M[j] & M[j+1] -> Dpost at j-1,
//     negated agreed decision at j, Dpre at j+1. Applied for j = k-1, k, k+1.
//   Pattern 3 (centre j): M[j] & !M[j-1] & !M[j+1] & X[j] & (X[j-1]|X[j+1])
//     -> at j take the branch that matches Dcomp[j]. If that is Dpre the
//     sample j-1 is suspect, if it is Dpost the sample j+1 is; the suspect
//     neighbour is flipped when its X is set. Applied for j = k-1, k, k+1.
//   Pattern 4 (centre k): !M on k-1..k+1, Dpre equal on k-1..k+1 and X[k]
//     -> flip the agreed decision at k.
// Each output symbol is computed directly from the raw window, so the filter
// is purely feedforward. When several patterns cover k, the lower pattern
// number wins, and among instances of one pattern the one centred on k, then
// the earlier one.
//
// Interface and timing: one symbol per clock; the inputs must refer to the
// same symbol (pd_ffne_core outputs). d_out and fire are registered and
// belong to the symbol presented LAT = 4 clocks earlier (2 clocks to reach
// the centre of the window, one for the window register, one output
// register). fire flags the patterns whose own centre is k.
//
// Follows the paper: the four trigger conditions and corrections of Fig.
// 16. Own choices: the default branch on an uncovered conflict, the
// priority between overlapping patterns, and reading "Dxp and Dxn disagree"
// as Dxp != Dxn (the text's "Dxp = -1 and Dxn = 1" cannot occur with the
// comparator signs printed in Fig. 15).
module pd_pattern_filter
  import ffne_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     dpre,
  input  logic     dpost,
  input  logic     dcomp,
  input  logic     dxp,
  input  logic     dxn,
  output logic     d_out,
  output pd_fire_t fire
);

  // Window position i holds symbol offset 2-i from the centre (i=2).
  logic [4:0] sp, sq, sc, sx;

  function automatic int ix(int off);
    return 2 - off;
  endfunction

  logic p [-2:2];
  logic q [-2:2];
  logic cm[-2:2];
  logic m [-2:2];
  logic x [-2:2];

  logic p1a, p1b, p2c, p2m, p2p, p3c, p3m, p3p, p4c;
  logic d_nxt;
  pd_fire_t fire_nxt;

  always_comb begin
    for (int o = -2; o <= 2; o++) begin
      p[o]  = sp[ix(o)];
      q[o]  = sq[ix(o)];
      cm[o] = sc[ix(o)];
      x[o]  = sx[ix(o)];
      m[o]  = sp[ix(o)] ^ sq[ix(o)];
    end

    // Pattern 1: conflict at k, one branch constant over k-1..k+1.
    p1a = m[0] && (p[-1] == p[0]) && (p[0] == p[1]);   // distrust Dpre
    p1b = m[0] && (q[-1] == q[0]) && (q[0] == q[1]);   // distrust Dpost
    // Pattern 2 centred on k-1, k, k+1.
    p2m = m[-2] && !m[-1] && m[0];
    p2c = m[-1] && !m[0]  && m[1];
    p2p = m[0]  && !m[1]  && m[2];
    // Pattern 3 centred on k, and the neighbour flips from k-1 and k+1.
    p3c = m[0] && !m[-1] && !m[1] && x[0] && (x[-1] || x[1]);
    p3m = m[-1] && !m[-2] && !m[0] && x[-1] && (x[-2] || x[0])
          && (cm[-1] == q[-1]) && x[0];
    p3p = m[1] && !m[0] && !m[2] && x[1] && (x[0] || x[2])
          && (cm[1] == p[1]) && x[0];
    // Pattern 4: agreement and three equal decisions, small sample at k.
    p4c = !m[-1] && !m[0] && !m[1] && (p[-1] == p[0]) && (p[0] == p[1])
          && x[0];

    if (m[0]) begin
      if (p1a != p1b)  d_nxt = p1a ? q[0] : p[0];
      else if (p2m)    d_nxt = p[0];
      else if (p2p)    d_nxt = q[0];
      else if (p3c)    d_nxt = cm[0];
      else             d_nxt = q[0];
    end else begin
      if (p2c)             d_nxt = ~p[0];
      else if (p3m || p3p) d_nxt = ~p[0];
      else if (p4c)        d_nxt = ~p[0];
      else                 d_nxt = p[0];
    end

    fire_nxt.p1 = p1a != p1b;
    fire_nxt.p2 = p2c;
    fire_nxt.p3 = p3c;
    fire_nxt.p4 = p4c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp    <= '0;
      sq    <= '0;
      sc    <= '0;
      sx    <= '0;
      d_out <= 1'b0;
      fire  <= '0;
    end else begin
      sp    <= {sp[3:0], dpre};
      sq    <= {sq[3:0], dpost};
      sc    <= {sc[3:0], dcomp};
      sx    <= {sx[3:0], dxp ^ dxn};
      d_out <= d_nxt;
      fire  <= fire_nxt;
    end
  end

endmodule
