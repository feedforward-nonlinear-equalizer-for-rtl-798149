// tb_pd_pattern_filter: self-checking test of the PD-FFNE pattern filter.
//
// Part 1 replays the conflict examples of the pattern figures: patterns
// 1-a/1-b, 2, 3 (both neighbour directions) and 4 (both polarities). Each
// example is embedded in agreeing, alternating padding and the filter
// output over the example window must equal the transmitted bits shown
// with it. Part 2 drives random detector streams with frequent conflicts and
// compares every output with a reference model of the pattern rules written
// here; it also counts how often each pattern fired. Latency: the decision
// of a symbol leaves the filter 4 clocks after the symbol entered.
module tb_pd_pattern_filter;
  import ffne_pkg::*;

  localparam int LAT = 4, NR = 6000;
  logic clk = 0, rst_n = 0;
  logic dpre = 0, dpost = 0, dcomp = 0, dxp = 0, dxn = 0;
  logic d_out;
  pd_fire_t fire;
  int checks = 0, failures = 0;
  int fired [4] = '{0, 0, 0, 0};

  // Stream buffers (1 = bit one).
  bit sp [NR], sq [NR], sc [NR], sxp [NR], sxn [NR];
  bit got [NR];
  bit fgot [NR][4];
  int len;

  pd_pattern_filter dut (.clk, .rst_n, .dpre, .dpost, .dcomp, .dxp, .dxn, .d_out, .fire);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Play the buffered stream and collect the outputs, aligned by LAT.
  task automatic play();
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < len + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        got[i-LAT] = d_out;
        fgot[i-LAT] = '{fire.p1, fire.p2, fire.p3, fire.p4};
      end
      if (i < len) begin
        dpre = sp[i]; dpost = sq[i]; dcomp = sc[i]; dxp = sxp[i]; dxn = sxn[i];
      end else begin
        dpre = 0; dpost = 0; dcomp = 0; dxp = 0; dxn = 0;
      end
    end
  endtask

  // Figure example: strings of +/- for k-2.. (5 symbols; '.' = not shown,
  // then taken equal to Dpre with no auxiliary conflict).
  task automatic figure(string name, string tx, string pre, string post,
                        string comp, string xp, string xn);
    int base = 6;
    len = 18;
    for (int i = 0; i < len; i++) begin
      sp[i] = i[0]; sq[i] = i[0]; sc[i] = i[0]; sxp[i] = i[0]; sxn[i] = i[0];
    end
    for (int j = 0; j < tx.len(); j++) begin
      int i = base + j;
      sp[i]  = pre[j] == "+";
      sq[i]  = post[j] == "+";
      sc[i]  = comp[j] == "." ? sp[i] : comp[j] == "+";
      sxp[i] = xp[j] == "." ? sp[i] : xp[j] == "+";
      sxn[i] = xn[j] == "." ? sp[i] : xn[j] == "+";
    end
    // Padding next to the window is chosen to break three-equal runs.
    sp[base-1] = ~sp[base]; sq[base-1] = ~sp[base]; sc[base-1] = ~sp[base];
    sxp[base-1] = ~sp[base]; sxn[base-1] = ~sp[base];
    sp[base+tx.len()] = ~sp[base+tx.len()-1]; sq[base+tx.len()] = ~sp[base+tx.len()-1];
    sxp[base+tx.len()] = sp[base+tx.len()]; sxn[base+tx.len()] = sp[base+tx.len()];
    sc[base+tx.len()] = sp[base+tx.len()];
    play();
    for (int j = 0; j < tx.len(); j++) begin
      checks++;
      if (got[base+j] !== (tx[j] == "+")) begin
        failures++;
        $display("%s: symbol %0d got %b", name, j, got[base+j]);
      end
    end
  endtask

  // Reference model of the pattern rules for symbol k of the buffers.
  function automatic bit ref_d(int k, output bit f[4]);
    bit p[5], q[5], c[5], m[5], x[5];
    bit p1a, p1b, p2m, p2c, p2p, p3c, p3m, p3p, p4c;
    for (int o = -2; o <= 2; o++) begin
      int i = k + o;
      bit inb = (i >= 0 && i < len);
      p[o+2] = inb ? sp[i] : 0;
      q[o+2] = inb ? sq[i] : 0;
      c[o+2] = inb ? sc[i] : 0;
      x[o+2] = inb ? (sxp[i] != sxn[i]) : 0;
      m[o+2] = p[o+2] != q[o+2];
    end
    p1a = m[2] && p[1] == p[2] && p[2] == p[3];
    p1b = m[2] && q[1] == q[2] && q[2] == q[3];
    p2m = m[0] && !m[1] && m[2];
    p2c = m[1] && !m[2] && m[3];
    p2p = m[2] && !m[3] && m[4];
    p3c = m[2] && !m[1] && !m[3] && x[2] && (x[1] || x[3]);
    p3m = m[1] && !m[0] && !m[2] && x[1] && (x[0] || x[2]) && c[1] == q[1] && x[2];
    p3p = m[3] && !m[2] && !m[4] && x[3] && (x[2] || x[4]) && c[3] == p[3] && x[2];
    p4c = !m[1] && !m[2] && !m[3] && p[1] == p[2] && p[2] == p[3] && x[2];
    f = '{p1a != p1b, p2c, p3c, p4c};
    if (m[2]) begin
      if (p1a && !p1b) return q[2];
      if (p1b && !p1a) return p[2];
      if (p2m) return p[2];
      if (p2p) return q[2];
      if (p3c) return c[2];
      return q[2];
    end
    if (p2c || p3m || p3p || p4c) return !p[2];
    return p[2];
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Pattern 1-a / 1-b: Tx -1 1 -1 1.
    figure("pattern 1", "-+-+", "---+", "-+++", "....", "....", "....");
    // Pattern 2: Tx -1 1 -1 1 -1.
    figure("pattern 2", "-+-+-", "--++-", "-++--", ".....", ".....", ".....");
    // Pattern 3, Dcomp sides with Dpost: the k+1 neighbour is flipped.
    figure("pattern 3a", "+-+-+", "+--++", "+-+++", "+-+++", "+-+-+", "---+-");
    // Pattern 3, Dcomp sides with Dpre: the k-1 neighbour is flipped.
    figure("pattern 3b", "-+-+-", "---+-", "--++-", "---+-", "+-++-", "-+-+-");
    // Pattern 4, both polarities.
    figure("pattern 4+", "-+-+-", "-+++-", "-+++-", ".....", "-+-+-", "-+++-");
    figure("pattern 4-", "+-+-+", "+---+", "+---+", ".....", "+---+", "+-+-+");

    // Random streams: a true bit stream with sparse detector errors.
    len = NR;
    for (int i = 0; i < NR; i++) begin
      bit t;
      logic [31:0] r;
      r = $urandom;
      t = r[0];
      sp[i]  = (r[3:1] == 0) ? !t : t;
      sq[i]  = (r[6:4] == 0) ? !t : t;
      sc[i]  = (r[9:7] < 2) ? !t : t;
      sxp[i] = (r[11:10] == 0) ? 1'b1 : t;
      sxn[i] = (r[13:12] == 0) ? 1'b0 : t;
    end
    play();
    for (int k = 0; k < NR - 2; k++) begin
      bit f[4];
      bit e;
      e = ref_d(k, f);
      checks++;
      if (got[k] !== e || fgot[k] != f) begin
        failures++;
        if (failures < 10) $display("random k=%0d got %b exp %b", k, got[k], e);
      end
      for (int p = 0; p < 4; p++) if (f[p]) fired[p]++;
    end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (fired[p] == 0) failures++;
    end
    $display("patterns fired: 1:%0d 2:%0d 3:%0d 4:%0d", fired[0], fired[1], fired[2], fired[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
