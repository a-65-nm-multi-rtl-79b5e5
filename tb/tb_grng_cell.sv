// tb_grng_cell: self-checking testbench of the GRNG cell model.
// 32 cells with different seeds are driven through all 49 device pairs of
// both cycles. Each sample is compared with a tick-by-tick simulation of the
// four pulse gates (positive when P wins the charge, negative when N wins the
// discharge), with the device crossing times recomputed here from the same
// static-variation recipe. The population must have
// near-zero mean (no calibration) and an SD close to 8 ticks (1 ns), each cell
// must give several distinct values, and no selection must give no pulse.
// Gaussian quality is measured as in silicon characterisation: the normal
// Q-Q correlation of each cell's 49 charge samples (sorted samples against
// normal quantiles at Blom positions (i-0.375)/(n+0.25), quantiles from
// Tukey's approximation 4.91*(p^0.14-(1-p)^0.14)). The measured chip reached
// a mean of 0.977 with 90 % of cells above 0.95; the model must reach a mean
// above 0.95 and every cell above 0.85.
`timescale 1ns/1ps
module tb_grng_cell;
  import mog_pkg::*;
  localparam int NC = 32;
  grng_sel_t sel;
  logic [NC-1:0][EPS_W-1:0] ec, ed;
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NC; i++) begin : g
    grng_cell #(.SEED(i + 1)) u (.sel(sel), .eps_c(ec[i]), .eps_d(ed[i]));
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int ref_delay(input int unsigned seed, input int bank, input int idx);
    logic [31:0] h;
    int acc;
    acc = 0;
    for (int k = 0; k < 4; k++) begin
      h = seed * 32'h9E3779B1 ^ 32'(bank * 7 + idx) * 32'h85EBCA6B ^ 32'(k) * 32'hC2B2AE35;
      h = h ^ (h >> 16); h = h * 32'h85EBCA6B; h = h ^ (h >> 13);
      h = h * 32'hC2B2AE35; h = h ^ (h >> 16);
      acc += int'(h % 10);
    end
    return 27 + acc - 18;
  endfunction

  // Tick-by-tick simulation of the four pulse gates over one half period of
  // 54 ticks: in the charge phase (clk=0) P and N rise at t_p and t_n, in the
  // discharge phase (clk=1) they fall. Returns width(+) - width(-).
  function automatic int gate_sim(input logic clk, input int t_p, input int t_n);
    logic [3:0] g;
    int w;
    w = 0;
    for (int t = 0; t < 54; t++) begin
      if (!clk) begin
        g = grng_gates(1'b0, t >= t_p, t >= t_n);
        w += int'(g[3]) - int'(g[2]);
      end else begin
        g = grng_gates(1'b1, t < t_p, t < t_n);
        w += int'(g[1]) - int'(g[0]);
      end
    end
    return w;
  endfunction

  // normal Q-Q correlation coefficient of a sample set
  function automatic real qq_r(input int vin [$]);
    real q, mx, sxy, sxx, syy, pp;
    int n, v [$];
    v = vin;
    n = v.size();
    for (int i = 1; i < n; i++)  // insertion sort, ascending signed
      for (int j = i; j > 0 && v[j - 1] > v[j]; j--) begin
        int t;
        t = v[j]; v[j] = v[j - 1]; v[j - 1] = t;
      end
    mx = 0;
    for (int i = 0; i < n; i++) mx += v[i];
    mx /= n;
    sxy = 0; sxx = 0; syy = 0;
    for (int i = 0; i < n; i++) begin
      pp = (real'(i + 1) - 0.375) / (real'(n) + 0.25);
      q = 4.91 * ($pow(pp, 0.14) - $pow(1.0 - pp, 0.14));
      sxy += (v[i] - mx) * q; sxx += (v[i] - mx) * (v[i] - mx); syy += q * q;
    end
    return (sxx > 0) ? sxy / $sqrt(sxx * syy) : 0.0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sum, sum2, n, mean, sd, r, r_sum, r_min;
    int distinct, r_good;
    sum = 0; sum2 = 0; n = 0; r_sum = 0; r_min = 1.0; r_good = 0;
    sel = '0; #1;
    for (int c = 0; c < NC; c++) check(ec[c] == 0 && ed[c] == 0, "no selection, no pulse");
    for (int c = 0; c < NC; c++) begin : per_cell
      bit seen [int];
      int vals [$];
      seen.delete();
      vals.delete();
      for (int i = 0; i < 7; i++)
        for (int j = 0; j < 7; j++) begin
          sel.c_p = 7'(1 << i); sel.c_n = 7'(1 << j);
          sel.d_p = 7'(1 << i); sel.d_n = 7'(1 << j);
          #1;
          begin
            int ex_c, ex_d;
            ex_c = gate_sim(1'b0, ref_delay(c + 1, 0, i), ref_delay(c + 1, 1, j));
            ex_d = gate_sim(1'b1, ref_delay(c + 1, 2, i), ref_delay(c + 1, 3, j));
            check($signed(ec[c]) == ex_c, $sformatf("cell %0d charge %0d,%0d: %0d exp %0d", c, i, j, $signed(ec[c]), ex_c));
            check($signed(ed[c]) == ex_d, $sformatf("cell %0d discharge %0d,%0d: %0d exp %0d", c, i, j, $signed(ed[c]), ex_d));
            sum += real'(ex_c + ex_d);
            sum2 += real'(ex_c * ex_c + ex_d * ex_d);
            n += 2;
            seen[$signed(ec[c])] = 1;
            vals.push_back(ex_c);
          end
        end
      distinct = seen.num();
      check(distinct >= 10, $sformatf("cell %0d only %0d distinct values", c, distinct));
      r = qq_r(vals);
      r_sum += r;
      if (r < r_min) r_min = r;
      if (r > 0.95) r_good++;
      check(r > 0.85, $sformatf("cell %0d Q-Q correlation %f", c, r));
    end
    mean = sum / n;
    sd = $sqrt(sum2 / n - mean * mean);
    $display("population mean %f ticks, SD %f ticks", mean, sd);
    check(mean > -1.5 && mean < 1.5, "zero mean");
    check(sd > 6.0 && sd < 10.0, "SD about 8 ticks (1 ns)");
    $display("Q-Q correlation: mean %f, min %f, %0d of %0d cells above 0.95",
             r_sum / NC, r_min, r_good, NC);
    check(r_sum / NC > 0.95, "mean Q-Q correlation above 0.95");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
