// tb_algas4_gdswu_top -- end-to-end test of the four-corner sliding-window
// stage at its default parameters (4 cores, 16 taps, 7-bit data, a=1, b=10).
//
// Each corner receives its own stream of altitude estimates with its own
// random strobe pattern, so corners take samples in the same cycle and in
// different ones.  A reference model per corner, with weights computed here
// as floor(32*exp(-age/10)), predicts every result; the latency of 6 clock
// edges and the holding of the outputs between results are checked too.
// The streams model a descent: altitude falls slowly, and now and then one
// estimate is replaced by a wrong value (an injected fault of the fuzzy node).
// A second model fed with the clean stream shows that the averaged result
// moves by no more than one weight's share, 127*28/512 < 7, per fault.
// Mechanisms counted, each of which must occur: window fill, eviction of the
// oldest sample, idle cycles with held output, simultaneous samples on all
// corners, an injected fault damped, the paper's step response (7'h7F held
// -> 7'h3A) and a reset in the middle of a run.
module tb_algas4_gdswu_top;
  localparam int CORES   = 4;
  localparam int TAPS    = 16;
  localparam int DW      = 7;
  localparam int SUM_W   = DW + 5 + 4;
  localparam int LATENCY = 6;
  localparam int MAXDEV  = (127 * 28) / 512 + 1;

  logic                            clk = 1'b0;
  logic                            rst_n = 1'b0;
  logic [CORES-1:0]                fls_valid = '0;
  logic [CORES-1:0][DW-1:0]        fls_out = '0;
  logic [CORES-1:0]                avg_valid;
  logic [CORES-1:0][SUM_W-1:0]     sum_sample;
  logic [CORES-1:0][DW-1:0]        average_out;

  int checks = 0, failures = 0;
  int n_fill = 0, n_evict = 0, n_idle = 0, n_simul = 0, n_fault = 0,
      n_step = 0, n_reset = 0;

  algas4_gdswu_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---- reference models -------------------------------------------------
  int unsigned w_ref [TAPS];
  initial
    for (int i = 0; i < TAPS; i++)
      w_ref[i] = int'($floor(32.0 * $exp(-(i + 1) / 10.0)));

  int unsigned m_win   [CORES][TAPS];   // what the unit sees
  int unsigned m_clean [CORES][TAPS];   // the same stream without faults
  int unsigned m_count [CORES];         // samples since reset
  int unsigned exp_q   [CORES][$];
  int unsigned cln_q   [CORES][$];
  int unsigned cyc_q   [CORES][$];
  logic [SUM_W-1:0] last_sum [CORES];
  int unsigned cyc = 0;
  logic [CORES-1:0] fault_now = '0;     // set by the stimulus with a sample
  logic [CORES-1:0][DW-1:0] clean_now = '0;

  function automatic int unsigned wsum(input int unsigned w [TAPS]);
    int unsigned s = 0;
    for (int i = 0; i < TAPS; i++) s += w[i] * w_ref[i];
    return s;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CORES; c++) begin
        foreach (m_win[c][i]) begin m_win[c][i] = 0; m_clean[c][i] = 0; end
        m_count[c] = 0;
        exp_q[c].delete(); cln_q[c].delete(); cyc_q[c].delete();
        last_sum[c] = '0;
      end
    end else begin
      if (&fls_valid) n_simul++;
      for (int c = 0; c < CORES; c++) begin
        if (avg_valid[c]) begin
          if (exp_q[c].size() == 0) check(0, $sformatf("core %0d: result without sample", c));
          else begin
            int unsigned es, cs, ec;
            int dev;
            es = exp_q[c].pop_front();
            cs = cln_q[c].pop_front();
            ec = cyc_q[c].pop_front();
            check(sum_sample[c] == SUM_W'(es),
                  $sformatf("core %0d: sum %0d, expected %0d", c, sum_sample[c], es));
            check(average_out[c] == DW'(es / 512),
                  $sformatf("core %0d: average %0d, expected %0d", c, average_out[c], es / 512));
            check(cyc - 1 - ec == LATENCY,
                  $sformatf("core %0d: latency %0d", c, cyc - 1 - ec));
            dev = int'(es / 512) - int'(cs / 512);
            if (dev < 0) dev = -dev;
            check(dev <= MAXDEV,
                  $sformatf("core %0d: fault moved result by %0d", c, dev));
          end
          last_sum[c] = sum_sample[c];
        end else begin
          check(sum_sample[c] == last_sum[c],
                $sformatf("core %0d: output changed while idle", c));
          if (m_count[c] > 0) n_idle++;
        end
        if (fls_valid[c]) begin
          for (int i = TAPS - 1; i > 0; i--) begin
            m_win[c][i]   = m_win[c][i-1];
            m_clean[c][i] = m_clean[c][i-1];
          end
          m_win[c][0]   = 32'(fls_out[c]);
          m_clean[c][0] = 32'(clean_now[c]);
          m_count[c]++;
          if (m_count[c] == TAPS) n_fill++;
          if (m_count[c] > TAPS)  n_evict++;
          if (fault_now[c])       n_fault++;
          exp_q[c].push_back(wsum(m_win[c]));
          cln_q[c].push_back(wsum(m_clean[c]));
          cyc_q[c].push_back(cyc);
        end
      end
    end
    if (rst_n) cyc++;
  end

  // ---- stimulus: inputs change on the falling clock edge ------------------
  int unsigned alt [CORES];
  int unsigned since_fault [CORES];

  task automatic descent(input int cycles, input int pct);
    for (int t = 0; t < cycles; t++) begin
      @(negedge clk);
      for (int c = 0; c < CORES; c++) begin
        fls_valid[c] = ($urandom_range(0, 99) < pct);
        fault_now[c] = 1'b0;
        if (fls_valid[c]) begin
          if (alt[c] > 2 && $urandom_range(0, 3) == 0) alt[c]--;
          clean_now[c] = DW'(alt[c]);
          fls_out[c]   = DW'(alt[c]);
          since_fault[c]++;
          if (since_fault[c] > TAPS && $urandom_range(0, 9) == 0) begin
            fls_out[c]     = DW'($urandom);      // wrong estimate
            fault_now[c]   = 1'b1;
            since_fault[c] = 0;
          end
        end
      end
    end
    @(negedge clk);
    fls_valid = '0;
    fault_now = '0;
    repeat (LATENCY + 3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // step response on every corner at once: 7'h7F for 16 samples
    for (int n = 0; n < TAPS; n++) begin
      fls_valid = '1;
      for (int c = 0; c < CORES; c++) begin fls_out[c] = 7'h7F; clean_now[c] = 7'h7F; end
      @(negedge clk);
      fls_valid = '0;
      repeat (n % 3) @(negedge clk);
    end
    repeat (LATENCY + 3) @(negedge clk);
    for (int c = 0; c < CORES; c++) begin
      check(average_out[c] == 7'h3A,
            $sformatf("core %0d: step response %h, paper gives 3A", c, average_out[c]));
      if (average_out[c] == 7'h3A) n_step++;
    end

    // descent with faults, dense and sparse strobes
    for (int c = 0; c < CORES; c++) begin alt[c] = 100 + 5 * c; since_fault[c] = 0; end
    descent(400, 90);
    descent(400, 30);

    // reset in the middle of a run
    fork
      descent(20, 100);
      begin repeat (7) @(negedge clk); #2 rst_n = 1'b0; end
    join_any
    #1 check(avg_valid == '0 && average_out == '0, "reset did not clear all corners");
    n_reset++;
    wait fork;
    @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < CORES; c++) since_fault[c] = 0;
    descent(200, 70);

    for (int c = 0; c < CORES; c++)
      check(exp_q[c].size() == 0, $sformatf("core %0d: results missing", c));

    $display("mechanisms: fill=%0d evict=%0d idle=%0d simultaneous=%0d faults=%0d step=%0d reset=%0d",
             n_fill, n_evict, n_idle, n_simul, n_fault, n_step, n_reset);
    check(n_fill  > 0, "window never filled");
    check(n_evict > 0, "no sample ever left the window");
    check(n_idle  > 0, "no idle cycle");
    check(n_simul > 0, "corners never sampled together");
    check(n_fault > 0, "no fault injected");
    check(n_step  > 0, "step response not seen");
    check(n_reset > 0, "no reset in a run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
