// tb_top_tasks.svh: reference model and host tasks for testbenches of
// snn_cim_top. The including module defines NW (wordlines), NN (neurons)
// and WATCHDOG, declares the top's port signals and instantiates it as
// `dut`; tb_top_body.svh or a workload scenario follows.
//
// The testbench holds its own copy of the feature maps, weights and
// thresholds and computes every layer independently: binary inputs taken
// tap-major from the FM words, ternary dot products, the membrane equation
// with a preset at the first timestep and after each spike, OR pooling,
// and the FM address layout base + position*ts + timestep. Every word the
// accelerator writes is read back through the host port and compared.


  int checks = 0, failures = 0;

  logic [127:0] fm_ref [8192];
  bit           fm_valid [8192];
  int           wt [5][NW][NN];
  int           th [NN];
  int           n_stall = 0, n_mode_cim = 0, n_mode_access = 0, n_lock = 0, n_pool = 0,
                n_shortcut = 0, n_orig_equal = 0, n_ts1 = 0, n_ts3 = 0, n_mid_reset = 0,
                n_chain = 0, n_wset_switch = 0, n_spikes_total = 0, n_accum = 0;
  longint       ref_acc [NN];
  int           ref_acc_ops = 0;

  always #5 clk = ~clk;

  function automatic logic [127:0] rnd_spikes(int pct);
    logic [127:0] v;
    for (int b = 0; b < 128; b++) v[b] = (($urandom % 100) < pct);
    return v;
  endfunction

  task automatic host_write(int a, logic [127:0] d);
    @(negedge clk);
    h_we = 1; h_waddr = 13'(a); h_wdata = d;
    @(negedge clk);
    h_we = 0;
    fm_ref[a] = d; fm_valid[a] = 1;
  endtask

  task automatic host_read(int a, output logic [127:0] d);
    @(negedge clk);
    h_re = 1; h_raddr = 13'(a);
    @(negedge clk);
    h_re = 0;
    d = h_rdata;
  endtask

  task automatic go_access();
    @(negedge clk) cim_req = 0;
    while (!access_ready) @(negedge clk);
    n_mode_access++;
  endtask

  task automatic go_cim();
    @(negedge clk) cim_req = 1;
    while (!cm_e) @(negedge clk);
    n_mode_cim++;
  endtask

  task automatic load_weights(int s);
    for (int r = 0; r < NW; r++) begin
      @(negedge clk);
      w_we = 1; w_addr = $bits(w_addr)'(r); w_set = 3'(s);
      for (int n = 0; n < NN; n++) begin
        wt[s][r][n] = int'($urandom % 3) - 1;
        w_data[2*n]   = (wt[s][r][n] == 1);
        w_data[2*n+1] = (wt[s][r][n] == -1);
      end
    end
    @(negedge clk) w_we = 0;
  endtask

  task automatic load_thresholds();
    @(negedge clk);
    for (int n = 0; n < NN; n++) begin
      th_cells[n*5 +: 5] = 5'($urandom);
      th[n] = $countones(th_cells[n*5 +: 5]);
    end
    th_we = 1;
    @(negedge clk) th_we = 0;
  endtask

  // reference conv layer (+ pooling) into fm_ref; returns number of words
  task automatic ref_conv(cim_pkg::layer_cfg_t c, output int nwords);
    int K, cin, ts, st, nout, P, v, dot, base;
    bit s;
    logic [127:0] spk [4096][3];
    K = int'(c.ksize); cin = int'(c.cin); ts = int'(c.ts); st = int'(c.stride);
    P = int'(c.pool);
    nout = (int'(c.in_len) - K) / st + 1;
    base = NW - K * cin;
    if (c.accum) begin
      for (int n = 0; n < NN; n++) ref_acc[n] = 0;
      ref_acc_ops = nout * ts;
    end
    for (int n = 0; n < NN; n++) begin
      for (int b = 0; b < nout; b++) begin
        for (int t = 0; t < ts; t++) begin
          if (t == 0 || s) v = 0;
          dot = 0;
          for (int j = 0; j < K; j++)
            for (int ch = 0; ch < cin; ch++)
              if (fm_ref[int'(c.in_base) + (b*st + j)*ts + t][ch])
                dot += wt[int'(c.wset)][base + j*cin + ch][n];
          v += dot;
          if (c.accum) ref_acc[n] += dot;
          s = (v >= th[n]);
          if (s && t < ts - 1) n_mid_reset++;
          if (s) n_spikes_total++;
          if (n == 0) spk[b][t] = '0;
          spk[b][t][n] = s;
        end
        s = 0;
      end
    end
    nwords = 0;
    for (int q = 0; q < nout / P; q++)
      for (int t = 0; t < ts; t++) begin
        logic [127:0] o = '0;
        for (int j = 0; j < P; j++) o |= spk[q*P + j][t];
        fm_ref[int'(c.out_base) + q*ts + t] = o;
        fm_valid[int'(c.out_base) + q*ts + t] = 1;
        nwords++;
      end
  endtask

  task automatic ref_pool(cim_pkg::layer_cfg_t c, output int nwords);
    int ts, P;
    ts = int'(c.ts); P = int'(c.pool);
    nwords = 0;
    for (int q = 0; q < int'(c.in_len) / P; q++)
      for (int t = 0; t < ts; t++) begin
        logic [127:0] o = '0;
        for (int j = 0; j < P; j++) o |= fm_ref[int'(c.in_base) + (q*P + j)*ts + t];
        fm_ref[int'(c.out_base) + q*ts + t] = o;
        nwords++;
      end
  endtask

  task automatic run_layer(cim_pkg::layer_cfg_t c, bit req_cim_now, output int cycles);
    int nwords;
    logic [127:0] got;
    int nout, lat;
    @(negedge clk);
    cfg = c; start = 1;
    if (req_cim_now) cim_req = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk); cycles++;
      if (reg_locked) n_lock++;
    end
    if (c.mode == cim_pkg::LAYER_CONV) begin
      ref_conv(c, nwords);
      nout = (int'(c.in_len) - int'(c.ksize)) / int'(c.stride) + 1;
      lat = 1 + int'(c.ksize) * int'(c.ts) + nout * int'(c.ts) * int'(c.stride) + 6 + int'(stall_cycles);
      `CHECK(cycles == lat, $sformatf("conv latency %0d, expected %0d", cycles, lat))
      if (stall_cycles != 0) n_stall++;
      if (c.ts == 1) n_ts1++;
      if (c.ts == 3) n_ts3++;
      if (c.pool > 1) n_pool++;
    end else begin
      ref_pool(c, nwords);
      `CHECK(cycles == 1 + int'(c.in_len) * int'(c.ts) + 6, "pool-only latency")
      n_shortcut++;
    end
    `CHECK(int'(n_written) == nwords, $sformatf("%0d words written, expected %0d", n_written, nwords))
    if (c.mode == cim_pkg::LAYER_CONV && c.accum) begin
      `CHECK(int'(acc_ops) == ref_acc_ops, $sformatf("accumulator ops %0d, expected %0d", acc_ops, ref_acc_ops))
      for (int n = 0; n < NN; n++) begin
        @(negedge clk) acc_sel = $bits(acc_sel)'(n);
        #1;
        `CHECK(longint'(acc_sum) == ref_acc[n],
               $sformatf("neuron %0d membrane sum %0d, expected %0d", n, acc_sum, ref_acc[n]))
      end
      n_accum++;
    end
    for (int a = 0; a < nwords; a++) begin
      host_read(int'(c.out_base) + a, got);
      `CHECK(got == fm_ref[int'(c.out_base) + a],
             $sformatf("layer out word %0d: got %h exp %h", a, got, fm_ref[int'(c.out_base) + a]))
    end
  endtask

  function automatic cim_pkg::layer_cfg_t mk(int mode, int cin, int K, int st, int len, int P, int ts,
                                             int ws, int ib, int ob, bit acc = 0);
    cim_pkg::layer_cfg_t c;
    c = '0;
    c.mode = cim_pkg::layer_mode_e'(mode); c.cin = 8'(cin); c.ksize = 11'(K); c.stride = 4'(st);
    c.in_len = 16'(len); c.pool = 3'(P); c.ts = 2'(ts); c.wset = 3'(ws);
    c.in_base = 13'(ib); c.out_base = 13'(ob); c.accum = acc;
    return c;
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

