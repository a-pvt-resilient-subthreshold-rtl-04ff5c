// tb_top_body.svh: end-to-end scenario shared by the reduced and the
// full-size testbench of snn_cim_top (after tb_top_tasks.svh). The including
// module also defines the layer sizes CIN_A, K_A, LEN_A, CIN_D, K_D.
//
// Every word the accelerator writes is read back through the host port and
// compared with the reference model of tb_top_tasks.svh.
//
// Mechanisms exercised and counted (each must happen at least once):
// stall while the array is still in its guard time, data-access <-> CIM
// mode switches, regulator lock, pipelined pooling, the pooling shortcut
// path, the unpooled (original) flow giving the same result as the
// pipelined one, Ts = 1 and Ts = 3, a spike resetting the membrane inside
// a group, weight sets switched between layers, chained layers, and the
// final-block membrane accumulator.

  initial begin
    int cyc_pipe, cyc_conv, cyc_pool, dummy, nq, stall_a;
    cim_pkg::layer_cfg_t la, lb, lc, ld, le;
    logic [127:0] w;
    h_we = 0; h_re = 0; h_waddr = '0; h_raddr = '0; h_wdata = '0;
    w_we = 0; w_addr = '0; w_set = '0; w_data = '0; th_we = 0; th_cells = '0;
    cim_req = 0; start = 0; cfg = '0; temp_c = 8'sd25; i_r_na = 16'd2000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(access_ready && !wm_e && !cm_e, "reset into data access mode")
    // input feature map A: LEN_A positions x 3 timesteps, CIN_A channels
    for (int a = 0; a < LEN_A * 3; a++) begin
      w = rnd_spikes(25);
      for (int b = CIN_A; b < 128; b++) w[b] = 1'b0;
      host_write(a, w);
    end
    load_weights(0);
    load_weights(1);
    load_thresholds();

    // A: conv + pipelined max pooling 2, Ts=3; started before CIM mode -> stall
    la = mk(0, CIN_A, K_A, 1, LEN_A, 2, 3, 0, 0, 1000);
    run_layer(la, 1, cyc_pipe);
    stall_a = int'(stall_cycles);
    `CHECK(cm_e, "CIM mode entered")
    n_mode_cim++;
    // B: same conv without pooling (original flow) then C: pooling pass over the shortcut
    lb = mk(0, CIN_A, K_A, 1, LEN_A, 1, 3, 0, 0, 2000);
    run_layer(lb, 0, cyc_conv);
    lc = mk(1, 0, 0, 1, (LEN_A - K_A + 1), 2, 3, 0, 2000, 3000);
    run_layer(lc, 0, cyc_pool);
    nq = (LEN_A - K_A + 1) / 2;
    begin
      bit same = 1;
      for (int a = 0; a < nq * 3; a++) if (fm_ref[3000 + a] != fm_ref[1000 + a]) same = 0;
      `CHECK(same, "pooling over the shortcut equals pipelined pooling")
      if (same) n_orig_equal++;
    end
    `CHECK(cyc_pipe - stall_a < cyc_conv + cyc_pool, "pipelined pooling is faster than conv then pool")
    // D: chained layer on A's output, other weight set, Ts=3
    ld = mk(0, CIN_D, K_D, 1, nq, 1, 3, 1, 1000, 4000);
    ld.accum = 1'b1;   // the chained layer also acts as a final block
    run_layer(ld, 0, dummy);
    n_chain++; n_wset_switch++;
    // E: Ts=1 (CNN-like) layer, stride 2, pooling 4
    le = mk(0, CIN_A, K_A, 2, LEN_A, 4, 1, 1, 5000, 5500);
    go_access();
    for (int a = 0; a < LEN_A; a++) begin
      w = rnd_spikes(30);
      for (int b = CIN_A; b < 128; b++) w[b] = 1'b0;
      host_write(5000 + a, w);
    end
    // reload set 0 in data access mode, then back to CIM mode
    load_weights(0);
    go_cim();
    run_layer(le, 0, dummy);
    // A again with the new set-0 weights
    la.out_base = 13'd6000;
    run_layer(la, 0, dummy);

    `CHECK(n_stall > 0,        "mechanism: stall during guard time")
    `CHECK(n_mode_cim >= 2 && n_mode_access >= 1, "mechanism: mode switches")
    `CHECK(n_lock > 0,         "mechanism: regulator lock")
    `CHECK(n_pool > 0,         "mechanism: pipelined pooling")
    `CHECK(n_shortcut > 0,     "mechanism: shortcut path")
    `CHECK(n_orig_equal > 0,   "mechanism: original flow equals pipelined flow")
    `CHECK(n_ts1 > 0 && n_ts3 > 0, "mechanism: Ts=1 and Ts=3")
    `CHECK(n_mid_reset > 0,    "mechanism: spike resets membrane inside a group")
    `CHECK(n_chain > 0 && n_wset_switch > 0, "mechanism: chained layer, weight-set switch")
    `CHECK(n_spikes_total > 0, "spikes produced")
    `CHECK(n_accum > 0,        "mechanism: final-block membrane accumulation")
    $display("mechanisms: accum=%0d stall=%0d cim=%0d access=%0d lock=%0d pool=%0d shortcut=%0d orig_eq=%0d ts1=%0d ts3=%0d mid_reset=%0d spikes=%0d",
             n_accum, n_stall, n_mode_cim, n_mode_access, n_lock, n_pool, n_shortcut, n_orig_equal, n_ts1, n_ts3,
             n_mid_reset, n_spikes_total);
    $display("cycles: pipelined conv+pool %0d (+%0d stalled), conv %0d + pool pass %0d", cyc_pipe - stall_a, stall_a, cyc_conv, cyc_pool);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
