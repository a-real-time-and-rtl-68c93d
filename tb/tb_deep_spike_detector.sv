// tb_deep_spike_detector: end-to-end test of the two-CNN detector at its
// default parameters (signal memories of 524 batches, down-sampling by 10).
//
// Both CNNs get the hand-built polarity-detector parameters of tb_ref_pkg
// (polarity_params): windows with large positive spikes come out as class 0
// ("neural" / "spike"), quiet windows as class 1 and large negative
// transients as class 2 ("artefact"). The expected classes and scores are still computed
// with the whole-network integer reference, on exactly the samples each CNN
// should see (every tenth raw sample for CNN1).
//
// Sequence: a neural channel segment (ch_active goes high), a burst of event
// windows stored with run low and then released (the CNN2 pipeline runs
// full and stalls), a quiet segment (ch_active falls, events are dropped
// whatever their class), and a neural segment again. Counted mechanisms,
// each of which must occur: decimated samples, back-pressure stalls, channel
// selected, channel rejected, event kept, event dropped as artefact, event
// dropped because the channel is inactive.
module tb_deep_spike_detector;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic p_we = 0, p_cnn = 0, run = 1;
  logic [8:0] p_addr = '0;
  logic signed [3:0] p_data = '0;
  logic raw_valid = 0, raw_ready, ev_valid = 0, ev_ready;
  logic signed [9:0] raw_data = '0, ev_data = '0;
  logic ch_valid, ch_active, ev_out_valid, ev_keep;
  logic [1:0] ch_cls, ev_cls;
  logic signed [2:0][9:0] ch_score, ev_score;

  deep_spike_detector dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int prm [419];
  int ch_exp_q [$], ch_sc_q [$], ev_exp_q [$], ev_sc_q [$];
  int n_ch = 0, n_ev = 0;
  bit model_active = 0;
  int c_decim = 0, c_stall = 0, c_sel = 0, c_rej = 0, c_keep = 0, c_art = 0, c_inact = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ds.out_valid) c_decim++;
    if ((dut.u_cnn2.r0 && !dut.u_cnn2.f0) || (dut.u_cnn2.r1 && !dut.u_cnn2.f1) ||
        (dut.u_cnn2.r2 && !dut.u_cnn2.f2) || (dut.u_cnn2.r3 && !dut.u_cnn2.f3)) c_stall++;
  end

  task automatic load_all();
    for (int c = 0; c < 2; c++)
      for (int a = 0; a < 419; a++) begin
        @(negedge clk); p_we = 1; p_cnn = c[0]; p_addr = 9'(a); p_data = 4'(prm[a]);
      end
    @(negedge clk); p_we = 0;
  endtask

  task automatic send_channel(input int kind);
    int x [66], sc [3], c;
    make_window(kind, 8, x);
    cnn_ref(prm, x, sc, c);
    ch_exp_q.push_back(c);
    for (int k = 0; k < 3; k++) ch_sc_q.push_back(sc[k]);
    for (int t = 0; t < 660; t++) begin
      @(negedge clk);
      raw_valid = 1;
      // kept samples carry the window, the nine dropped ones carry junk
      raw_data = 10'((t % 10 == 0) ? x[t/10] : rnd_act(500));
    end
    @(negedge clk); raw_valid = 0;
  endtask

  task automatic send_event(input int kind);
    int x [66], sc [3], c;
    make_window(kind, 8, x);
    cnn_ref(prm, x, sc, c);
    ev_exp_q.push_back(c);
    for (int k = 0; k < 3; k++) ev_sc_q.push_back(sc[k]);
    for (int t = 0; t < 66; t++) begin
      @(negedge clk); ev_valid = 1; ev_data = 10'(x[t]);
    end
    @(negedge clk); ev_valid = 0;
  endtask

  task automatic wait_results(input int nch, input int nev);
    while (n_ch < nch || n_ev < nev) @(negedge clk);
  endtask

  // result checkers
  always @(negedge clk) if (rst_n && ch_valid) begin
    int c;
    c = ch_exp_q.pop_front();
    checks++;
    if (int'(ch_cls) != c) begin failures++; $display("FAIL channel result %0d: class %0d expected %0d", n_ch, ch_cls, c); end
    for (int k = 0; k < 3; k++) begin
      int e;
      e = ch_sc_q.pop_front();
      checks++;
      if (int'($signed(ch_score[k])) != e) begin failures++; $display("FAIL channel score %0d: %0d expected %0d", k, int'($signed(ch_score[k])), e); end
    end
    model_active = (c == 0);
    if (c == 0) c_sel++; else c_rej++;
    n_ch++;
  end

  always @(negedge clk) if (rst_n && ev_out_valid) begin
    int c;
    bit keep;
    c = ev_exp_q.pop_front();
    checks++;
    if (int'(ev_cls) != c) begin failures++; $display("FAIL event result %0d: class %0d expected %0d", n_ev, ev_cls, c); end
    for (int k = 0; k < 3; k++) begin
      int e;
      e = ev_sc_q.pop_front();
      checks++;
      if (int'($signed(ev_score[k])) != e) begin failures++; $display("FAIL event score %0d: %0d expected %0d", k, int'($signed(ev_score[k])), e); end
    end
    keep = model_active && (c != 2);
    checks++;
    if (ev_keep != keep) begin failures++; $display("FAIL event %0d: keep %0d expected %0d", n_ev, ev_keep, keep); end
    checks++;
    if (ch_active != model_active) begin failures++; $display("FAIL: ch_active %0d expected %0d", ch_active, model_active); end
    if (keep) c_keep++;
    else if (!model_active) c_inact++;
    else c_art++;
    n_ev++;
  end

  initial begin
    polarity_params(prm, 1'b0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    // 1: neural channel
    send_channel(0);
    wait_results(1, 0);
    // 2: burst of events held, then released
    run = 0;
    send_event(0); send_event(2); send_event(0); send_event(1); send_event(2); send_event(0);
    @(negedge clk); run = 1;
    wait_results(1, 6);
    // 3: quiet channel, events dropped
    send_channel(1);
    wait_results(2, 6);
    send_event(0); send_event(0); send_event(2);
    wait_results(2, 9);
    // 4: neural again
    send_channel(0);
    wait_results(3, 9);
    send_event(0); send_event(2);
    wait_results(3, 11);
    repeat (10) @(negedge clk);
    checks++; if (c_decim != 3*66) begin failures++; $display("FAIL: %0d decimated samples, expected %0d", c_decim, 3*66); end
    checks++; if (c_stall == 0) begin failures++; $display("FAIL: no back-pressure stall"); end
    checks++; if (c_sel == 0)   begin failures++; $display("FAIL: channel never selected"); end
    checks++; if (c_rej == 0)   begin failures++; $display("FAIL: channel never rejected"); end
    checks++; if (c_keep == 0)  begin failures++; $display("FAIL: no event kept"); end
    checks++; if (c_art == 0)   begin failures++; $display("FAIL: no event dropped as artefact"); end
    checks++; if (c_inact == 0) begin failures++; $display("FAIL: no event dropped for an inactive channel"); end
    $display("deep_spike_detector: decimated %0d, stall cycles %0d, channel selected %0d / rejected %0d, events kept %0d / artefact %0d / inactive channel %0d",
             c_decim, c_stall, c_sel, c_rej, c_keep, c_art, c_inact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (%0d channel, %0d event results)", n_ch, n_ev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
