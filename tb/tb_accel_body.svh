// tb_accel_body.svh: end-to-end test body for bayes_dropout_accel, shared by
// the testbenches of the different network configurations. The including
// module defines NL, MAXCH, the per-slot TYPES_TB/LH_TB/LW_TB/LCH_TB arrays,
// SEED_TB and N_INF, declares the signals below and instantiates the DUT.
//
// The testbench stands in for the rest of the network: a feeder accepts pass
// requests, slot 0 receives one pass of random activations per request, and
// slot i+1 starts a pass once slot i has delivered that pass (the layer in
// between is modelled as a delay). When the last slot delivers a pass the
// network "returns" a result. Inputs have random gaps and outputs random
// back-pressure. Every output element is compared with a reference model of
// the slot's dropout kind written independently of the RTL; mechanisms
// (drops of each kind, patches, mask redraws, mask switching, stalls,
// overlapping passes, completed inferences) are counted and each must occur.

  import dropout_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned S = 3;
  localparam int unsigned PT = 16384, SC = 341, GM = 4096, BK = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit test_over = 0;   // the including module ends the simulation on this

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0t", what, $time); end
  endtask

  class ref_layer;
    drop_type_e  typ;
    int          h, w, ch, beat, pass;
    int unsigned seed;
    int unsigned st [MAXCH];
    bit          mask [MAXCH];
    bit          seeds [];

    function new(drop_type_e t, int hh, int ww, int cc, int unsigned sd);
      typ = t; h = hh; w = ww; ch = cc; seed = sd; beat = 0; pass = 0;
      for (int l = 0; l < MAXCH; l++) begin st[l] = ref_seed(sd, l); mask[l] = 0; end
      seeds = new[hh * ww];
    endfunction

    function void step(input fix_t [MAXCH-1:0] x, output fix_t [MAXCH-1:0] y,
                       output logic [MAXCH-1:0] k);
      int r, c;
      bit drop;
      y = '0; k = '0;
      r = beat / w; c = beat % w;
      case (typ)
        DROP_RANDOM:
          for (int l = 0; l < ch; l++) begin
            k[l] = (st[l] >> 16) >= PT;
            st[l] = ref_xs(st[l]);
          end
        DROP_BERNOULLI: begin
          if (beat == 0)
            for (int l = 0; l < ch; l++) begin
              mask[l] = (st[l] >> 16) >= PT;
              st[l] = ref_xs(st[l]);
            end
          for (int l = 0; l < ch; l++) k[l] = mask[l];
        end
        DROP_BLOCK: begin
          seeds[beat] = ((st[0] >> 16) < GM) && (r + BK <= h) && (c + BK <= w);
          st[0] = ref_xs(st[0]);
          drop = 0;
          for (int i = 0; i < BK; i++)
            for (int j = 0; j < BK; j++)
              if (r - i >= 0 && c - j >= 0 && seeds[(r - i) * w + (c - j)]) drop = 1;
          for (int l = 0; l < ch; l++) k[l] = !drop;
        end
        default:
          for (int l = 0; l < ch; l++) k[l] = ref_mask_bit(seed, (pass % S) * ch + l, PT);
      endcase
      for (int l = 0; l < ch; l++)
        if (k[l]) y[l] = (typ == DROP_MASKSEMBLES) ? x[l] : ref_scale(x[l], SC);
      if (beat == h * w - 1) begin beat = 0; pass++; end else beat++;
    endfunction
  endclass

  ref_layer refs [NL];
  fix_t [MAXCH-1:0] exp_d [NL][$];
  logic [MAXCH-1:0] exp_k [NL][$];

  // pass bookkeeping
  int credit   [NL];   // passes slot i may still receive
  int in_beat  [NL];
  int out_beat [NL];
  int out_pass [NL];
  int stalls   [NL];
  int drops    [NL];
  int changes  [NL];   // slot's mask differs from the previous pass's mask
  logic [MAXCH-1:0] pass_mask [NL];
  int passes_fed = 0, results = 0, dones = 0, overlaps = 0;
  int in_pass0 = 0, in_beat0_q = 0;   // passes slot 0 has fully taken in

  always @(posedge clk) if (rst_n) begin
    feed_ready   <= ($urandom_range(0, 1) == 0);
    result_valid <= 0;
    if (feed_valid && feed_ready) begin
      chk(int'(feed_sample) == passes_fed % S, "feed sample index");
      passes_fed++;
      credit[0]++;
    end
    if (done) begin
      dones++;
      chk(results == S * dones, "done after three results");
      chk(cycles > 0, "latency reported");
    end
    if (d_in_valid[0] && d_in_ready[0] && in_pass0 >= out_pass[NL-1] + 1) overlaps++;
    if (d_in_valid[0] && d_in_ready[0] && in_beat0_q == LH_TB[0] * LW_TB[0] - 1) in_pass0++;
    if (d_in_valid[0] && d_in_ready[0])
      in_beat0_q = (in_beat0_q == LH_TB[0] * LW_TB[0] - 1) ? 0 : in_beat0_q + 1;
  end

  for (genvar i = 0; i < NL; i++) begin : g_env
    always @(posedge clk) if (rst_n) begin
      fix_t [MAXCH-1:0] y;
      logic [MAXCH-1:0] k;
      // input side
      if (d_in_valid[i] && d_in_ready[i]) begin
        refs[i].step(d_in_data[i], y, k);
        exp_d[i].push_back(y); exp_k[i].push_back(k);
      end
      if (!d_in_valid[i] || d_in_ready[i]) begin
        if (credit[i] > 0 && $urandom_range(0, 3) != 0) begin
          d_in_valid[i] <= 1;
          for (int l = 0; l < MAXCH; l++) d_in_data[i][l] <= (l < LCH_TB[i]) ? fix_t'($urandom) : '0;
          if (in_beat[i] == LH_TB[i] * LW_TB[i] - 1) begin in_beat[i] = 0; credit[i]--; end
          else in_beat[i]++;
        end else d_in_valid[i] <= 0;
      end
      // output side
      if (d_out_valid[i] && !d_out_ready[i]) stalls[i]++;
      if (d_out_valid[i] && d_out_ready[i]) begin
        if (exp_d[i].size() == 0) chk(0, "unexpected output");
        else begin
          chk(d_out_data[i] == exp_d[i][0], $sformatf("slot %0d data", i));
          chk(d_out_keep[i] == exp_k[i][0], $sformatf("slot %0d keep", i));
          void'(exp_d[i].pop_front()); void'(exp_k[i].pop_front());
        end
        for (int l = 0; l < LCH_TB[i]; l++) if (!d_out_keep[i][l]) drops[i]++;
        if (out_beat[i] == 0) begin
          if (out_pass[i] > 0 && d_out_keep[i] != pass_mask[i]) changes[i]++;
          pass_mask[i] = d_out_keep[i];
        end
        if (out_beat[i] == LH_TB[i] * LW_TB[i] - 1) begin
          out_beat[i] = 0; out_pass[i]++;
          if (i + 1 < NL) credit[i + 1]++;
          else begin result_valid <= 1; results++; end
        end else out_beat[i]++;
      end
      d_out_ready[i] <= ($urandom_range(0, 4) != 0);
    end
  end

  initial begin
    start = 0; feed_ready = 0; result_valid = 0;
    d_in_valid = '0; d_in_data = '0; d_out_ready = '0;
    for (int i = 0; i < NL; i++) begin
      refs[i] = new(TYPES_TB[i], LH_TB[i], LW_TB[i], LCH_TB[i], SEED_TB ^ (32'h0101_0101 * (i + 1)));
      credit[i] = 0; in_beat[i] = 0; out_beat[i] = 0; out_pass[i] = 0;
      stalls[i] = 0; drops[i] = 0; changes[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N_INF; n++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      wait (dones == n + 1);
    end
    repeat (5) @(posedge clk);
    chk(passes_fed == S * N_INF, $sformatf("%0d passes fed", passes_fed));
    chk(results == S * N_INF, $sformatf("%0d passes completed", results));
    chk(dones == N_INF, $sformatf("%0d inferences done", dones));
    for (int i = 0; i < NL; i++) begin
      chk(exp_d[i].size() == 0, "slot drained");
      chk(out_pass[i] == S * N_INF, $sformatf("slot %0d passed %0d passes", i, out_pass[i]));
      chk(stalls[i] > 0, $sformatf("slot %0d back-pressure stalls: %0d", i, stalls[i]));
      chk(drops[i] > 0, $sformatf("slot %0d (%s) drops: %0d", i, TYPES_TB[i].name(), drops[i]));
      if (TYPES_TB[i] == DROP_BERNOULLI || TYPES_TB[i] == DROP_MASKSEMBLES)
        chk(changes[i] > 0, $sformatf("slot %0d mask changes between passes: %0d", i, changes[i]));
      $display("slot %0d %s: passes=%0d drops=%0d stalls=%0d mask_changes=%0d",
               i, TYPES_TB[i].name(), out_pass[i], drops[i], stalls[i], changes[i]);
    end
    chk(overlaps > 0, $sformatf("passes overlapped in the pipeline (%0d cycles)", overlaps));
    $display("inferences=%0d passes=%0d overlap_cycles=%0d last_latency=%0d cycles",
             dones, results, overlaps, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    test_over = 1;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    test_over = 1;
  end
