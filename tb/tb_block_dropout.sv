// tb_block_dropout: self-checking test of block_dropout.
// Streams 30 passes over an H x W map with random gaps and back-pressure.
// The reference keeps a 2-D seed map per pass (a seed wherever the random
// number of that pixel is below GAMMA and a BLOCK x BLOCK patch fits) and
// drops pixel (r, c) when any seed lies in (r-BLOCK+1..r, c-BLOCK+1..c), a
// direct formulation independent of the RTL's streaming counters. Checks
// every output element, that full patches occur, and the throughput of an
// unstalled burst.
module tb_block_dropout;
  import dropout_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned H = 7, W = 9, CH = 3, B = 3;
  localparam int unsigned GAMMA = 6000;
  localparam int unsigned N = H * W * 30;
  localparam logic [31:0] SEED = 32'h5a5a_1234;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_drop;
  fix_t [CH-1:0] in_data, out_data;

  block_dropout #(.H(H), .W(W), .CH(CH), .BLOCK(B), .GAMMA(16'(GAMMA)), .SEED(SEED)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned st;
  bit seeds [H][W];
  fix_t [CH-1:0] exp_d [$];
  bit            exp_p [$];
  int sent = 0, recv = 0, r = 0, c = 0, nseeds = 0, ndrop = 0;
  bit stall_mode = 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    fix_t [CH-1:0] d;
    bit drop;
    seeds[r][c] = ((st >> 16) < GAMMA) && (r + B <= H) && (c + B <= W);
    if (seeds[r][c]) nseeds++;
    st = ref_xs(st);
    drop = 0;
    for (int i = 0; i < B; i++)
      for (int j = 0; j < B; j++)
        if (r - i >= 0 && c - j >= 0 && seeds[r - i][c - j]) drop = 1;
    for (int k = 0; k < CH; k++) d[k] = drop ? 0 : ref_scale(in_data[k], 341);
    exp_d.push_back(d); exp_p.push_back(drop);
    if (c == W - 1) begin c = 0; r = (r == H - 1) ? 0 : r + 1; end else c++;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_d.size() == 0) chk(0, "unexpected output");
    else begin
      chk(out_data == exp_d[0], "data");
      chk(out_drop == exp_p[0], "drop");
      if (out_drop) ndrop++;
      void'(exp_d.pop_front()); void'(exp_p.pop_front());
    end
    recv++;
  end

  always @(posedge clk) begin
    if (!rst_n) begin in_valid <= 0; out_ready <= 0; end
    else begin
      out_ready <= stall_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (!in_valid || in_ready) begin
        if (sent < N && (!stall_mode || $urandom_range(0, 4) != 0)) begin
          in_valid <= 1;
          for (int k = 0; k < CH; k++) in_data[k] <= fix_t'($urandom);
          sent++;
        end else in_valid <= 0;
      end
    end
  end

  initial begin
    st = ref_seed(SEED, 0);
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (recv == N);
    chk(exp_d.size() == 0, "all outputs drained");
    chk(nseeds > 10, $sformatf("patch seeds occurred (%0d)", nseeds));
    chk(ndrop > nseeds * 4, $sformatf("patches cover several pixels (%0d dropped)", ndrop));
    sent = N; stall_mode = 0;
    begin
      longint t0, t1;
      repeat (3) @(negedge clk);
      sent = 0; recv = 0;
      @(posedge clk iff (in_valid && in_ready));
      t0 = $time;
      @(posedge clk iff (out_valid && out_ready && recv == N - 1));
      t1 = $time;
      chk((t1 - t0) / 10 == N, $sformatf("burst of %0d beats took %0d cycles", N, (t1 - t0) / 10));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
