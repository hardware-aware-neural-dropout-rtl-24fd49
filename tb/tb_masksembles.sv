// tb_masksembles: self-checking test of masksembles.
// Streams 12 forward passes of PIX pixels with random gaps and back-pressure.
// The reference recomputes the offline mask set from its formula, selects
// mask (pass mod 3) and multiplies element-wise without rescaling. Checks
// every output element, the sample index, that the three masks differ, and
// the one-beat-per-cycle throughput of an unstalled burst.
module tb_masksembles;
  import dropout_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned CH   = 8;
  localparam int unsigned PIX  = 5;
  localparam int unsigned S    = 3;
  localparam int unsigned N    = PIX * S * 4;
  localparam logic [31:0] MSEED = 32'h0bad_cafe;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  fix_t [CH-1:0] in_data, out_data;
  logic [CH-1:0] out_keep;
  logic [1:0]    out_sample;

  masksembles #(.CH(CH), .PIX(PIX), .NUM_MASKS(S), .MASK_SEED(MSEED)) dut (.*);

  int checks = 0, failures = 0;
  logic [CH-1:0] masks [S];
  fix_t [CH-1:0] exp_d [$];
  logic [CH-1:0] exp_k [$];
  int            exp_s [$];
  int sent = 0, recv = 0, in_beat = 0, in_pass = 0;
  bit stall_mode = 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    fix_t [CH-1:0] d;
    int s;
    s = in_pass % S;
    for (int c = 0; c < CH; c++) d[c] = masks[s][c] ? in_data[c] : 0;
    exp_d.push_back(d); exp_k.push_back(masks[s]); exp_s.push_back(s);
    if (in_beat == PIX - 1) begin in_beat = 0; in_pass++; end else in_beat++;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_d.size() == 0) chk(0, "unexpected output");
    else begin
      chk(out_data == exp_d[0], "data");
      chk(out_keep == exp_k[0], "keep");
      chk(int'(out_sample) == exp_s[0], "sample index");
      void'(exp_d.pop_front()); void'(exp_k.pop_front()); void'(exp_s.pop_front());
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
          for (int c = 0; c < CH; c++) in_data[c] <= fix_t'($urandom);
          sent++;
        end else in_valid <= 0;
      end
    end
  end

  initial begin
    for (int s = 0; s < S; s++)
      for (int c = 0; c < CH; c++) masks[s][c] = ref_mask_bit(MSEED, s * CH + c, 16384);
    chk(masks[0] != masks[1] || masks[1] != masks[2], "masks differ");
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (recv == N);
    chk(exp_d.size() == 0, "all outputs drained");
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
