// tb_softmax4 -- self-checking test of the hardware Softmax.
//
// Drives random score vectors (and a few hand-picked ones: all equal, one
// dominant, large negative spread) and compares each probability with the
// exact value exp(x_i)/sum exp(x_j) computed here in floating point.
// Checks: every probability within 0.03 of the exact value, the reported
// class is the arg-max (lowest index on ties), onehot matches it, and the
// result appears exactly 21 cycles after the score vector is accepted.
module tb_softmax4;
  localparam int N = 4, IW = 16, FR = 4, PW = 16;

  logic clk = 0, rst_n = 0;
  logic s_tvalid = 0, s_tready, m_valid;
  logic [N*IW-1:0] s_tdata = '0;
  logic [N*PW-1:0] prob;
  logic [1:0] cls;
  logic [N-1:0] onehot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  softmax4 #(.N_CLASS(N), .IN_W(IW), .FRAC(FR), .P_W(PW)) dut (
    .clk, .rst_n, .s_tvalid, .s_tready, .s_tdata, .m_valid, .prob, .cls, .onehot);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(logic signed [IW-1:0] v [N]);
    real ex [N];
    real s, p, maxv;
    int am, lat;
    s = 0.0;
    maxv = -1.0e30;
    am = 0;
    for (int i = 0; i < N; i++) begin
      if (real'(v[i]) > maxv) begin maxv = real'(v[i]); am = i; end
    end
    for (int i = 0; i < N; i++) begin
      ex[i] = $exp((real'(v[i]) - maxv) / 16.0);
      s += ex[i];
    end
    for (int i = 0; i < N; i++) s_tdata[i*IW +: IW] = v[i];
    s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    #1 s_tvalid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!m_valid);
    check(lat == 21, $sformatf("latency %0d", lat));
    for (int i = 0; i < N; i++) begin
      p = real'(prob[i*PW +: PW]) / 65536.0;
      check((p - ex[i] / s) < 0.03 && (ex[i] / s - p) < 0.03,
            $sformatf("p[%0d]=%f exact %f (x=%0d %0d %0d %0d)", i, p, ex[i] / s, v[0], v[1], v[2], v[3]));
    end
    check(int'(cls) == am, $sformatf("cls %0d exp %0d", cls, am));
    check(onehot == (4'b1 << am), "onehot");
    @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [IW-1:0] v [N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    v = '{16'sd0, 16'sd0, 16'sd0, 16'sd0};          run(v);
    v = '{16'sd200, -16'sd100, 16'sd5, 16'sd0};     run(v);
    v = '{-16'sd32768, 16'sd32767, 16'sd0, 16'sd1};  run(v);
    v = '{16'sd10, 16'sd26, 16'sd26, -16'sd6};      run(v);
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) v[i] = IW'($urandom_range(0, 160)) - 16'sd80;
      run(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
