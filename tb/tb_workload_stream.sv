// tb_workload_stream: the continuous trigger-trial workload. Samples arrive
// at 250 MS/s into the 200 MHz core, i.e. two samples on 5 of every 8 clocks,
// for 60 windows of 128 samples, with random parameters loaded first. Every
// result is checked against an integer model of the network (logit, trigger,
// 666-clock latency). At the end it checks the window accounting (each window
// classified or dropped), that the engine waits no longer than one start
// cycle while a trace is ready (so it classifies one trace per 667 clocks),
// and that about one window in 6.5 is classified. It prints the trigger-trial
// rate this gives at 200 MHz.
module tb_workload_stream;
  import aitrig_pkg::*;
  localparam int IN_CH  [7] = '{1, 16, 32, 16, 32, 32, 32};
  localparam int OUT_CH [7] = '{16, 32, 16, 32, 32, 32, 64};
  localparam int KS     [7] = '{3, 3, 3, 3, 1, 3, 1};
  localparam int EXP_LAT = 666;
  localparam int N_WIN = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  logic sample_valid = 1'b0, prbs_mode = 1'b0;
  fx_t  sample [SAMPLES_PER_CLK];
  logic ld_valid = 1'b0;
  ld_sel_t ld_sel = LD_CONV_W;
  logic [2:0] ld_layer = '0;
  logic [6:0] ld_oc = '0;
  logic [5:0] ld_ic = '0;
  logic [1:0] ld_k = '0;
  fx_t ld_data = '0, threshold = '0, logit;
  logic result_valid, trigger, busy;
  logic [31:0] result_trace_id, traces_dropped;
  logic [15:0] last_latency;

  aitrig_top dut (
    .clk, .rst_n, .sample_valid, .sample, .prbs_mode,
    .ld_valid, .ld_sel, .ld_layer, .ld_oc, .ld_ic, .ld_k, .ld_data,
    .threshold, .result_valid, .trigger, .logit, .result_trace_id, .busy,
    .traces_dropped, .last_latency);

  always #5 clk = ~clk;

  int W [7][64][32][3];
  int B [7][64];
  int FCW [64];
  int FCB;
  int stream [$];
  int checks = 0, failures = 0;
  int n_results = 0, n_fired = 0, n_wrap = 0, n_relu = 0;
  longint idle_waiting = 0, cyc = 0, first_start = -1;

  // ---------------- reference model ----------------
  function automatic int wrap13(input longint v);
    longint m = v & 64'h1FFF;
    int r = int'(m >= 4096 ? m - 8192 : m);
    if (longint'(r) != v) n_wrap++;
    return r;
  endfunction
  function automatic longint sx(input fx_t v);
    int t;
    t = v;
    return longint'(t);
  endfunction
  function automatic longint fdiv(input longint v, input longint d);
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  int fa [128][64];
  int fb [128][64];
  int fz [128][64];

  // out = layer l applied to in (len positions), before pooling
  function automatic void conv(input int l, input int len, ref int in_m [128][64], ref int out_m [128][64]);
    for (int p = 0; p < len; p++)
      for (int o = 0; o < OUT_CH[l]; o++) begin
        longint s = longint'(B[l][o]) * 256;
        for (int i = 0; i < IN_CH[l]; i++)
          for (int k = 0; k < KS[l]; k++) begin
            int tp = (KS[l] == 3) ? p + k - 1 : p;
            if (tp >= 0 && tp < len) s += longint'(in_m[tp][i]) * longint'(W[l][o][i][k]);
          end
        out_m[p][o] = wrap13(fdiv(s, 256));
        if (l != 6 && out_m[p][o] < 0) begin out_m[p][o] = 0; n_relu++; end
      end
  endfunction

  function automatic void pool(input int len, input int ch, ref int m [128][64]);
    for (int p = 0; p < len / 2; p++)
      for (int c = 0; c < ch; c++)
        m[p][c] = (m[2*p][c] > m[2*p+1][c]) ? m[2*p][c] : m[2*p+1][c];
  endfunction

  function automatic int model_logit(input int id);
    longint dot;
    for (int p = 0; p < 128; p++) fa[p][0] = stream[id * 128 + p];
    conv(0, 128, fa, fb); pool(128, 16, fb);          // block 1
    conv(1, 64, fb, fz);                               // z
    conv(2, 64, fz, fa);                               // F(z), first conv
    conv(3, 64, fa, fb);                               // F(z), second conv
    for (int p = 0; p < 64; p++) for (int c = 0; c < 32; c++) fb[p][c] = wrap13(fb[p][c] + fz[p][c]);
    pool(64, 32, fb);
    conv(4, 32, fb, fa);                               // bottleneck
    conv(5, 32, fa, fz);
    conv(6, 32, fz, fb);
    pool(32, 64, fb);
    dot = longint'(FCB) * 256;
    for (int c = 0; c < 64; c++) begin
      longint s = 0;
      for (int p = 0; p < 16; p++) s += fb[p][c];
      dot += longint'(wrap13(fdiv(s, 16))) * longint'(FCW[c]);
    end
    return wrap13(fdiv(dot, 256));
  endfunction

  task automatic load(input ld_sel_t s, input int l, input int oc, input int ic, input int k, input int v);
    @(negedge clk);
    ld_valid = 1'b1; ld_sel = s; ld_layer = 3'(l); ld_oc = 7'(oc); ld_ic = 6'(ic); ld_k = 2'(k);
    ld_data = fx_t'(v);
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && sample_valid)
      for (int j = 0; j < SAMPLES_PER_CLK; j++) stream.push_back(int'(sx(sample[j])));
    if (rst_n) cyc++;
    if (rst_n && dut.trace_valid && !busy) idle_waiting++;
  end

  always @(posedge clk) begin
    if (rst_n && result_valid) begin
      int e;
      e = model_logit(int'(result_trace_id));
      n_results++;
      chk(int'(sx(logit)) == e, $sformatf("logit of window %0d: %0d vs %0d", result_trace_id, logit, e));
      chk(trigger == (e > int'(sx(threshold))), "trigger decision");
      chk(int'(last_latency) == EXP_LAT, $sformatf("latency %0d", last_latency));
      if (trigger) n_fired++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_end;
    int windows;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int l = 0; l < 7; l++)
      for (int o = 0; o < OUT_CH[l]; o++) begin
        for (int i = 0; i < IN_CH[l]; i++)
          for (int k = 0; k < KS[l]; k++) begin
            W[l][o][i][k] = $urandom_range(0, 96) - 48;
            load(LD_CONV_W, l, o, i, k, W[l][o][i][k]);
          end
        B[l][o] = $urandom_range(0, 128) - 64;
        load(LD_CONV_B, l, o, 0, 0, B[l][o]);
      end
    for (int c = 0; c < 64; c++) begin
      FCW[c] = $urandom_range(0, 512) - 256;
      load(LD_FC_W, 0, c, 0, 0, FCW[c]);
    end
    FCB = 0;
    load(LD_FC_B, 0, 0, 0, 0, FCB);
    threshold = fx_t'(140);

    first_start = cyc;
    // 250 MS/s at 200 MHz: 2 samples on 5 of 8 clocks
    for (int n = 0; stream.size() < N_WIN * 128; n++) begin
      @(negedge clk);
      sample_valid = (n % 8) < 5;
      for (int j = 0; j < SAMPLES_PER_CLK; j++) sample[j] = fx_t'($urandom_range(0, 2047) - 1024);
    end
    @(negedge clk);
    sample_valid = 1'b0;
    t_end = cyc;
    wait (!busy);
    repeat (3) @(negedge clk);
    windows = stream.size() / 128;
    chk(windows == N_WIN, "60 windows streamed");
    chk(windows == n_results + int'(traces_dropped),
        $sformatf("accounting: %0d windows, %0d results, %0d dropped", windows, n_results, traces_dropped));
    chk(idle_waiting <= n_results, "engine waits at most the one start cycle per trace");
    chk(n_results * 65 >= windows * 10 - 65 && n_results * 6 <= windows + 6,
        "about one window in 6.5 classified");
    chk(longint'(n_results) >= (t_end - first_start) / 667, "one trace classified per 667 clocks");
    chk(n_fired > 0 && n_fired < n_results, "trigger both fired and stayed quiet");
    $display("windows %0d results %0d dropped %0d fired %0d; %0d clocks of streaming",
             windows, n_results, traces_dropped, n_fired, t_end - first_start);
    $display("trigger trials per second at 200 MHz: %0d (one per 667 clocks)", 200000000 / 667);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
