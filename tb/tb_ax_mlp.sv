// tb_ax_mlp: end-to-end test of the classifier at its default size
// (16-5-10 network, default coefficients, no parameter overrides).
//
// Random feature vectors are streamed with in_valid high about 70% of the
// time. For each accepted vector the reference model computes the hidden
// activations, the output values and the class; the test checks out_class
// and out_valid exactly one cycle after capture, with a new vector accepted every cycle.
// While in_valid is low the registered class must hold. It counts ReLU
// clamps, approximated products that lost bits, back-to-back inferences and
// idle cycles, and fails if any of them never occurred.
module tb_ax_mlp;
  import ax_ref_pkg::*;
  import ax_mlp_pkg::PD_W1, ax_mlp_pkg::PD_B1, ax_mlp_pkg::PD_W2, ax_mlp_pkg::PD_B2;
  import ax_mlp_pkg::PD_E1, ax_mlp_pkg::PD_E2;

  localparam int NI = 16, NH = 5, NO = 10, NV = 3000;
  localparam int K  = 2;

  int checks = 0, failures = 0;
  int lossy = 0, clamped = 0, b2b = 0, idle = 0, class_seen = 0;

  logic       clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [3:0] x [NI];
  logic       out_valid;
  logic [3:0] out_class;

  ax_mlp dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
              .out_valid(out_valid), .out_class(out_class));

  always #5 clk = ~clk;

  // Reference: hidden values, output values and class of one input vector.
  longint hid [NH];
  longint outv [NO];
  int     hbits [NH];

  function automatic int ref_class(input logic [3:0] xv [NI]);
    int     w[], e[], ab[];
    longint a[];
    bit     ax[];
    longint o[];
    w = new[NI]; e = new[NI]; ab = new[NI]; a = new[NI];
    foreach (a[i]) begin a[i] = xv[i]; e[i] = PD_E1[i]; ab[i] = 4; end
    for (int j = 0; j < NH; j++) begin
      foreach (w[i]) w[i] = PD_W1[j][i];
      sig_flags(w, e, 1, 16, ax);
      hid[j] = neuron(w, PD_B1[j], a, ab, ax, K, 1'b1, lossy, clamped);
    end
    w = new[NH]; e = new[NH]; ab = new[NH]; a = new[NH]; o = new[NO];
    foreach (a[i]) begin a[i] = hid[i]; e[i] = PD_E2[i]; ab[i] = hbits[i]; end
    for (int j = 0; j < NO; j++) begin
      foreach (w[i]) w[i] = PD_W2[j][i];
      sig_flags(w, e, 1, 16, ax);
      outv[j] = neuron(w, PD_B2[j], a, ab, ax, K, 1'b0, lossy, clamped);
      o[j]    = outv[j];
    end
    return argmax(o);
  endfunction

  task automatic check(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (NV * 3 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  exp_cls, last_cls, sent;
    bit  prev_v, cur_v;
    int  seen [NO];
    // Size of each hidden activation: bits of its largest positive sum.
    for (int j = 0; j < NH; j++) begin
      longint sp;
      sp = (PD_B1[j] > 0) ? PD_B1[j] : 0;
      for (int i = 0; i < NI; i++) if (PD_W1[j][i] > 0) sp += 15 * PD_W1[j][i];
      hbits[j] = bits_of(sp);
    end
    foreach (seen[i]) seen[i] = 0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    check("out_valid in reset", longint'(out_valid), 0);
    rst_n = 1'b1;
    last_cls = 0;
    sent     = 0;
    prev_v   = 1'b0;
    exp_cls = 0;
    while (sent < NV) begin
      // drive a new vector (or idle) before the capturing edge
      @(negedge clk);
      cur_v    = ($urandom_range(0, 9) < 7);
      in_valid = cur_v;
      foreach (x[i]) x[i] = 4'($urandom);
      @(posedge clk);
      #1;
      // result of the vector captured one edge earlier
      check("out_valid latency", longint'(out_valid), longint'(prev_v));
      if (prev_v) begin
        check("class", longint'(out_class), exp_cls);
        last_cls = exp_cls;
        seen[exp_cls]++;
      end else begin
        check("class held", longint'(out_class), last_cls);
      end
      // vector captured at this edge: its class is due at the next edge
      if (cur_v) begin
        logic [3:0] xs [NI];
        xs      = x;
        exp_cls = ref_class(xs);
        sent++;
        if (prev_v) b2b++;
      end else begin
        idle++;
      end
      prev_v = cur_v;
    end
    // drain the last result
    @(negedge clk);
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    check("out_valid latency", longint'(out_valid), longint'(prev_v));
    if (prev_v) begin
      check("class", longint'(out_class), exp_cls);
      seen[exp_cls]++;
    end
    foreach (seen[i]) if (seen[i] > 0) class_seen++;
    $display("inferences %0d, back-to-back %0d, idle %0d, ReLU clamps %0d, lossy products %0d, classes seen %0d",
             sent, b2b, idle, clamped, lossy, class_seen);
    checks += 4;
    if (clamped == 0) failures++;
    if (lossy == 0)   failures++;
    if (b2b == 0)     failures++;
    if (idle == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
