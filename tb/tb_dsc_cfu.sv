// tb_dsc_cfu: end-to-end test of the accelerator through its CFU bus, with
// the design at its default sizes.
//
// The testbench plays the CPU: it writes the layer configuration, the input
// feature map, the expansion, depthwise and projection weights and the
// per-channel bias/requantization parameters with CFU instructions, starts the
// layer and reads every output pixel back. A behavioural model in this file
// computes the inverted residual block layer by layer (expansion with ReLU,
// zero-padded 3x3 depthwise with ReLU, linear projection) and every output byte
// is compared.
//
// Runs: two small layers (one read slowly, so the result stage fills and the
// pipeline stalls; one with a ReLU6-style clamp), then the four MobileNetV2
// (width 0.35, 160x160 input) blocks the accelerator is benchmarked on, read at
// full speed. For these the cycle count from START to the last output word is
// checked against the design's rate of M*N/8 cycles per output pixel.
// Mechanisms counted (each must occur): stalls, padded window positions,
// multi-chunk accumulation, pixels overlapping in the pipeline, reads that wait
// for data, ReLU clamping at the zero point.
`timescale 1ns/1ps
module tb_dsc_cfu;
  import tb_dsc_ref_pkg::*;

  logic        clk = 1'b0;
  logic        reset = 1'b1;
  logic        cmd_valid = 1'b0;
  logic        cmd_ready;
  logic [9:0]  fid = '0;
  logic [31:0] in0 = '0, in1 = '0;
  logic        rsp_valid;
  logic        rsp_ready = 1'b1;
  logic [31:0] rsp;

  int checks = 0, failures = 0;
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  dsc_cfu dut (
    .clk, .reset, .cmd_valid, .cmd_ready, .cmd_payload_function_id(fid),
    .cmd_payload_inputs_0(in0), .cmd_payload_inputs_1(in1),
    .rsp_valid, .rsp_ready, .rsp_payload_outputs_0(rsp)
  );

  // ---- mechanism counters ---------------------------------------------------
  int n_stall = 0, n_pad = 0, n_chunk = 0, n_overlap = 0, n_rdwait = 0, n_relu = 0;
  always @(posedge clk) if (!reset) begin
    if (dut.stall) n_stall++;
    if (dut.iss_valid && !dut.stall && !(&dut.pos_valid)) n_pad++;
    if (dut.s1.v && !dut.s1.kfirst && !dut.stall) n_chunk++;
    if (dut.s1.v && dut.s1.m == 0 && dut.f2_v && dut.s5.m != 0) n_overlap++;
    if (dut.u_ic.read_wait && !dut.rd_valid) n_rdwait++;
  end

  // ---- CPU side ------------------------------------------------------------
  task automatic cfu(input logic [2:0] f3, input logic [6:0] f7,
                     input logic [31:0] a, input logic [31:0] b, output logic [31:0] r);
    @(negedge clk);
    cmd_valid = 1'b1; fid = {f7, f3}; in0 = a; in1 = b;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    r = rsp;
  endtask

  task automatic wr(input logic [2:0] f3, input logic [6:0] f7,
                    input logic [31:0] a, input logic [31:0] b);
    logic [31:0] r;
    cfu(f3, f7, a, b, r);
  endtask

  // ---- one layer -----------------------------------------------------------
  typedef struct {
    int h, w, n, m, cout;
    int ex_max, dw_max;
    int slow;          // read with random pauses
    int check_rate;    // check the cycle count
    string name;
  } layer_t;

  task automatic run_layer(layer_t L);
    int nc = L.n / 8;
    byte ifm[], exw[], dww[], prw[], f1[], f2[], outp[];
    int  exb[], exm[], exs[], dwb[], dwm[], dws[], prb[], prm[], prs[];
    int  in_zp, ex_zp, dw_zp, pr_zp, exsh, prsh;
    longint t0, t1, expect_cyc;
    int errs = 0;
    logic [31:0] r;

    ifm = new[L.h*L.w*L.n]; exw = new[L.m*L.n]; dww = new[L.m*9];
    prw = new[L.cout*L.m]; f1 = new[L.h*L.w*L.m]; f2 = new[L.h*L.w*L.m];
    outp = new[L.h*L.w*L.cout];
    exb = new[L.m]; exm = new[L.m]; exs = new[L.m];
    dwb = new[L.m]; dwm = new[L.m]; dws = new[L.m];
    prb = new[L.cout]; prm = new[L.cout]; prs = new[L.cout];

    in_zp = int'($urandom_range(40)) - 20;
    ex_zp = -100 + int'($urandom_range(20));
    dw_zp = -110 + int'($urandom_range(20));
    pr_zp = int'($urandom_range(20)) - 10;
    exsh  = -8 - $clog2(L.n) / 2;
    prsh  = -6 - $clog2(L.m) / 2;
    foreach (ifm[i]) ifm[i] = byte'($urandom);
    foreach (exw[i]) exw[i] = byte'($urandom);
    foreach (dww[i]) dww[i] = byte'($urandom);
    foreach (prw[i]) prw[i] = byte'($urandom);
    for (int i = 0; i < L.m; i++) begin
      exb[i] = int'($urandom_range(4000)) - 2000;
      exm[i] = int'(32'h4000_0000 + $urandom_range(32'h3fff_ffff));
      exs[i] = exsh;
      dwb[i] = int'($urandom_range(4000)) - 2000;
      dwm[i] = int'(32'h4000_0000 + $urandom_range(32'h3fff_ffff));
      dws[i] = -7;
    end
    for (int j = 0; j < L.cout; j++) begin
      prb[j] = int'($urandom_range(4000)) - 2000;
      prm[j] = int'(32'h4000_0000 + $urandom_range(32'h3fff_ffff));
      prs[j] = prsh;
    end

    // reference: expansion, depthwise, projection
    for (int y = 0; y < L.h; y++)
      for (int x = 0; x < L.w; x++)
        for (int m = 0; m < L.m; m++) begin
          longint a = 0;
          for (int c = 0; c < L.n; c++)
            a += (longint'(ifm[(y*L.w+x)*L.n+c]) - in_zp) * exw[m*L.n+c];
          f1[(y*L.w+x)*L.m+m] = byte'(ref_requant(a, exb[m], exm[m], exs[m], ex_zp, ex_zp, L.ex_max));
          if (f1[(y*L.w+x)*L.m+m] == byte'(ex_zp)) n_relu++;
        end
    for (int y = 0; y < L.h; y++)
      for (int x = 0; x < L.w; x++)
        for (int m = 0; m < L.m; m++) begin
          longint a = 0;
          for (int t = 0; t < 9; t++) begin
            int yy = y + t/3 - 1, xx = x + t%3 - 1;
            if (yy >= 0 && yy < L.h && xx >= 0 && xx < L.w)
              a += (longint'(f1[(yy*L.w+xx)*L.m+m]) - ex_zp) * dww[m*9+t];
          end
          f2[(y*L.w+x)*L.m+m] = byte'(ref_requant(a, dwb[m], dwm[m], dws[m], dw_zp, dw_zp, L.dw_max));
        end
    for (int p = 0; p < L.h*L.w; p++)
      for (int j = 0; j < L.cout; j++) begin
        longint a = 0;
        for (int m = 0; m < L.m; m++)
          a += (longint'(f2[p*L.m+m]) - dw_zp) * prw[j*L.m+m];
        outp[p*L.cout+j] = byte'(ref_requant(a, prb[j], prm[j], prs[j], pr_zp, -128, 127));
      end

    // configuration
    wr(0, 0, L.h, 0);  wr(0, 1, L.w, 0);  wr(0, 2, nc, 0);
    wr(0, 3, L.m, 0);  wr(0, 4, L.cout, 0);
    wr(0, 5, -in_zp, 0); wr(0, 6, -ex_zp, 0); wr(0, 7, -dw_zp, 0);
    wr(0, 8, ex_zp, 0);  wr(0, 9, dw_zp, 0);  wr(0, 10, pr_zp, 0);
    wr(0, 11, ex_zp, 0); wr(0, 12, L.ex_max, 0);
    wr(0, 13, dw_zp, 0); wr(0, 14, L.dw_max, 0);
    wr(0, 15, -128, 0);  wr(0, 16, 127, 0);
    // input feature map, 8 channels per word, two halves
    for (int y = 0; y < L.h; y++)
      for (int x = 0; x < L.w; x++)
        for (int k = 0; k < nc; k++)
          for (int hh = 0; hh < 2; hh++) begin
            logic [31:0] d;
            for (int i = 0; i < 4; i++) d[8*i +: 8] = ifm[(y*L.w+x)*L.n + 8*k + 4*hh + i];
            wr(1, 0, d, {hh[0], 9'b0, 6'(k), 8'(y), 8'(x)});
          end
    // expansion filters: word m*nc+k
    for (int m = 0; m < L.m; m++)
      for (int k = 0; k < nc; k++)
        for (int hh = 0; hh < 2; hh++) begin
          logic [31:0] d;
          for (int i = 0; i < 4; i++) d[8*i +: 8] = exw[m*L.n + 8*k + 4*hh + i];
          wr(2, 0, d, {hh[0], 19'b0, 12'(m*nc+k)});
        end
    for (int m = 0; m < L.m; m++)
      for (int t = 0; t < 9; t++) wr(3, 0, 32'(dww[m*9+t]), {12'b0, 4'(t), 16'(m)});
    for (int j = 0; j < L.cout; j++)
      for (int m = 0; m < L.m; m++) wr(4, 0, 32'(prw[j*L.m+m]), {10'b0, 6'(j), 16'(m)});
    for (int m = 0; m < L.m; m++) begin
      wr(5, 7'b0000_000, exb[m], m); wr(5, 7'b0000_100, exm[m], m); wr(5, 7'b0001_000, exs[m], m);
      wr(5, 7'b0000_001, dwb[m], m); wr(5, 7'b0000_101, dwm[m], m); wr(5, 7'b0001_001, dws[m], m);
    end
    for (int j = 0; j < L.cout; j++) begin
      wr(5, 7'b0000_010, prb[j], j); wr(5, 7'b0000_110, prm[j], j); wr(5, 7'b0001_010, prs[j], j);
    end

    // run
    wr(6, 0, 0, 0);
    t0 = cycle;
    for (int p = 0; p < L.h*L.w; p++)
      for (int wd = 0; wd < (L.cout+3)/4; wd++) begin
        if (L.slow && $urandom_range(3) == 0) repeat ($urandom_range(150)) @(negedge clk);
        cfu(7, 0, 0, 0, r);
        for (int i = 0; i < 4; i++)
          if (4*wd+i < L.cout) begin
            checks++;
            if (r[8*i +: 8] !== outp[p*L.cout + 4*wd + i]) begin
              failures++;
              if (errs++ < 5)
                $display("MISMATCH %s pixel %0d ch %0d: got %0d want %0d", L.name, p, 4*wd+i,
                         $signed(r[8*i +: 8]), outp[p*L.cout+4*wd+i]);
            end
          end
      end
    t1 = cycle;
    cfu(7, 1, 0, 0, r);
    checks++;
    if (r[0] !== 1'b0) begin failures++; $display("busy after last read"); end
    expect_cyc = longint'(L.h) * L.w * L.m * nc;
    $display("%s: %0d cycles from START to last read, %0d = H*W*M*N/8", L.name, t1 - t0, expect_cyc);
    if (L.check_rate) begin
      checks++;
      if (t1 - t0 < expect_cyc || t1 - t0 > expect_cyc + L.cout + 2*((L.cout+3)/4) + 30) begin
        failures++;
        $display("RATE %s: %0d cycles, expected %0d + up to %0d", L.name, t1 - t0, expect_cyc, L.cout + 2*((L.cout+3)/4) + 30);
      end
    end
  endtask

  initial begin
    layer_t L;
    repeat (3) @(posedge clk);
    reset = 1'b0;
    L = '{h: 4, w: 5, n: 16, m: 8, cout: 6, ex_max: 127, dw_max: 127, slow: 1, check_rate: 0, name: "small-slow"};
    run_layer(L);
    L = '{h: 3, w: 7, n: 8, m: 24, cout: 13, ex_max: 30, dw_max: 20, slow: 0, check_rate: 1, name: "small-relu6"};
    run_layer(L);
    L = '{h: 40, w: 40, n: 8, m: 48, cout: 8, ex_max: 127, dw_max: 127, slow: 0, check_rate: 1, name: "block3 40x40x8"};
    run_layer(L);
    L = '{h: 20, w: 20, n: 16, m: 96, cout: 16, ex_max: 127, dw_max: 127, slow: 0, check_rate: 1, name: "block5 20x20x16"};
    run_layer(L);
    L = '{h: 10, w: 10, n: 24, m: 144, cout: 24, ex_max: 127, dw_max: 127, slow: 0, check_rate: 1, name: "block8 10x10x24"};
    run_layer(L);
    L = '{h: 5, w: 5, n: 56, m: 336, cout: 56, ex_max: 127, dw_max: 127, slow: 0, check_rate: 1, name: "block15 5x5x56"};
    run_layer(L);
    $display("mechanisms: stall=%0d pad=%0d chunk_acc=%0d pixel_overlap=%0d read_wait=%0d relu_clamp=%0d",
             n_stall, n_pad, n_chunk, n_overlap, n_rdwait, n_relu);
    checks += 6;
    if (n_stall == 0)   begin failures++; $display("no stall seen"); end
    if (n_pad == 0)     begin failures++; $display("no padding seen"); end
    if (n_chunk == 0)   begin failures++; $display("no multi-chunk accumulation seen"); end
    if (n_overlap == 0) begin failures++; $display("no pixel overlap seen"); end
    if (n_rdwait == 0)  begin failures++; $display("no waiting read seen"); end
    if (n_relu == 0)    begin failures++; $display("no ReLU clamp seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
