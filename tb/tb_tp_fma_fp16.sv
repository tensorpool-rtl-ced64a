// Self-checking test of the FP16 FMA. The reference result is computed in
// double precision (exact for every case that is checked: the product of two
// FP16 numbers has 22 significant bits and only operand pairs whose exact sum
// spans at most 53 bits are compared) and rounded to FP16 by an independent
// bit-level routine working on the IEEE double encoding. The latency of three
// enabled cycles and the hold behaviour of the enable are checked as well.
module tb_tp_fma_fp16;
  logic clk = 0, en = 0;
  logic [15:0] a, b, c, z;
  int checks = 0, failures = 0;

  tp_fma_fp16 dut (.clk_i(clk), .en_i(en), .a_i(a), .b_i(b), .c_i(c), .z_o(z));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real h2r(input logic [15:0] h);
    real m;
    int e;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) m = m * (2.0 ** -24);
    else        m = (1024.0 + m) * (2.0 ** (e - 25));
    return h[15] ? -m : m;
  endfunction

  // Round a double to FP16, nearest-even, from its bit pattern.
  function automatic logic [15:0] r2h(input real r);
    logic [63:0] d;
    logic        s;
    int          e, sh;
    logic [63:0] sig, kept, rest, half;
    logic [31:0] enc;
    d = $realtobits(r);
    s = d[63];
    if (d[62:0] == '0) return {s, 15'h0};
    e   = int'(d[62:52]) - 1023;           // value = 1.f * 2^e (no double subnormals here)
    sig = {11'd1, d[51:0]};                // 53 bits, LSB weighs 2^(e-52)
    // FP16 quantum: 2^(e-10) for normals (e >= -14), 2^-24 below
    if (e >= -14) sh = 52 - 10;            // keep 11 bits
    else          sh = 52 - (e + 24);      // keep bits down to 2^-24
    if (sh > 63) return {s, 15'h0};
    kept = sig >> sh;
    rest = sig & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rest > half || (rest == half && kept[0])) kept = kept + 1;
    if (e >= -14) begin
      if (kept == 64'd2048) begin kept = 64'd1024; e = e + 1; end
      if (e > 15) return {s, 15'h7c00};
      enc = 32'((e + 15) * 1024) + 32'(kept) - 32'd1024;
    end else begin
      enc = 32'(kept);
    end
    return {s, enc[14:0]};
  endfunction

  function automatic logic [15:0] ref_fma(input logic [15:0] x, y, w);
    real r;
    r = h2r(x) * h2r(y) + h2r(w);
    if (r == 0.0) begin
      // exact zero: negative only if both terms are negative
      return {(x[15] ^ y[15]) & w[15], 15'h0};
    end
    return r2h(r);
  endfunction

  function automatic bit is_special(input logic [15:0] h);
    return h[14:10] == 5'h1f;
  endfunction

  // span check: exact in double if the two terms lie within 53 bits
  function automatic bit exact_in_double(input logic [15:0] x, y, w);
    int pe, ce, plo, clo, hi, lo;
    pe = (x[14:10] == 0 ? 1 : int'(x[14:10])) + (y[14:10] == 0 ? 1 : int'(y[14:10])) - 50;
    ce = (w[14:10] == 0 ? 1 : int'(w[14:10])) - 25;
    plo = pe; clo = ce;
    hi = (pe + 22 > ce + 11) ? pe + 22 : ce + 11;
    lo = (plo < clo) ? plo : clo;
    return (hi - lo) <= 53;
  endfunction

  logic [15:0] qa[$], qb[$], qc[$];

  task automatic apply(input logic [15:0] x, y, w);
    a = x; b = y; c = w; en = 1;
    @(posedge clk);
    #1;
  endtask

  task automatic run_vec(input logic [15:0] x, y, w);
    logic [15:0] exp_z;
    apply(x, y, w);
    en = 0;
    // hold: a stalled pipeline must not advance
    repeat (2) @(posedge clk);
    #1;
    en = 1;
    repeat (2) @(posedge clk);
    #1;
    // after 3 enabled edges the result is present
    exp_z = ref_fma(x, y, w);
    checks++;
    if (z !== exp_z) begin
      failures++;
      if (failures < 10) $display("FAIL %h*%h+%h got %h exp %h", x, y, w, z, exp_z);
    end
  endtask

  initial begin
    logic [15:0] x, y, w, exp_z;
    int n;
    @(posedge clk); #1;
    // directed cases
    run_vec(16'h3c00, 16'h3c00, 16'h3c00);   // 1*1+1 = 2
    run_vec(16'h4000, 16'h4200, 16'hc000);   // 2*3-2 = 4
    run_vec(16'h3c00, 16'h3c00, 16'hbc00);   // exact zero -> +0
    run_vec(16'h0001, 16'h3800, 16'h0000);   // tie at the smallest subnormal
    run_vec(16'h7bff, 16'h4000, 16'h0000);   // overflow -> inf
    // specials
    a = 16'h7c00; b = 16'h0000; c = 16'h3c00; en = 1;
    repeat (3) @(posedge clk); #1;
    checks++; if (z !== 16'h7e00) begin failures++; $display("FAIL inf*0"); end
    a = 16'h7c00; b = 16'h3c00; c = 16'h3c00;
    repeat (3) @(posedge clk); #1;
    checks++; if (z !== 16'h7c00) begin failures++; $display("FAIL inf"); end
    a = 16'h7c00; b = 16'h3c00; c = 16'hfc00;
    repeat (3) @(posedge clk); #1;
    checks++; if (z !== 16'h7e00) begin failures++; $display("FAIL inf-inf"); end
    // random, streamed at one operation per cycle
    n = 0;
    en = 1;
    while (n < 20000) begin
      x = 16'($urandom); y = 16'($urandom); w = 16'($urandom);
      if (n % 4 == 0) begin  // bias towards comparable magnitudes (cancellation)
        w[14:10] = 5'((int'(x[14:10]) + int'(y[14:10]) - 15) < 0 ? 0 :
                      ((int'(x[14:10]) + int'(y[14:10]) - 15) > 30 ? 30 : int'(x[14:10]) + int'(y[14:10]) - 15));
      end
      if (is_special(x) || is_special(y) || is_special(w) || !exact_in_double(x, y, w)) continue;
      a = x; b = y; c = w;
      qa.push_back(x); qb.push_back(y); qc.push_back(w);
      @(posedge clk); #1;
      if (qa.size() == 3) begin
        // the value sampled three edges ago is at the output now
        x = qa.pop_front(); y = qb.pop_front(); w = qc.pop_front();
        exp_z = ref_fma(x, y, w);
        checks++;
        if (z !== exp_z) begin
          failures++;
          if (failures < 10) $display("FAIL %h*%h+%h got %h exp %h", x, y, w, z, exp_z);
        end
      end
      n++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
