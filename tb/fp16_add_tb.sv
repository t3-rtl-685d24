// fp16_add_tb: checks fp16_add against a reference computed with real arithmetic.
// The sum of two binary16 values is exact in a double, so the reference rounds that
// exact sum to binary16 (nearest even) by scaling with powers of two.
module fp16_add_tb;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  function automatic real h2r(input logic [15:0] h);
    real m, r;
    int e;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) r = m * (2.0 ** -24);
    else        r = (1024.0 + m) * (2.0 ** (e - 25));
    return h[15] ? -r : r;
  endfunction

  // round an exact real to binary16, nearest even
  function automatic logic [15:0] r2h(input real x, input logic zsign);
    real ax, q, n, f, fr;
    int  ex;
    logic s;
    if (x == 0.0) return {zsign, 15'h0};
    s  = (x < 0.0);
    ax = s ? -x : x;
    ex = 0;
    while (ax >= 2.0 ** (ex + 1)) ex++;
    while (ax < 2.0 ** ex) ex--;
    if (ex < -14) q = 2.0 ** -24;
    else          q = 2.0 ** (ex - 10);
    n  = ax / q;
    f  = real'(longint'(n - 0.5));  // candidate floor
    while (f > n) f = f - 1.0;
    while (f + 1.0 <= n) f = f + 1.0;
    fr = n - f;
    if (fr > 0.5 || (fr == 0.5 && (longint'(f) % 2 == 1))) f = f + 1.0;
    ax = f * q;
    if (ax >= 65520.0) return {s, 5'h1f, 10'h0};
    if (ax < 2.0 ** -14) return {s, 5'h0, 10'(longint'(ax / (2.0 ** -24)))};
    ex = 0;
    while (ax >= 2.0 ** (ex + 1)) ex++;
    while (ax < 2.0 ** ex) ex--;
    return {s, 5'(ex + 15), 10'(longint'(ax / (2.0 ** (ex - 10))) - 1024)};
  endfunction

  function automatic logic is_nan(input logic [15:0] h);
    return (h[14:10] == 5'h1f) && (h[9:0] != 0);
  endfunction

  task automatic check_pair(input logic [15:0] x, input logic [15:0] z);
    logic [15:0] exp_y;
    a = x; b = z;
    #1;
    checks++;
    if (is_nan(x) || is_nan(z)) begin
      if (!is_nan(y)) begin failures++; $display("FAIL nan %h + %h = %h", x, z, y); end
    end else if (x[14:0] == 15'h7c00 || z[14:0] == 15'h7c00) begin
      if (x[14:0] == 15'h7c00 && z[14:0] == 15'h7c00 && x[15] != z[15]) exp_y = 16'h7e00;
      else exp_y = (x[14:0] == 15'h7c00) ? x : z;
      if (y !== exp_y) begin failures++; $display("FAIL inf %h + %h = %h exp %h", x, z, y, exp_y); end
    end else begin
      exp_y = r2h(h2r(x) + h2r(z), x[15] & z[15]);
      if (y !== exp_y) begin
        failures++;
        if (failures < 20) $display("FAIL %h + %h = %h exp %h", x, z, y, exp_y);
      end
    end
  endtask

  initial begin
    // watchdog: this test is combinational; it cannot hang, but bound it anyway
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] x, z;
    check_pair(16'h3c00, 16'h3c00);   // 1 + 1 = 2
    check_pair(16'h3c00, 16'hbc00);   // 1 - 1 = +0
    check_pair(16'h8000, 16'h8000);   // -0 + -0
    check_pair(16'h7bff, 16'h7bff);   // overflow to inf
    check_pair(16'h0001, 16'h0001);   // subnormals
    check_pair(16'h03ff, 16'h0001);   // subnormal to normal
    check_pair(16'h3c00, 16'h0001);   // tiny addend, sticky
    check_pair(16'h3c01, 16'hb800);
    check_pair(16'h7c00, 16'hfc00);   // inf - inf = NaN
    check_pair(16'h7c00, 16'h3c00);
    check_pair(16'h7e01, 16'h3c00);
    check_pair(16'h5140, 16'hd140);
    for (int i = 0; i < 60000; i++) begin
      x = 16'($urandom);
      z = 16'($urandom);
      if (i % 3 == 0) z = {z[15], x[14:10] ^ 5'($urandom_range(0, 3)), z[9:0]}; // close exponents
      check_pair(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
