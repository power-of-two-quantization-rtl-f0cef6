// tb_pot_mac: end-to-end test of the PoT MAC at its default sizes.
//
// Streams 400 dot products of random length (1 to 600 terms, the longest as
// long as a 3x3x64 convolution window) through the unit, with random idle
// cycles between terms. A cycle-level reference in this file registers the
// inputs like the unit does and keeps the expected accumulator, computing
// each term as (-1)^sign * floor(a * 16 / 2^e) in real arithmetic and
// wrapping the sum to 16 bits. acc and acc_valid are compared after every
// clock edge, which also checks the two-edge latency from input to acc.
//
// It counts the mechanisms of the unit and fails if one never occurred:
// a new dot product (first), negative-weight sign correction, each of the 8
// exponents, truncation of bits below 1/16, idle cycles holding acc, the
// -128 x (-1) corner whose 12-bit product has no positive counterpart, and
// accumulator wrap-around.
module tb_pot_mac;
  import pot_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0;
  logic signed [ACT_W-1:0] act = '0;
  pot_weight_t weight = '0;
  logic signed [ACC_W-1:0] acc;
  logic acc_valid;

  pot_mac dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first),
    .act(act), .weight(weight), .acc(acc), .acc_valid(acc_valid)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_first = 0, n_neg = 0, n_trunc = 0, n_idle = 0, n_corner = 0, n_wrap = 0;
  int n_exp [8] = '{default: 0};

  // reference pipeline state
  bit     r_v = 0, r_first = 0;
  int     r_term = 0;
  longint r_acc = 0, r_exact;
  bit     r_acc_valid = 0;

  function automatic longint wrap16(longint v);
    longint m;
    m = v & 64'hFFFF;
    return (m >= 32768) ? m - 65536 : m;
  endfunction

  function automatic int ref_term(int a, bit s, int e);
    int mag;
    mag = int'($floor(real'(a) * 16.0 / (2.0 ** e)));
    return s ? -mag : mag;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model and comparison, one step per rising edge
  always @(posedge clk) begin
    if (rst_n) begin
      // second stage first: uses the term registered on the previous edge
      if (r_v) begin
        r_exact = (r_first ? 0 : r_acc) + longint'(r_term);
        if (wrap16(r_exact) != r_exact) n_wrap++;
        r_acc = wrap16(r_exact);
      end
      r_acc_valid = r_v;
      r_v     = in_valid;
      r_first = first;
      if (in_valid) r_term = ref_term(int'(act), weight.sign, int'(weight.exp));
      #1;
      checks++;
      if (longint'(acc) != r_acc || acc_valid != r_acc_valid) begin
        failures++;
        if (failures < 10)
          $display("FAIL t=%0t acc=%0d exp=%0d acc_valid=%0b exp=%0b", $time, acc, r_acc, acc_valid, r_acc_valid);
      end
    end
  end

  task automatic drive_term(bit is_first, int a, bit s, int e);
    @(negedge clk);
    in_valid    = 1;
    first       = is_first;
    act         = ACT_W'(a);
    weight.sign = s;
    weight.exp  = EXP_W'(e);
    n_first += is_first;
    n_neg   += s;
    n_exp[e]++;
    if ((a * 16) % (1 << e) != 0) n_trunc++;
    if (a == -128 && e == 0 && s) n_corner++;
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0;
    first    = 1'($urandom_range(0, 1));  // ignored while in_valid is low
    act      = ACT_W'($urandom);
    n_idle++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (acc != 0 || acc_valid) begin failures++; $display("FAIL reset state"); end
    @(negedge clk) rst_n = 1;

    for (int d = 0; d < 400; d++) begin
      int len, mode;
      len  = (d % 4 == 0) ? $urandom_range(1, 8) : $urandom_range(1, 600);
      mode = $urandom_range(0, 3);
      for (int k = 0; k < len; k++) begin
        int a, e;
        bit s;
        a = int'($signed(8'($urandom)));
        if (mode == 0) a = (a < 0) ? -128 : 127;  // extreme activations: drive the sum past 16 bits
        e = (mode == 1) ? $urandom_range(0, 1) : $urandom_range(0, 7);
        s = 1'($urandom_range(0, 1));
        if (mode == 0 && k % 2 == 0 && a < 0) s = 1;  // same-signed terms so the sum runs away
        if (mode == 0 && k % 2 == 0 && a > 0) s = 0;
        if ($urandom_range(0, 99) == 0) begin a = -128; e = 0; s = 1; end
        drive_term(k == 0, a, s, e);
        if ($urandom_range(0, 9) == 0) idle();
      end
    end
    repeat (4) idle();
    @(negedge clk);

    $display("dot products=%0d negative weights=%0d truncations=%0d idle=%0d corner=%0d wraps=%0d",
             n_first, n_neg, n_trunc, n_idle, n_corner, n_wrap);
    checks++; if (n_first == 0)  begin failures++; $display("FAIL no dot product started"); end
    checks++; if (n_neg == 0)    begin failures++; $display("FAIL no sign correction"); end
    checks++; if (n_trunc == 0)  begin failures++; $display("FAIL no truncation"); end
    checks++; if (n_idle == 0)   begin failures++; $display("FAIL no idle cycle"); end
    checks++; if (n_corner == 0) begin failures++; $display("FAIL no -128 x -1 corner"); end
    checks++; if (n_wrap == 0)   begin failures++; $display("FAIL no accumulator wrap-around"); end
    for (int e = 0; e < 8; e++) begin
      checks++;
      if (n_exp[e] == 0) begin failures++; $display("FAIL exponent %0d never used", e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
