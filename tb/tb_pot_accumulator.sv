// tb_pot_accumulator: random check of the accumulator register.
//
// Applies 5000 cycles of random en/first/term and compares acc after every
// clock edge with a model kept as a 64-bit integer reduced modulo 2^16.
// Also checks the reset value and that wrap-around (sums leaving the 16-bit
// range) occurs and is handled; the run fails if no wrap was seen.
module tb_pot_accumulator;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic signed [15:0] term = '0, acc;
  int checks = 0, failures = 0, wraps = 0;
  longint model, exact;

  pot_accumulator dut (.clk(clk), .rst_n(rst_n), .en(en), .first(first), .term(term), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wrap16(longint v);
    longint m;
    m = v & 64'hFFFF;
    return (m >= 32768) ? m - 65536 : m;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (acc != 0) begin failures++; $display("FAIL reset acc=%0d", acc); end
    rst_n = 1;
    model = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      en    = ($urandom_range(0, 9) != 0);
      first = ($urandom_range(0, 39) == 0);
      // mostly large terms, so that wrap-around happens
      term  = 16'($urandom_range(0, 65535));
      if ($urandom_range(0, 1) == 0) term = term >>> 4;
      @(posedge clk);
      #1;
      if (en) begin
        exact = (first ? 0 : model) + longint'(term);
        model = wrap16(exact);
        if (exact != model) wraps++;
      end
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d acc=%0d model=%0d", i, acc, model);
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL no wrap-around exercised"); end
    $display("wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
