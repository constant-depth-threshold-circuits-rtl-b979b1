// Self-checking testbench for tc_parity.
//
// Three instances: the paper's even-detecting circuit on 7 and on 8 inputs,
// and the odd-detecting variant with a fractional carry current (scale 2^3)
// as used in the binary sum. A new random input every cycle; each output is
// compared, two cycles later, with the parity computed directly.
module tb_tc_parity;
  localparam int NCYC = 3000, N_PR = 16, FRAC = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [6:0] xa; logic [7:0] xb; logic [3:0] xc;
  logic signed [N_PR-1:0] cc;
  logic za, zb, zc;
  logic [6:0] sa [NCYC]; logic [7:0] sb [NCYC]; logic [3:0] sc [NCYC];
  int cs [NCYC];

  tc_parity #(.N(7), .N_PR(N_PR)) dut_a (
    .clk(clk), .rst_n(rst_n), .x(xa), .carry('0), .z(za));
  tc_parity #(.N(8), .N_PR(N_PR)) dut_b (
    .clk(clk), .rst_n(rst_n), .x(xb), .carry('0), .z(zb));
  tc_parity #(.N(4), .NL1(4), .FRAC(FRAC), .ODD(1'b1), .N_PR(N_PR)) dut_c (
    .clk(clk), .rst_n(rst_n), .x(xc), .carry(cc), .z(zc));

  task automatic check(string what, logic got, logic exp, int c);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d got %0b exp %0b", what, c, got, exp);
    end
  endtask

  initial begin
    xa = '0; xb = '0; xc = '0; cc = '0;
    for (int c = 0; c < NCYC; c++) begin
      sa[c] = 7'($urandom); sb[c] = 8'($urandom); sc[c] = 4'($urandom);
      // carry current below 4 (scaled: < 4*2^FRAC), as from lower bits
      cs[c] = $urandom_range(0, 4 * (1 << FRAC) - 1);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      if (c >= 2) begin
        check("even7", za, ~^sa[c-2], c);
        check("even8", zb, ~^sb[c-2], c);
        check("odd+carry", zc,
              1'(((($countones(sc[c-2]) << FRAC) + cs[c-2]) >> FRAC) & 1), c);
      end
      xa = sa[c]; xb = sb[c]; xc = sc[c]; cc = N_PR'(cs[c]);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
