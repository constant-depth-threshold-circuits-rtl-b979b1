// Self-checking testbench for tc_popc.
//
// Instances with 8 and 5 inputs; random input vectors of random density every
// cycle (including all ones and all zeros); each count is compared three
// cycles later with $countones of the vector.
module tb_tc_popc;
  localparam int NCYC = 3000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] xa; logic [4:0] xb;
  logic [3:0] ca; logic [2:0] cb;
  logic [7:0] sa [NCYC]; logic [4:0] sb [NCYC];

  tc_popc #(.L(8), .N_PR(12)) dut_a (.clk(clk), .rst_n(rst_n), .x(xa), .count(ca));
  tc_popc #(.L(5), .N_PR(12)) dut_b (.clk(clk), .rst_n(rst_n), .x(xb), .count(cb));

  initial begin
    xa = '0; xb = '0;
    for (int c = 0; c < NCYC; c++) begin
      case ($urandom_range(0, 3))
        0: begin sa[c] = '1; sb[c] = '0; end
        1: begin sa[c] = 8'($urandom) & 8'($urandom); sb[c] = '1; end
        default: begin sa[c] = 8'($urandom); sb[c] = 5'($urandom); end
      endcase
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      if (c >= 3) begin
        checks += 2;
        if (ca !== 4'($countones(sa[c-3]))) begin
          failures++;
          if (failures < 10) $display("FAIL L=8 cycle %0d got %0d exp %0d", c, ca, $countones(sa[c-3]));
        end
        if (cb !== 3'($countones(sb[c-3]))) begin
          failures++;
          if (failures < 10) $display("FAIL L=5 cycle %0d got %0d exp %0d", c, cb, $countones(sb[c-3]));
        end
      end
      xa = sa[c]; xb = sb[c];
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
