// Self-checking testbench for snp_memory.
//
// Loads a random genotype table (as one-hot pattern weights), then triggers
// random (X, Y) pairs with X in the X role once and Y in the Y role three
// times, and checks both column outputs against the table, cycle by cycle.
module tb_snp_memory;
  import snn_pkg::*;
  localparam int N_SNP = 5, M = 12, S_PR = 8, N_PR = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic we;
  logic [2:0] w_snp;
  logic [3:0] w_sample;
  logic [S_PR-1:0] wdata;
  logic [N_SNP-1:0] trig_x, trig_y;
  logic [M-1:0] x_out, y_out;
  genotype_e gt [N_SNP][M];

  snp_memory #(.N_SNP(N_SNP), .M(M), .S_PR(S_PR), .N_PR(N_PR)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .w_snp(w_snp), .w_sample(w_sample), .wdata(wdata),
    .trig_x(trig_x), .trig_y(trig_y), .x_out(x_out), .y_out(y_out));

  function automatic logic [M-1:0] column_bits(int snp, int g);
    logic [M-1:0] v;
    for (int i = 0; i < M; i++) v[i] = (int'(gt[snp][i]) == g);
    return v;
  endfunction

  initial begin
    we = 0; trig_x = '0; trig_y = '0; w_snp = '0; w_sample = '0; wdata = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int j = 0; j < N_SNP; j++)
      for (int i = 0; i < M; i++) begin
        gt[j][i] = genotype_e'($urandom_range(0, 2));
        we = 1; w_snp = 3'(j); w_sample = 4'(i);
        wdata = S_PR'(genotype_weight(gt[j][i], S_PR));
        @(negedge clk);
      end
    we = 0;
    for (int n = 0; n < 40; n++) begin
      int a, b;
      a = $urandom_range(0, N_SNP - 1);
      b = $urandom_range(0, N_SNP - 1);
      for (int c = 0; c < 14; c++) begin
        trig_x = (c == 0) ? (N_SNP'(1) << a) : '0;
        trig_y = (c == 0 || c == 3 || c == 6) ? (N_SNP'(1) << b) : '0;
        @(posedge clk);
        #1;
        // outputs seen in cycle c+1 after this edge
        checks += 2;
        if (x_out !== ((c + 1 >= 2 && c + 1 <= 4) ? column_bits(a, c - 1) : '0)) begin
          failures++;
          if (failures < 10) $display("FAIL x_out pair %0d cycle %0d", n, c);
        end
        if (y_out !== ((c + 1 >= 2 && c + 1 <= 10) ? column_bits(b, (c - 1) % 3) : '0)) begin
          failures++;
          if (failures < 10) $display("FAIL y_out pair %0d cycle %0d", n, c);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
