// tb_lane_cluster: self-checking test of the lane cluster with 4 lanes and
// 8-element subvectors. Writes input subvectors into both input banks and
// filter subvectors into both filter banks, runs back-to-back steps (one per
// cycle) and checks every lane's dot product against a reference.
module tb_lane_cluster;
  localparam int L = 4, DW = 18, AW = 48, VL = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic x_wr_en, x_wr_bank, w_wr_en, w_wr_bank, bias_wr_en, step_valid, step_bank, step_first;
  logic [VL-1:0][DW-1:0] x_wr_data;
  logic [2:0] w_wr_idx, step_idx;
  logic [L-1:0][DW-1:0] w_wr_data, bias_wr_data;
  logic [L-1:0][AW-1:0] acc;
  int checks = 0, failures = 0;

  lane_cluster #(.LANES(L), .DATA_W(DW), .ACC_W(AW), .VEC_LEN(VL)) dut (.*);

  logic signed [DW-1:0] w [2][L][VL];
  logic signed [DW-1:0] x [2][VL];
  logic signed [DW-1:0] bias [L];
  longint expv [L];

  initial begin
    {x_wr_en, x_wr_bank, w_wr_en, w_wr_bank, bias_wr_en, step_valid, step_bank, step_first} = '0;
    x_wr_data = '0; w_wr_idx = 0; step_idx = 0; w_wr_data = '0; bias_wr_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      for (int l = 0; l < L; l++) begin bias[l] = DW'($signed($urandom_range(0, 2000)) - 1000); expv[l] = bias[l]; end
      @(negedge clk); bias_wr_en = 1; for (int l = 0; l < L; l++) bias_wr_data[l] = bias[l];
      @(negedge clk); bias_wr_en = 0;
      for (int b = 0; b < 2; b++) begin
        for (int i = 0; i < VL; i++) begin
          x[b][i] = DW'($signed($urandom_range(0, 2**DW-1)));
          x_wr_data[i] = x[b][i];
        end
        @(negedge clk); x_wr_en = 1; x_wr_bank = b[0];
        @(negedge clk); x_wr_en = 0;
        for (int i = 0; i < VL; i++) begin
          @(negedge clk); w_wr_en = 1; w_wr_bank = b[0]; w_wr_idx = i[2:0];
          for (int l = 0; l < L; l++) begin
            w[b][l][i] = DW'($signed($urandom_range(0, 2**DW-1)));
            w_wr_data[l] = w[b][l][i];
          end
        end
        @(negedge clk); w_wr_en = 0;
      end
      // 2*VL back-to-back steps: bank 0 then bank 1
      for (int s = 0; s < 2*VL; s++) begin
        @(negedge clk); step_valid = 1; step_bank = (s >= VL); step_idx = 3'(s % VL); step_first = (s == 0);
      end
      @(negedge clk); step_valid = 0;
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        for (int b = 0; b < 2; b++) for (int i = 0; i < VL; i++) expv[l] += longint'(w[b][l][i]) * longint'(x[b][i]);
        checks++;
        if (acc[l] !== AW'(expv[l])) begin failures++; $display("FAIL lane %0d acc=%0d exp=%0d", l, $signed(acc[l]), expv[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
