// tb_mac_lane: self-checking test of one MAC lane.
// Loads random filter subvectors into both banks, runs dot products over
// several subvectors (first with bias, then accumulating), switching banks,
// and compares the accumulator with a reference sum computed here. Also
// checks the two-cycle latency from step to accumulator.
module tb_mac_lane;
  localparam int DW = 18, AW = 48, VL = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_wr_en, w_wr_bank, bias_wr_en, step_valid, step_bank, step_first;
  logic [3:0] w_wr_idx, step_idx;
  logic signed [DW-1:0] w_wr_data, bias_wr_data, x_data;
  logic signed [AW-1:0] acc;
  int checks = 0, failures = 0;

  mac_lane #(.DATA_W(DW), .ACC_W(AW), .VEC_LEN(VL)) dut (.*);

  logic signed [DW-1:0] w [2][VL];
  logic signed [DW-1:0] x [VL];
  longint ref_acc;

  function automatic logic signed [DW-1:0] rnd();
    return DW'($signed($urandom_range(0, 2**DW-1)));
  endfunction

  task automatic load_bank(int b);
    for (int i = 0; i < VL; i++) begin
      w[b][i] = rnd();
      @(negedge clk); w_wr_en = 1; w_wr_bank = b[0]; w_wr_idx = i[3:0]; w_wr_data = w[b][i];
    end
    @(negedge clk); w_wr_en = 0;
  endtask

  task automatic run(int b, bit first);
    for (int i = 0; i < VL; i++) x[i] = rnd();
    for (int i = 0; i < VL; i++) begin
      @(negedge clk);
      step_valid = 1; step_bank = b[0]; step_idx = i[3:0]; step_first = first && i == 0; x_data = x[i];
    end
    @(negedge clk); step_valid = 0;
    for (int i = 0; i < VL; i++) ref_acc += longint'(w[b][i]) * longint'(x[i]);
    // the last step was presented one cycle ago: after one more edge acc holds it
    @(negedge clk);
    checks++;
    if (acc !== AW'(ref_acc)) begin
      failures++; $display("FAIL acc=%0d expected %0d", acc, ref_acc);
    end
  endtask

  initial begin
    w_wr_en = 0; bias_wr_en = 0; step_valid = 0; step_first = 0; step_bank = 0; step_idx = 0;
    w_wr_bank = 0; w_wr_idx = 0; w_wr_data = 0; bias_wr_data = 0; x_data = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      logic signed [DW-1:0] b;
      b = rnd();
      @(negedge clk); bias_wr_en = 1; bias_wr_data = b; @(negedge clk); bias_wr_en = 0;
      ref_acc = longint'(b);
      load_bank(0); load_bank(1);
      run(0, 1); run(1, 0); run(0, 0);
    end
    // latency: a single step becomes visible exactly two edges later
    @(negedge clk); bias_wr_en = 1; bias_wr_data = 18'sd7; @(negedge clk); bias_wr_en = 0;
    @(negedge clk); step_valid = 1; step_bank = 0; step_idx = 0; step_first = 1; x_data = 18'sd3;
    @(negedge clk); step_valid = 0;
    checks++; if (acc == AW'(longint'(w[0][0]) * 3 + 7)) begin failures++; $display("FAIL latency too short"); end
    @(negedge clk);
    checks++; if (acc !== AW'(longint'(w[0][0]) * 3 + 7)) begin failures++; $display("FAIL latency %0d", acc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
