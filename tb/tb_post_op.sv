// tb_post_op: random accumulators through the shift, ReLU and saturation
// stage (8 lanes), compared with a reference computed here; covers positive
// and negative saturation and both ReLU settings, and the one-cycle latency.
module tb_post_op;
  localparam int L = 8, DW = 18, AW = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, relu, out_valid;
  logic [L-1:0][AW-1:0] acc;
  logic [4:0] shift;
  logic [L-1:0][DW-1:0] out_data;
  int checks = 0, failures = 0, nsat = 0, nrelu = 0;

  post_op #(.LANES(L), .DATA_W(DW), .ACC_W(AW)) dut (.*);

  function automatic longint refv(longint a, int sh, bit r);
    longint v;
    v = a >>> sh;
    if (r && v < 0) v = 0;
    if (v > 131071) v = 131071;
    if (v < -131072) v = -131072;
    return v;
  endfunction

  initial begin
    in_valid = 0; relu = 0; acc = '0; shift = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint a [L];
      @(negedge clk);
      shift = 5'($urandom_range(0, 20)); relu = $urandom_range(0, 1);
      for (int l = 0; l < L; l++) begin
        a[l] = longint'($signed({$urandom, $urandom})) >>> $urandom_range(17, 40);
        acc[l] = AW'(a[l]);
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      for (int l = 0; l < L; l++) begin
        longint e; e = refv(a[l], shift, relu);
        if (e == 131071 || e == -131072) nsat++;
        if (relu && (a[l] >>> shift) < 0) nrelu++;
        checks++;
        if ($signed(out_data[l]) != e) begin failures++; $display("FAIL a=%0d sh=%0d r=%0d got %0d exp %0d", a[l], shift, relu, $signed(out_data[l]), e); end
      end
    end
    checks++; if (nsat == 0 || nrelu == 0) begin failures++; $display("FAIL coverage sat=%0d relu=%0d", nsat, nrelu); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
