// tb_stap_steer: sends beats of mini-batches 0..15 with 1 and 2 replicas and
// random per-replica ready; checks that mini-batch i leaves on replica
// i mod nrep only, that data and tag pass unchanged and that in_ready is the
// selected replica's ready.
module tb_stap_steer;
  localparam int W = 32, MB_W = 8, MR = 2;
  logic in_valid, in_ready;
  logic [W-1:0] in_data, out_data;
  logic [MB_W-1:0] in_mb, out_mb;
  logic [1:0] nrep, out_sel;
  logic [MR-1:0] out_valid, out_ready;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  stap_steer #(.W(W), .MB_W(MB_W), .MAX_REP(MR)) dut (.*);

  initial begin
    in_valid = 0; in_data = 0; in_mb = 0; nrep = 1; out_ready = 0;
    for (int n = 1; n <= 2; n++) begin
      nrep = 2'(n);
      for (int mb = 0; mb < 16; mb++) begin
        for (int beat = 0; beat < 3; beat++) begin
          int exp_r;
          @(negedge clk);
          in_valid = 1; in_mb = 8'(mb); in_data = $urandom; out_ready = 2'($urandom_range(0, 3));
          exp_r = mb % n;
          #1;
          checks++;
          if (out_valid != 2'(1 << exp_r)) begin failures++; $display("FAIL mb %0d nrep %0d valid %b", mb, n, out_valid); end
          checks++;
          if (in_ready != out_ready[exp_r] || out_data != in_data || out_mb != in_mb) begin
            failures++; $display("FAIL ready/data mb %0d", mb);
          end
        end
      end
    end
    @(negedge clk); in_valid = 0; #1;
    checks++; if (out_valid != 0) begin failures++; $display("FAIL idle valid"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
