// tb_filter_ram: writes random elements into every bank of a small filter
// RAM (8 lanes x 64 words), then reads every address back and checks all
// lanes, including the one-cycle read latency.
module tb_filter_ram;
  localparam int L = 8, DW = 18, D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [2:0] wr_lane;
  logic [5:0] wr_addr, rd_addr;
  logic [DW-1:0] wr_data;
  logic [L-1:0][DW-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] model [L][D];

  filter_ram #(.LANES(L), .DATA_W(DW), .DEPTH(D)) dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_lane = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int l = 0; l < L; l++) for (int a = 0; a < D; a++) begin
      model[l][a] = DW'($urandom);
      @(negedge clk); wr_en = 1; wr_lane = 3'(l); wr_addr = 6'(a); wr_data = model[l][a];
    end
    @(negedge clk); wr_en = 0;
    // overwrite a few in random order
    for (int k = 0; k < 50; k++) begin
      int l, a; l = $urandom_range(0, L-1); a = $urandom_range(0, D-1);
      model[l][a] = DW'($urandom);
      @(negedge clk); wr_en = 1; wr_lane = 3'(l); wr_addr = 6'(a); wr_data = model[l][a];
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_data[l] !== model[l][a]) begin failures++; $display("FAIL lane %0d addr %0d", l, a); end
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
