// tb_salo_buffer: writes random words to random addresses of a small buffer,
// keeps a model copy, and checks every read (one cycle read latency),
// including a read and a write of the same address in the same cycle (the
// read returns the old word).
module tb_salo_buffer;
  localparam int W = 40, DEPTH = 16, AW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic          wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0]  wr_data = '0, rd_data;
  logic [W-1:0]  model [DEPTH];
  int checks = 0, failures = 0;

  salo_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expv;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = W'({$urandom, $urandom});
      model[a] = wr_data;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      wr_en = ($urandom_range(1) == 1); wr_addr = AW'($urandom); wr_data = W'({$urandom, $urandom});
      rd_en = 1; rd_addr = AW'($urandom);
      if ((n % 7) == 0) rd_addr = wr_addr;
      expv = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 0; rd_en = 0;
      checks++;
      if (rd_data !== expv) begin
        failures++;
        $display("addr %0d: %h vs %h", rd_addr, rd_data, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
