// tb_block_reg: test of the 8x8 block register with write enable.
// Checks the reset value (all zero), that a write is taken at the clock edge,
// and that the contents hold while we is low, against a shadow model.
module tb_block_reg;
  localparam int W = 12;
  logic clk = 0, rst_n = 0, we = 0;
  logic signed [W-1:0] d [8][8];
  logic signed [W-1:0] q [8][8];
  logic signed [W-1:0] shadow [8][8];
  int checks = 0, failures = 0;

  block_reg #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic compare;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      checks++;
      if (q[i][j] !== shadow[i][j]) begin
        failures++;
        if (failures < 10) $display("FAIL [%0d][%0d] got %0d exp %0d", i, j, q[i][j], shadow[i][j]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shadow = '{default: '0};
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) d[i][j] = W'($urandom);
    #12;
    compare();              // reset value
    rst_n = 1;
    repeat (200) begin
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) d[i][j] = W'($urandom);
      we = 1'($urandom_range(0, 1));
      @(posedge clk);
      if (we) shadow = d;
      #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
