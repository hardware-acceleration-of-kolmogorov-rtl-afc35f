// tb_sh_lut: the Sharable-Hemi LUT clears on reset, stores each write at
// its address only, and shows all entries in parallel.
module tb_sh_lut;
  localparam int LD = 5, K = 3, BW = 6, DEPTH = 64;
  logic clk = 0, rst_n = 0, we = 0;
  logic [5:0]    waddr;
  logic [BW-1:0] wdata;
  logic [BW-1:0] value [DEPTH];
  logic [BW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sh_lut #(.LD(LD), .K(K), .BW(BW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (value[i] !== model[i]) begin
        failures++;
        $display("entry %0d = %0d expected %0d", i, value[i], model[i]);
      end
    end
  endtask

  initial begin
    waddr = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (model[i]) model[i] = '0;
    @(negedge clk);
    compare();
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 1'b1;
      waddr = 6'($urandom_range(DEPTH - 1));
      wdata = BW'($urandom);
      @(posedge clk);
      model[waddr] = wdata;
      #1;
      we = 1'b0;
      compare();
    end
    rst_n = 0;
    #1;
    foreach (model[i]) model[i] = '0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
