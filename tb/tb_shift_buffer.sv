// tb_shift_buffer: checks that the circulating buffer returns each word
// exactly DEPTH clocks after it was written, and the INIT value for slots not
// written since reset (also across a second reset).
module tb_shift_buffer;
  localparam int W = 8, D = 5;
  localparam logic [W-1:0] INIT = 8'hA5;
  logic clk = 0, rst = 1;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] hist [$];

  shift_buffer #(.WIDTH(W), .DEPTH(D), .INIT(INIT)) dut (.clk, .rst, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int cycles);
    hist = {};
    for (int t = 0; t < cycles; t++) begin
      din = W'($urandom);
      #1;
      checks++;
      if (t < D) begin
        if (dout !== INIT) begin failures++; $display("t=%0d expected INIT got %h", t, dout); end
      end else if (dout !== hist[t-D]) begin
        failures++; $display("t=%0d expected %h got %h", t, hist[t-D], dout);
      end
      hist.push_back(din);
      @(posedge clk); #1;
    end
  endtask

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    run(100);
    rst = 1; @(posedge clk); #1 rst = 0;
    run(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
