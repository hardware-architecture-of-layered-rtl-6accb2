// tb_out_fifo -- checks the result FIFO (depth 4) against a queue model under
// random push/pop traffic, including push and pop in the same cycle, the full
// and empty flags and the occupancy count.
module tb_out_fifo;
  localparam int W = 32, DEPTH = 4;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full;
  logic [W-1:0] din = 0, dout;
  logic [2:0] count;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0, nfull = 0;

  out_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks += 3;
    if (int'(count) != model.size()) begin failures++; $display("count %0d model %0d", count, model.size()); end
    if (empty != (model.size() == 0) || full != (model.size() == DEPTH)) failures++;
    if (model.size() > 0 && dout !== model[0]) begin failures++; $display("dout %h exp %h", dout, model[0]); end
    if (full) nfull++;
    if (pop) void'(model.pop_front());
    if (push) model.push_back(din);
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      push = (($urandom % 100) < ((i / 500) % 2 ? 70 : 35)) && !(full && !pop);
      pop  = (($urandom % 2) == 0) && !empty;
      if (full && !pop) push = 0;
      din = $urandom;
    end
    @(negedge clk) begin push = 0; pop = 0; end
    @(negedge clk);
    checks++;
    if (nfull == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
