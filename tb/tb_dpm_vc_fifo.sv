// tb_dpm_vc_fifo: random pushes and pops against a queue model; checks data
// order, the empty/full flags and that exactly DEPTH flits fit.
module tb_dpm_vc_fifo;
  import dpm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              push = 0, pop = 0, empty, full;
  logic [FLIT_W-1:0] din, dout;
  logic [FLIT_W-1:0] model[$];
  int checks = 0, failures = 0;

  dpm_vc_fifo dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill to the top
    for (int i = 0; i < BUF_DEPTH; i++) begin
      checks++; if (full) failures++;
      push = 1; din = {$urandom, $urandom, $urandom};
      model.push_back(din);
      @(negedge clk);
    end
    push = 0;
    checks++; if (!full || empty) failures++;
    // random traffic
    for (int t = 0; t < 2000; t++) begin
      push = !full && ($urandom_range(1) == 1);
      pop  = !empty && ($urandom_range(1) == 1);
      din  = {$urandom, $urandom, $urandom};
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == BUF_DEPTH)) begin
        failures++; $display("FAIL flags at %0d", t);
      end
      if (pop) begin
        checks++;
        if (dout !== model[0]) begin failures++; $display("FAIL data at %0d", t); end
        void'(model.pop_front());
      end
      if (push) model.push_back(din);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
