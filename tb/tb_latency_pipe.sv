// tb_latency_pipe: self-checking test of the programmable delay line.
//
// For delays 0, 1, 2, 17, 100 and MAX_DEPTH-1 (255), random words are
// pushed in every cycle and each output is compared with the input of
// exactly delay+1 cycles before, kept in a queue here.
module tb_latency_pipe;
  localparam int W = 40;
  localparam int D = 256;

  logic clk = 0, rst_n = 0;
  logic [7:0] cfg_delay;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;

  latency_pipe #(.W(W), .MAX_DEPTH(D)) dut (.clk, .rst_n, .cfg_delay, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int d);
    logic [W-1:0] hist[$];
    cfg_delay = 8'(d);
    for (int i = 0; i < d + 600; i++) begin
      @(negedge clk);
      // dout now shows the word written d+1 edges ago
      if (i > d + 1) begin
        checks++;
        if (dout !== hist[hist.size() - 1 - d]) begin
          failures++;
          if (failures < 10) $display("FAIL delay %0d step %0d: got %h want %h", d, i, dout,
                                      hist[hist.size() - 1 - d]);
        end
      end
      din = {$urandom, $urandom};
      hist.push_back(din);
    end
  endtask

  initial begin
    din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0); run(1); run(2); run(17); run(100); run(D - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
