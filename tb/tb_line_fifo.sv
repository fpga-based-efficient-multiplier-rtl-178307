// tb_line_fifo - self-check of the row buffer. Random pixels are pushed
// with random idle cycles for several row lengths; before every push dout
// must equal the pixel pushed exactly len pushes earlier (once that many
// have gone in since the last clear). A clear arriving with a push restarts
// the count.
module tb_line_fifo;

  localparam int unsigned MAX_LEN = 40;
  localparam int unsigned LEN_W   = $clog2(MAX_LEN + 1);

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             clear = 1'b0;
  logic [LEN_W-1:0] len;
  logic             push = 1'b0;
  logic [7:0]       din = '0;
  logic [7:0]       dout;

  always #5 clk = ~clk;

  line_fifo #(.DATA_W(8), .MAX_LEN(MAX_LEN)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int lens [4] = '{3, 7, 40, 16};
    logic [7:0] hist [$];

    len = LEN_W'(3);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (lens[k]) begin
      len = LEN_W'(lens[k]);
      hist.delete();
      for (int n = 0; n < 6 * lens[k]; n++) begin
        // random idle cycles between pushes
        while ($urandom_range(3) == 0) begin
          push  = 1'b0;
          clear = 1'b0;
          @(posedge clk);
          #1;
        end
        push  = 1'b1;
        clear = (n == 0);
        din   = 8'($urandom);
        #1;
        if (hist.size() >= lens[k]) begin
          checks++;
          if (dout !== hist[hist.size() - lens[k]]) begin
            failures++;
            $display("FAIL len=%0d push %0d: dout=%0h expected %0h",
                     lens[k], n, dout, hist[hist.size() - lens[k]]);
          end
        end
        hist.push_back(din);
        @(posedge clk);
        #1;
      end
      push  = 1'b0;
      clear = 1'b0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
