// tb_kom_mult - self-check of the recursive error-free multiplier.
//
//  * 16x16 pipelined (default parameters): corner operands, the worked
//    examples 16*60 = 960 and 18*60 = 1080, and random pairs, one new pair
//    per clock. Each product must appear exactly 9 clocks after its
//    operands (three register ranks per KOM level) and be exact.
//  * 16x16 non-pipelined: the same operands, checked combinationally.
//  * 4x4 pipelined: all 256 pairs (latency 3); 8x8 non-pipelined: all
//    65536 pairs. Average and maximum relative error are reported; both
//    must be 0.
module tb_kom_mult;
  import refmlm_pkg::*;

  localparam int unsigned LAT16 = 9;
  localparam int unsigned LAT4  = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // 16x16, pipelined (defaults) and combinational
  logic [15:0] a16, b16;
  logic [31:0] p16, p16c;
  kom_mult dut16 (.clk, .a(a16), .b(b16), .p(p16));
  kom_mult #(.N(16), .PIPELINED(1'b0)) dut16c (.clk, .a(a16), .b(b16), .p(p16c));

  // 4x4 pipelined
  logic [3:0] a4, b4;
  logic [7:0] p4;
  kom_mult #(.N(4)) dut4 (.clk, .a(a4), .b(b4), .p(p4));

  // 8x8 combinational
  logic [7:0]  a8, b8;
  logic [15:0] p8;
  kom_mult #(.N(8), .PIPELINED(1'b0)) dut8 (.clk, .a(a8), .b(b8), .p(p8));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected products of the pipelined 16x16 instance, by issue cycle
  localparam int NVEC = 3000;
  logic [15:0] va [NVEC];
  logic [15:0] vb [NVEC];

  initial begin
    real err_sum, err_max, rel;
    int  nz;

    if (kom_latency(16, 1'b1) != LAT16 || kom_latency(8, 1'b1) != 6 ||
        kom_latency(4, 1'b1) != LAT4 || kom_latency(16, 1'b0) != 0) begin
      failures++;
      $display("FAIL kom_latency");
    end
    checks++;

    va[0] = 16'd16;    vb[0] = 16'd60;
    va[1] = 16'd18;    vb[1] = 16'd60;
    va[2] = 16'hFFFF;  vb[2] = 16'hFFFF;
    va[3] = 16'h0000;  vb[3] = 16'hFFFF;
    va[4] = 16'hFFFF;  vb[4] = 16'h0001;
    va[5] = 16'h8000;  vb[5] = 16'h8000;
    va[6] = 16'h5555;  vb[6] = 16'hAAAA;
    va[7] = 16'h00FF;  vb[7] = 16'hFF00;
    for (int i = 8; i < NVEC; i++) begin
      va[i] = 16'($urandom);
      vb[i] = 16'($urandom);
    end

    // streaming run, one pair per clock; output checked exactly LAT16
    // clocks later (consecutive random pairs differ, so an early or late
    // product is caught)
    for (int t = 0; t < NVEC + LAT16; t++) begin
      if (t < NVEC) begin
        a16 = va[t];
        b16 = vb[t];
      end
      #1;
      if (t < NVEC) begin
        checks++;
        if (p16c !== 32'(va[t]) * 32'(vb[t])) begin
          failures++;
          $display("FAIL comb16 %0d x %0d = %0d", va[t], vb[t], p16c);
        end
      end
      if (t >= LAT16) begin
        checks++;
        if (p16 !== 32'(va[t-LAT16]) * 32'(vb[t-LAT16])) begin
          failures++;
          if (failures < 10)
            $display("FAIL pipe16 t=%0d %0d x %0d = %0d", t, va[t-LAT16], vb[t-LAT16], p16);
        end
      end
      @(negedge clk);
    end

    // 4x4 exhaustive, pipelined
    err_sum = 0.0; err_max = 0.0; nz = 0;
    for (int t = 0; t < 256 + LAT4; t++) begin
      if (t < 256) begin
        a4 = 4'(t >> 4);
        b4 = 4'(t);
      end
      #1;
      if (t >= LAT4) begin
        int x, y;
        x = (t - LAT4) >> 4;
        y = (t - LAT4) & 15;
        checks++;
        if (p4 !== 8'(x * y)) begin
          failures++;
          $display("FAIL 4x4 %0d x %0d = %0d", x, y, p4);
        end
        if (x * y != 0) begin
          rel = 100.0 * (real'(x * y) - real'(p4)) / real'(x * y);
          if (rel < 0) rel = -rel;
          err_sum += rel;
          nz++;
          if (rel > err_max) err_max = rel;
        end
      end
      @(negedge clk);
    end
    $display("4x4 exhaustive: AER = %0.4f %%, MER = %0.4f %% over %0d non-zero products",
             err_sum / nz, err_max, nz);

    // 8x8 exhaustive, combinational
    err_sum = 0.0; err_max = 0.0;
    for (int x = 0; x < 256; x++) begin
      for (int y = 0; y < 256; y++) begin
        a8 = 8'(x);
        b8 = 8'(y);
        #1;
        checks++;
        if (p8 !== 16'(x * y)) begin
          failures++;
          if (failures < 10) $display("FAIL 8x8 %0d x %0d = %0d", x, y, p8);
        end
      end
    end
    $display("8x8 exhaustive done");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
