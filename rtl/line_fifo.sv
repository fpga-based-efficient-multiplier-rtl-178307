// line_fifo - one image-row buffer of the 3x3 filter.
//
// A first-in first-out buffer that is kept full: once primed, every pixel
// pushed in pushes the oldest one out, so the output stream is the input
// stream delayed by exactly `len` pushes (one image row when len is the row
// width). Three of these in cascade hold the three image rows that the
// register window reads.
//
// It is built as a circular buffer of len-1 words plus an output register:
// on a push the word written len-1 pushes ago is read into dout and the new
// pixel takes its place. Before a push, dout holds the pixel pushed len
// pushes earlier. Nothing is reset except the pointer; until len pixels
// have gone in, dout is not meaningful and the user must ignore it.
//
// The row length is a run-time input so that one build serves images of
// any width up to MAX_LEN; MAX_LEN defaults to 640, the widest image of the
// FVC2004 fingerprint databases. Changing len takes effect on the next
// frame: pulse clear (it may come with the first push of the frame, which
// is then written to word 0) to restart the pointer.
//
// Interface: clk, rst_n (async, active low), clear (sync pointer reset),
// len (row length, 3..MAX_LEN, checked by an assertion on every push),
// push, din -> dout. One push per clock.
module line_fifo #(
  parameter int unsigned DATA_W  = 8,
  parameter int unsigned MAX_LEN = 640,
  localparam int unsigned LEN_W  = $clog2(MAX_LEN + 1),
  localparam int unsigned PTR_W  = $clog2(MAX_LEN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [LEN_W-1:0]  len,
  input  logic              push,
  input  logic [DATA_W-1:0] din,
  output logic [DATA_W-1:0] dout
);

  logic [DATA_W-1:0] mem [MAX_LEN-1];
  logic [PTR_W-1:0]  ptr;
  logic [PTR_W-1:0]  wptr;
  logic [PTR_W-1:0]  last;

  assign last = PTR_W'(len - LEN_W'(2));
  assign wptr = clear ? '0 : ptr;    // a clearing push uses word 0

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (push) begin
      ptr <= (wptr >= last) ? '0 : wptr + PTR_W'(1);
    end else if (clear) begin
      ptr <= '0;
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (len >= LEN_W'(3) && len <= LEN_W'(MAX_LEN)))
    else $error("line_fifo: len %0d out of range", len);

  always_ff @(posedge clk) begin
    if (push) begin
      dout      <= mem[wptr];
      mem[wptr] <= din;
    end
  end

endmodule
