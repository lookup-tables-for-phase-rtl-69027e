// tb_raster_sequencer: steps a 4x3 raster with 2 sub-frames at random and
// compares x, y, sf and the four tags with a model that counts pixels
// (x fastest, then y, then sub-frame) and derives the tags from the count.
module tb_raster_sequencer;
  import lutpr_pkg::*;

  localparam int NX = 4, NY = 3, NSF = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic step = 1'b0;
  logic [1:0] x, y;
  logic [0:0] sf;
  pix_tag_t tag;
  int checks = 0, failures = 0;
  int n = 0;  // pixels accepted so far
  int frames = 0;

  raster_sequencer #(.NX(NX), .NY(NY), .N_SF(NSF)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int p, ex, ey, es;
    p  = n % (NX * NY * NSF);
    ex = p % NX;
    ey = (p / NX) % NY;
    es = p / (NX * NY);
    checks++;
    if (int'(x) != ex || int'(y) != ey || int'(sf) != es ||
        tag.sosf != (ex == 0 && ey == 0) ||
        tag.eosf != (ex == NX - 1 && ey == NY - 1) ||
        tag.sof  != (p == 0) ||
        tag.eof  != (p == NX * NY * NSF - 1)) begin
      failures++;
      if (failures < 10)
        $display("n=%0d got x%0d y%0d sf%0d tag%b, expected x%0d y%0d sf%0d", n, x, y, sf, tag, ex, ey, es);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare();
    for (int i = 0; i < 2000; i++) begin
      step = ($urandom_range(2) != 0);
      @(negedge clk);
      if (step) begin
        if (n % (NX * NY * NSF) == NX * NY * NSF - 1) frames++;
        n++;
      end
      compare();
    end
    checks++;
    if (frames < 5) begin
      failures++;
      $display("too few frames: %0d", frames);
    end
    $display("frames completed: %0d", frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
