// tb_binary_quantiser: sends random diffraction-field samples (including
// zero and the most negative value) through the quantiser with random gaps
// and output stalls, and checks each hologram bit against Re(H) < 0, the tag,
// the order, and the 1-cycle latency at full rate.
module tb_binary_quantiser;
  import lutpr_pkg::*;

  localparam int H_W = 12;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic h_valid = 1'b0, h_ready;
  logic signed [H_W-1:0] h_re = '0;
  pix_tag_t h_tag = '0;
  logic q_valid, q_ready = 1'b0, q_bit;
  pix_tag_t q_tag;
  int checks = 0, failures = 0;
  int vals [$];
  pix_tag_t tags [$];
  int cyc [$];
  int cycle = 0, zeros = 0, ones = 0, stalls = 0, ties = 0;
  bit timing_phase = 0;

  binary_quantiser #(.H_W(H_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && h_valid && h_ready) begin
      vals.push_back(int'(h_re));
      tags.push_back(h_tag);
      cyc.push_back(cycle);
    end
    if (rst_n && q_valid && !q_ready) stalls++;
    if (rst_n && q_valid && q_ready) begin
      int v, c0;
      pix_tag_t tg;
      v = vals.pop_front();
      tg = tags.pop_front();
      c0 = cyc.pop_front();
      checks++;
      if (q_bit != (v < 0) || q_tag != tg) begin
        failures++;
        if (failures < 10) $display("H=%0d gave bit %0b tag %b (exp %b)", v, q_bit, q_tag, tg);
      end
      if (timing_phase) begin
        checks++;
        if (cycle - c0 != 1) begin
          failures++;
          $display("latency %0d, expected 1", cycle - c0);
        end
      end
      if (v == 0) ties++;
      if (q_bit) ones++; else zeros++;
    end
  end

  function automatic logic signed [H_W-1:0] pick();
    case ($urandom_range(9))
      0: return '0;
      1: return {1'b1, {(H_W-1){1'b0}}};
      2: return -1;
      3: return 1;
      default: return H_W'($urandom);
    endcase
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      if (!h_valid || h_ready) begin
        h_valid = ($urandom_range(3) != 0);
        h_re = pick();
        h_tag = pix_tag_t'($urandom);
      end
      q_ready = ($urandom_range(2) != 0);
      @(negedge clk);
    end
    h_valid = 1'b0;
    q_ready = 1'b1;
    repeat (3) @(negedge clk);
    timing_phase = 1;
    for (int i = 0; i < 100; i++) begin
      h_valid = 1'b1;
      h_re = pick();
      @(negedge clk);
    end
    h_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (ties == 0 || zeros == 0 || ones == 0 || stalls == 0 || vals.size() != 0) begin
      failures++;
      $display("coverage: ties %0d zeros %0d ones %0d stalls %0d", ties, zeros, ones, stalls);
    end
    $display("bits: %0d zero, %0d one; ties %0d; stall cycles %0d", zeros, ones, ties, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
