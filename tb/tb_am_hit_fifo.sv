// tb_am_hit_fifo - self-checking test of the superlayer input buffer.
//
// Writes random hit words with random read stalls and compares the output
// order with a queue model; then fills the buffer to overflow and checks the
// overflow counter, the level and that an end-of-event marker arriving on a
// full buffer replaces the newest word.
`timescale 1ns/1ps
module tb_am_hit_fifo;
  import am_pkg::*;
  localparam int DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_ready = 0;
  hit_word_t wr_data, rd_data;
  logic rd_valid;
  logic [15:0] ovf_count;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  hit_word_t model [$];
  hit_word_t exp_w;

  am_hit_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // scoreboard on every accepted read
  always @(posedge clk) if (rst_n && rd_valid && rd_ready) begin
    exp_w = model.pop_front();
    check(rd_data == exp_w, $sformatf("read order %h vs %h", rd_data, exp_w));
  end

  initial begin
    wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic, never more than DEPTH-2 words in flight
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      wr_valid = ($urandom_range(0, 1) == 1) && (model.size() < DEPTH - 2);
      wr_data  = hit_word_t'($urandom);
      wr_data.eoe = ($urandom_range(0, 7) == 0);
      rd_ready = ($urandom_range(0, 2) != 0);
      if (wr_valid) model.push_back(wr_data);
    end
    @(negedge clk); wr_valid = 0; rd_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(model.size() == 0 && !rd_valid, "drained");
    check(ovf_count == 0, "no overflow under light load");
    // overflow: DEPTH + 3 hits without reading, then a marker
    rd_ready = 0;
    for (int n = 0; n < DEPTH + 3; n++) begin
      wr_valid = 1; wr_data = hit_word_t'(n); wr_data.eoe = 0;
      if (n < DEPTH) model.push_back(wr_data);
      @(negedge clk);
    end
    wr_data = '0; wr_data.eoe = 1; @(negedge clk);
    wr_valid = 0;
    void'(model.pop_back());
    model.push_back(wr_data);
    check(level == DEPTH, "full level");
    check(ovf_count == 4, $sformatf("overflow count %0d", ovf_count));
    rd_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(model.size() == 0, "overflowed buffer drained with marker last");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
