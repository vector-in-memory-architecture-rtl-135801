// tb_vima_fill_buffer: writes the 8 beats of a vector in a shuffled order, checks that
// `full` rises only with the last beat, reads every beat back (one-cycle latency) and
// compares it with the written data, then checks that `clear` drops `full`.
module tb_vima_fill_buffer;
  localparam int unsigned BW = 256;
  localparam int unsigned NB = 8;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_en = 0, full;
  logic [2:0] wr_beat = 0, rd_beat = 0;
  logic [BW-1:0] wr_data = 0, rd_data;
  logic [BW-1:0] ref_d [NB];
  int checks = 0, failures = 0;
  int order [NB] = '{5, 2, 7, 0, 3, 6, 1, 4};

  vima_fill_buffer #(.BEAT_W(BW), .BEATS(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < NB; i++) begin
        ref_d[i] = {8{$urandom}};
      end
      for (int i = 0; i < NB; i++) begin
        @(negedge clk);
        chk(full == 0, "full too early");
        wr_en = 1; wr_beat = 3'(order[i]); wr_data = ref_d[order[i]];
      end
      @(negedge clk);
      wr_en = 0;
      chk(full == 1, "full not set");
      for (int i = 0; i < NB; i++) begin
        rd_en = 1; rd_beat = 3'(i);
        @(negedge clk);
        chk(rd_data == ref_d[i], $sformatf("beat %0d data", i));
      end
      rd_en = 0;
      clear = 1;
      @(negedge clk);
      clear = 0;
      chk(full == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
