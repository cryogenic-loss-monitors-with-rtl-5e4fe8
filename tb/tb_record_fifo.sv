// tb_record_fifo -- self-checking test of the output buffer.
//
// Random writes and reads (including writes while full and bursts that fill
// the buffer) are checked against a queue model: read data order, the full
// flag, rd_valid and the level count. DEPTH is left at its default of 16.
module tb_record_fifo;
  localparam int W = 12, D = 16;

  logic clk = 1'b0, rst_n, wr_en, full, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] level;
  int checks = 0, failures = 0, n_full_wr = 0, n_empty = 0;
  logic [W-1:0] model [$];

  record_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data, .full,
                                            .rd_valid, .rd_ready, .rd_data, .level);

  always #2ns clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; rd_ready = 1'b0; wr_data = '0;
    repeat (3) @(posedge clk);
    #1ns;
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      int phase;
      phase = (i / 500) % 3;   // 0: fill, 1: drain, 2: random
      wr_en    = (phase == 0) ? ($urandom_range(0, 3) != 0) : (phase == 1) ? ($urandom_range(0, 3) == 0) : 1'($urandom());
      rd_ready = (phase == 0) ? ($urandom_range(0, 3) == 0) : (phase == 1) ? ($urandom_range(0, 3) != 0) : 1'($urandom());
      wr_data  = W'($urandom());
      #0.5ns;
      checks++;
      if (full !== (model.size() == D) || rd_valid !== (model.size() != 0) || level !== ($bits(level))'(model.size())) begin
        failures++;
        if (failures < 10) $display("i=%0d flags full=%b valid=%b level=%0d model=%0d", i, full, rd_valid, level, model.size());
      end
      if (rd_valid && model.size() != 0) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; if (failures < 10) $display("data %h expected %h", rd_data, model[0]); end
      end
      if (model.size() == D && wr_en) n_full_wr++;
      if (model.size() == 0) n_empty++;
      // Model update at the clock edge.
      begin
        bit do_w, do_r;
        do_w = wr_en && (model.size() < D);
        do_r = rd_ready && (model.size() != 0);
        if (do_r) void'(model.pop_front());
        if (do_w) model.push_back(wr_data);
      end
      @(posedge clk); #0.5ns;
    end
    checks++;
    if (n_full_wr == 0 || n_empty == 0) begin failures++; $display("coverage hole"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
