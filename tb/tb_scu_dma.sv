// tb_scu_dma: self-checking test of the SCU block-strided-move DMA engine.
//
// A send engine and a receive engine are each given a chain of two
// instructions (3 words x 2 blocks with a 0x100-byte stride, then a 2-word
// block marked last) plus an empty instruction in between that must be
// skipped. A memory model answers after a random delay with data derived from
// the address. The test checks every address, every word handed to the send
// register, every word written by the receive engine, the done pulse, and that
// the engine goes idle.
module tb_scu_dma;
  import qcdoc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // two engines, index 0 send, 1 receive
  logic        desc_we [2], start [2], busy [2], done [2];
  logic [2:0]  desc_waddr [2], start_idx [2];
  dma_desc_t   desc_wdata [2];
  logic        mem_valid [2], mem_we [2], mem_ack [2];
  logic [31:0] mem_addr [2];
  logic [63:0] mem_wdata [2], mem_rdata [2];
  logic [63:0] out_word, in_word;
  logic        out_valid, out_ready, in_valid, in_ready;

  scu_dma #(.IS_SEND(1'b1)) u_snd (
    .clk, .rst_n, .desc_we(desc_we[0]), .desc_waddr(desc_waddr[0]), .desc_wdata(desc_wdata[0]),
    .start(start[0]), .start_idx(start_idx[0]), .busy(busy[0]), .done(done[0]),
    .mem_valid(mem_valid[0]), .mem_we(mem_we[0]), .mem_addr(mem_addr[0]), .mem_wdata(mem_wdata[0]),
    .mem_ack(mem_ack[0]), .mem_rdata(mem_rdata[0]),
    .out_word, .out_valid, .out_ready, .in_word('0), .in_valid(1'b0), .in_ready());
  scu_dma #(.IS_SEND(1'b0)) u_rec (
    .clk, .rst_n, .desc_we(desc_we[1]), .desc_waddr(desc_waddr[1]), .desc_wdata(desc_wdata[1]),
    .start(start[1]), .start_idx(start_idx[1]), .busy(busy[1]), .done(done[1]),
    .mem_valid(mem_valid[1]), .mem_we(mem_we[1]), .mem_addr(mem_addr[1]), .mem_wdata(mem_wdata[1]),
    .mem_ack(mem_ack[1]), .mem_rdata(mem_rdata[1]),
    .out_word(), .out_valid(), .out_ready(1'b0), .in_word, .in_valid, .in_ready);

  function automatic logic [63:0] pattern(input logic [31:0] a);
    return {a ^ 32'hA5A5_0000, ~a};
  endfunction

  // memory models: random latency, record every access
  logic [31:0] acc_addr [2][$];
  logic [63:0] acc_data [2][$];
  int          n_done [2];
  for (genvar e = 0; e < 2; e++) begin : g_mem
    int wait_cnt;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        mem_ack[e] <= 1'b0; wait_cnt <= 0; n_done[e] <= 0;
      end else begin
        if (done[e]) n_done[e] <= n_done[e] + 1;
        mem_ack[e] <= 1'b0;
        if (mem_valid[e] && !mem_ack[e]) begin
          if (wait_cnt == 0) begin
            mem_ack[e]   <= 1'b1;
            mem_rdata[e] <= pattern(mem_addr[e]);
            acc_addr[e].push_back(mem_addr[e]);
            acc_data[e].push_back(mem_wdata[e]);
            wait_cnt <= int'($urandom_range(0, 2));
          end else wait_cnt <= wait_cnt - 1;
        end
      end
    end
  end

  // send side consumer with random ready; receive side producer
  logic [63:0] sent [$];
  logic [63:0] fed [$];
  always_ff @(posedge clk) begin
    out_ready <= 1'($urandom_range(0, 1));
    if (out_valid && out_ready) sent.push_back(out_word);
  end
  int feed_n = 0;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0; in_word <= '0;
    end else if (!in_valid || in_ready) begin
      if (in_valid) fed.push_back(in_word);
      in_valid <= feed_n < 8;
      in_word  <= 64'h1111_0000_0000_0000 + 64'(feed_n);
      if (feed_n < 8) feed_n <= feed_n + 1;
    end
  end

  function automatic dma_desc_t mk(input logic [31:0] a, input int bl, input int st, input int nb,
                                   input bit last);
    dma_desc_t d;
    d = '0;
    d.addr = a; d.blk_len = 16'(bl); d.stride = 32'(st); d.nblk = 16'(nb); d.last = last;
    return d;
  endfunction

  logic [31:0] exp_addr [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      desc_we[e] = 0; start[e] = 0; desc_waddr[e] = 0; start_idx[e] = 0; desc_wdata[e] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int e = 0; e < 2; e++) begin
      for (int i = 0; i < 3; i++) begin
        @(negedge clk);
        desc_we[e] = 1'b1;
        desc_waddr[e] = 3'(2 + i);
        desc_wdata[e] = i == 0 ? mk(32'h0001_0000 + 32'(e) * 32'h0010_0000, 3, 32'h100, 2, 1'b0) :
                        i == 1 ? mk(32'h0, 0, 0, 5, 1'b0) :
                                 mk(32'h0002_0000 + 32'(e) * 32'h0010_0000, 2, 0, 1, 1'b1);
      end
      @(negedge clk) desc_we[e] = 1'b0;
    end
    @(negedge clk);
    start[0] = 1'b1; start_idx[0] = 3'd2;
    start[1] = 1'b1; start_idx[1] = 3'd2;
    @(negedge clk);
    start[0] = 1'b0; start[1] = 1'b0;
    check(busy[0] && busy[1], "engines busy after start");
    wait (!busy[0] && !busy[1]);
    repeat (4) @(posedge clk);
    for (int e = 0; e < 2; e++) begin
      logic [31:0] b;
      b = 32'(e) * 32'h0010_0000;
      exp_addr.delete();
      for (int k = 0; k < 2; k++)
        for (int j = 0; j < 3; j++) exp_addr.push_back(b + 32'h0001_0000 + 32'(k) * 32'h100 + 32'(j) * 8);
      for (int j = 0; j < 2; j++) exp_addr.push_back(b + 32'h0002_0000 + 32'(j) * 8);
      check(acc_addr[e].size() == 8, $sformatf("engine %0d: 8 memory accesses, got %0d", e, acc_addr[e].size()));
      for (int i = 0; i < 8 && i < acc_addr[e].size(); i++)
        check(acc_addr[e][i] == exp_addr[i], $sformatf("engine %0d access %0d address %h", e, i, acc_addr[e][i]));
      check(n_done[e] == 1, $sformatf("engine %0d: one done pulse", e));
    end
    check(sent.size() == 8, "send engine handed 8 words to the send register");
    for (int i = 0; i < 8 && i < sent.size(); i++)
      check(sent[i] == pattern(exp_addr[0] - exp_addr[0] + (i < 6 ? 32'h0001_0000 + 32'(i / 3) * 32'h100 + 32'(i % 3) * 8
                                                                  : 32'h0002_0000 + 32'(i - 6) * 8)),
            $sformatf("send word %0d", i));
    for (int i = 0; i < 8 && i < acc_data[1].size(); i++)
      check(acc_data[1][i] == 64'h1111_0000_0000_0000 + 64'(i), $sformatf("receive write %0d data", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
