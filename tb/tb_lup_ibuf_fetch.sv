// tb_lup_ibuf_fetch: unit test of the input buffer fetch unit: 5 rows of 3 words, row stride 40 bytes,
// written to buffers 2..6 from word 4 on.
// A behavioural memory answers in order with random request back-pressure.
// Every write is checked against the memory word the loop rule names, each
// destination must be written exactly once, and done must pulse once, after
// the last write. The run is repeated to check that the unit restarts.
`timescale 1ns/1ps
module tb_lup_ibuf_fetch;
  import lup_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  ibf_cfg_t cfg_in; logic start, busy, done;
  logic req_valid, req_ready, resp_valid; logic [31:0] req_addr, resp_data;
  logic ib_we; logic [3:0] ib_row; logic [5:0] ib_word; logic [31:0] ib_wdata;
  lup_ibuf_fetch dut (.*);
  logic bv, br, bresp; logic [31:0] bd;
  tb_lup_extmem #(.BYTES(4096), .LAT(2)) u_mem (
    .clk, .a_req_valid(req_valid), .a_req_ready(req_ready), .a_req_addr(req_addr),
    .a_resp_valid(resp_valid), .a_resp_data(resp_data),
    .b_req_valid(1'b0), .b_req_ready(br), .b_req_addr(32'h0), .b_resp_valid(bresp), .b_resp_data(bd));

  int checks = 0, failures = 0;
  int nwr [16][64];
  int n_done = 0, n_writes = 0;
  bit after_done = 0;

  function automatic logic [31:0] word_at(int a);
    return {u_mem.mem[a+3], u_mem.mem[a+2], u_mem.mem[a+1], u_mem.mem[a]};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (ib_we) begin
      n_writes++;
      if (int'(ib_row) < 16 && int'(ib_word) < 64) nwr[ib_row][ib_word]++;
      if (n_done > 0) after_done = 1;
      for (int o = 0; o < 5; o++) for (int i = 0; i < 3; i++)
        if (int'(ib_row) == 2 + o && int'(ib_word) == 4 + i) begin
          checks++;
          if (ib_wdata != word_at(32'h100 + o*40 + 4*i)) begin
            failures++;
            $display("FAIL write %0d/%0d data %h expected %h", ib_row, ib_word, ib_wdata, word_at(32'h100 + o*40 + 4*i));
          end
        end
    end
  end

  initial begin
    cfg_in = '0; start = 0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = 8'($urandom());
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int a = 0; a < 16; a++) for (int b = 0; b < 64; b++) nwr[a][b] = 0;
      n_done = 0; n_writes = 0; after_done = 0;
      cfg_in.ext_base = 32'h100; cfg_in.row_stride = 16'd40; cfg_in.n_rows = 5; cfg_in.words_per_row = 3; cfg_in.first_row = 2; cfg_in.dst_word = 4;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cfg_in = '0;
      repeat (200) @(negedge clk);
      checks++; if (n_done != 1) begin failures++; $display("FAIL done pulsed %0d times", n_done); end
      checks++; if (n_writes != 5*3) begin failures++; $display("FAIL %0d writes", n_writes); end
      checks++; if (after_done) begin failures++; $display("FAIL write after done"); end
      checks++; if (busy) begin failures++; $display("FAIL still busy"); end
      for (int o = 0; o < 5; o++) for (int i = 0; i < 3; i++) begin
        checks++;
        if (nwr[2 + o][4 + i] != 1) begin failures++; $display("FAIL destination %0d/%0d written %0d times", 2 + o, 4 + i, nwr[2 + o][4 + i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
