// tb_lup_extmem: behavioural external memory for the testbenches.
//
// Byte array `mem` (filled by the testbench through a hierarchical reference)
// behind two independent 32-bit read ports. Each port accepts a request when
// req_ready is high (ready is random, about three cycles in four, so that the
// requesters see back-pressure) and answers in request order, LAT cycles
// later, with the little-endian word at the (word-aligned) byte address.
module tb_lup_extmem #(
  parameter int BYTES = 8192,
  parameter int LAT   = 3
) (
  input  logic        clk,
  input  logic        a_req_valid,
  output logic        a_req_ready,
  input  logic [31:0] a_req_addr,
  output logic        a_resp_valid,
  output logic [31:0] a_resp_data,
  input  logic        b_req_valid,
  output logic        b_req_ready,
  input  logic [31:0] b_req_addr,
  output logic        b_resp_valid,
  output logic [31:0] b_resp_data
);
  logic [7:0] mem [BYTES];
  int unsigned a_addr_q[$], a_time_q[$], b_addr_q[$], b_time_q[$];
  longint unsigned cyc = 0;

  initial begin
    for (int i = 0; i < BYTES; i++) mem[i] = 8'h00;
    a_req_ready = 1'b0; b_req_ready = 1'b0;
    a_resp_valid = 1'b0; b_resp_valid = 1'b0;
    a_resp_data = '0; b_resp_data = '0;
  end

  function automatic logic [31:0] rd(int unsigned a);
    int unsigned w = (a & ~32'd3) % BYTES;
    return {mem[w+3], mem[w+2], mem[w+1], mem[w]};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (a_req_valid && a_req_ready) begin a_addr_q.push_back(a_req_addr); a_time_q.push_back(int'(cyc) + LAT); end
    if (b_req_valid && b_req_ready) begin b_addr_q.push_back(b_req_addr); b_time_q.push_back(int'(cyc) + LAT); end
    a_req_ready <= ($urandom_range(0, 3) != 0);
    b_req_ready <= ($urandom_range(0, 3) != 0);
    if (a_time_q.size() > 0 && a_time_q[0] <= int'(cyc)) begin
      a_resp_valid <= 1'b1; a_resp_data <= rd(a_addr_q[0]);
      void'(a_addr_q.pop_front()); void'(a_time_q.pop_front());
    end else a_resp_valid <= 1'b0;
    if (b_time_q.size() > 0 && b_time_q[0] <= int'(cyc)) begin
      b_resp_valid <= 1'b1; b_resp_data <= rd(b_addr_q[0]);
      void'(b_addr_q.pop_front()); void'(b_time_q.pop_front());
    end else b_resp_valid <= 1'b0;
  end
endmodule
