// lup_ibuf_fetch: input buffer fetch unit.
//
// Programmed with a two-level loop (rows of the feature map, 32-bit words of a
// row), it reads from external memory
//     byte address ext_base + r*row_stride + 4*w,  r < n_rows, w < words_per_row
// and writes each returned word into input buffer first_row + r, word
// dst_word + w. Requests (valid/ready, one per accepted cycle) run ahead of
// responses; the external memory must answer in request order, so a second
// copy of the loop counter follows the responses and names their destination.
// done pulses after the last word has been written. The configuration is
// copied at start, so the next one may be loaded while the unit runs.
// The paper says the fetch units are "programmed with a loop structure,
// similar to Alg. 1"; the two-level loop and the request/response port are
// this design's choices.
module lup_ibuf_fetch
  import lup_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  ibf_cfg_t           cfg_in,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // external memory read port
  output logic               req_valid,
  input  logic               req_ready,
  output logic [EXT_AW-1:0]  req_addr,
  input  logic               resp_valid,
  input  logic [EXT_DW-1:0]  resp_data,
  // input buffer write port
  output logic               ib_we,
  output logic [3:0]         ib_row,
  output logic [5:0]         ib_word,
  output logic [EXT_DW-1:0]  ib_wdata
);

  ibf_cfg_t cfg;   // copy taken at start

  logic       running, req_done;
  logic [4:0] qo, ro;
  logic [6:0] qi, ri;
  logic       q_last, r_last;

  lup_loop2 #(.WO(5), .WI(7)) u_req (
    .clk, .rst_n, .init(start), .step(req_valid && req_ready),
    .n_outer(cfg.n_rows), .n_inner(cfg.words_per_row),
    .outer(qo), .inner(qi), .last(q_last));

  lup_loop2 #(.WO(5), .WI(7)) u_resp (
    .clk, .rst_n, .init(start), .step(running && resp_valid),
    .n_outer(cfg.n_rows), .n_inner(cfg.words_per_row),
    .outer(ro), .inner(ri), .last(r_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg <= '0;
    else if (start) cfg <= cfg_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      req_done <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running  <= 1'b1;
        req_done <= 1'b0;
      end else if (running) begin
        if (req_valid && req_ready && q_last) req_done <= 1'b1;
        if (resp_valid && r_last) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy      = running;
  assign req_valid = running && !req_done;
  assign req_addr  = cfg.ext_base + EXT_AW'(qo) * EXT_AW'(cfg.row_stride) + EXT_AW'({qi, 2'b00});
  assign ib_we     = running && resp_valid;
  assign ib_row    = cfg.first_row + 4'(ro);
  assign ib_word   = cfg.dst_word + 6'(ri);
  assign ib_wdata  = resp_data;

endmodule
