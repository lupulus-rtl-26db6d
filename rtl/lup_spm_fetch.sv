// lup_spm_fetch: PE scratch-pad memory (SPM) fetch unit.
//
// Programmed with a two-level loop (PEs, 32-bit words per PE), it reads the
// weights contiguously from external memory starting at ext_base, four bytes
// per request, and writes word w of PE first_pe + p into SPM word
// dst_word + w of that PE (PEs numbered row-major over the grid). Requests run
// ahead of in-order responses; a second loop counter follows the responses.
// done pulses after the last word has been written. The configuration is
// copied at start, so the next one may be loaded while the unit runs.
// The loop programming follows the published description of the fetch units;
// its shape, the contiguous weight layout and the ports are this design's.
module lup_spm_fetch
  import lup_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  spf_cfg_t           cfg_in,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               req_valid,
  input  logic               req_ready,
  output logic [EXT_AW-1:0]  req_addr,
  input  logic               resp_valid,
  input  logic [EXT_DW-1:0]  resp_data,
  // SPM write bus
  output logic               spm_we,
  output logic [7:0]         spm_pe,
  output logic [2:0]         spm_waddr,
  output logic [EXT_DW-1:0]  spm_wdata
);

  spf_cfg_t cfg;   // copy taken at start

  logic        running, req_done;
  logic [7:0]  qo, ro;
  logic [3:0]  qi, ri;
  logic        q_last, r_last;
  logic [EXT_AW-1:0] addr_q;

  lup_loop2 #(.WO(8), .WI(4)) u_req (
    .clk, .rst_n, .init(start), .step(req_valid && req_ready),
    .n_outer(cfg.n_pe), .n_inner(cfg.words_per_pe),
    .outer(qo), .inner(qi), .last(q_last));

  lup_loop2 #(.WO(8), .WI(4)) u_resp (
    .clk, .rst_n, .init(start), .step(running && resp_valid),
    .n_outer(cfg.n_pe), .n_inner(cfg.words_per_pe),
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
      addr_q   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running  <= 1'b1;
        req_done <= 1'b0;
        addr_q   <= cfg_in.ext_base;
      end else if (running) begin
        if (req_valid && req_ready) begin
          addr_q <= addr_q + EXT_AW'(4);
          if (q_last) req_done <= 1'b1;
        end
        if (resp_valid && r_last) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy      = running;
  assign req_valid = running && !req_done;
  assign req_addr  = addr_q;
  assign spm_we    = running && resp_valid;
  assign spm_pe    = cfg.first_pe + ro;
  assign spm_waddr = cfg.dst_word + 3'(ri);
  assign spm_wdata = resp_data;

endmodule
