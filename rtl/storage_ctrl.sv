// storage_ctrl: capture buffer between the receiver and the Ethernet sender.
//
// The receiver delivers a set of NCH I/Q words every output sample; the
// Ethernet sender drains words in frames and may stall. To lose nothing, the
// data is parked in a large external memory used as a ring buffer:
//   1. Capture window: 'acq_start' opens a window of 'acq_len' sample sets.
//      Each set is latched and serialised, one 32-bit word {I, Q} per cycle,
//      channel 0 first, into an input FIFO. A set that arrives while the
//      previous one is still being serialised is dropped and counted in
//      'ovf_count' (cannot happen at the design's rates).
//   2. Memory writes: input FIFO words are written at the ring's write
//      pointer while the ring is not full. Writes have priority over reads.
//   3. Memory reads: while the ring holds data and the output FIFO has room
//      for every read in flight, a read is issued at the read pointer; the
//      returned words enter the output FIFO.
//   4. Output stream: valid/ready words; 'out_last' marks the end of each
//      frame of FRAME_WORDS words and the last word of an acquisition.
// Memory port (stands in for a memory controller front end): a request is
// accepted in a cycle with mem_req_valid & mem_req_ready; read data returns
// in order, any number of cycles later, with mem_rsp_valid.
// The ring-buffer scheme, the word format and the port are this design's
// choices; the design specifies only that processed data is held in external
// memory so that the transfer to the PC is lossless.
// Lint note: the assertions are disabled during reset (disable iff), so a
// linter sees rst_n used both as the asynchronous reset and in a clocked
// expression; the assertions are not part of the circuit.
module storage_ctrl
  import mri_pkg::*;
#(
  parameter int MEM_AW      = 26,
  parameter int FIFO_DEPTH  = 64,
  parameter int FRAME_WORDS = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  // capture control
  input  logic              acq_start,
  input  logic [31:0]       acq_len,
  output logic              acq_busy,
  output logic [31:0]       ovf_count,
  // receiver samples
  input  logic              in_valid,
  input  iq_t [NCH-1:0]     in_iq,
  // memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [MEM_AW-1:0] mem_req_addr,
  output logic [31:0]       mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [31:0]       mem_rsp_rdata,
  // output stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [31:0]       out_data,
  output logic              out_last
);
  localparam int CW = $clog2(NCH + 1);
  localparam int FW = $clog2(FIFO_DEPTH);
  localparam int KW = $clog2(FRAME_WORDS);

  // ---------------- capture and serialisation ----------------
  logic [31:0]        remaining, tot_left;
  iq_t [NCH-1:0]      hold;
  logic [CW-1:0]      ser_left;
  logic               in_push, in_pop, in_full, in_empty;
  logic [31:0]        in_word;
  logic [FW:0]        in_count_unused;
  logic               accept_set;

  assign accept_set = in_valid && remaining != 0 && ser_left == 0;
  assign in_push    = ser_left != 0 && !in_full;
  assign in_word    = hold[NCH - int'(ser_left)];
  assign acq_busy   = remaining != 0 || ser_left != 0;

  logic out_pop;
  assign out_pop = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      tot_left  <= '0;
      hold      <= '0;
      ser_left  <= '0;
      ovf_count <= '0;
    end else begin
      if (acq_start) remaining <= acq_len;
      else if (in_valid && remaining != 0) remaining <= remaining - 1;
      if (accept_set) begin
        hold     <= in_iq;
        ser_left <= CW'(NCH);
      end else if (in_push) begin
        ser_left <= ser_left - 1'b1;
      end
      if (in_valid && remaining != 0 && ser_left != 0) ovf_count <= ovf_count + 1;
      tot_left <= tot_left + (accept_set ? 32'(NCH) : 32'd0) - (out_pop ? 32'd1 : 32'd0);
    end
  end

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .push(in_push), .wdata(in_word), .pop(in_pop), .rdata(mem_req_wdata),
    .full(in_full), .empty(in_empty), .count(in_count_unused));

  // ---------------- ring buffer in external memory ----------------
  logic [MEM_AW-1:0] wptr, rptr;
  logic [MEM_AW:0]   stored;        // words written and not yet read out
  logic [FW:0]       pending;       // reads in flight
  logic [FW:0]       out_count;
  logic              out_full_unused, out_empty;
  logic              wr_req, rd_req, wr_go, rd_go;

  assign wr_req = !in_empty && stored != (MEM_AW+1)'(1) << MEM_AW;
  assign rd_req = !wr_req && stored != 0 &&
                  ((FW+1)'(out_count) + pending) < (FW+1)'(FIFO_DEPTH);
  assign mem_req_valid = wr_req || rd_req;
  assign mem_req_we    = wr_req;
  assign mem_req_addr  = wr_req ? wptr : rptr;
  assign wr_go  = wr_req && mem_req_ready;
  assign rd_go  = rd_req && mem_req_ready;
  assign in_pop = wr_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr    <= '0;
      rptr    <= '0;
      stored  <= '0;
      pending <= '0;
    end else begin
      if (wr_go) wptr <= wptr + 1'b1;
      if (rd_go) rptr <= rptr + 1'b1;
      stored  <= stored + (MEM_AW+1)'(wr_go) - (MEM_AW+1)'(rd_go);
      pending <= pending + (FW+1)'(rd_go) - (FW+1)'(mem_rsp_valid);
    end
  end

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .push(mem_rsp_valid), .wdata(mem_rsp_rdata), .pop(out_pop), .rdata(out_data),
    .full(out_full_unused), .empty(out_empty), .count(out_count));

  // ---------------- output framing ----------------
  logic [KW-1:0] frame_cnt;
  assign out_valid = !out_empty;
  assign out_last  = frame_cnt == KW'(FRAME_WORDS - 1) || (tot_left == 1 && remaining == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frame_cnt <= '0;
    else if (out_pop) frame_cnt <= out_last ? '0 : frame_cnt + 1'b1;
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> pending != 0);
endmodule
