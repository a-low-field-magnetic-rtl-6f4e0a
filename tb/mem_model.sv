// mem_model: behavioural model of the external memory behind its controller,
// for testbenches only. A request is accepted when req_valid and req_ready
// are both high; req_ready drops at random in STALL_PCT percent of cycles.
// Writes store the word; reads return it in order LAT cycles after
// acceptance with rsp_valid. Storage is a sparse associative array, so the
// full address space can be modelled. Unwritten words read as 0.
`timescale 1ns/1ps
module mem_model #(
  parameter int AW        = 26,
  parameter int LAT       = 6,
  parameter int STALL_PCT = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [31:0]   req_wdata,
  output logic          rsp_valid,
  output logic [31:0]   rsp_rdata
);
  logic [31:0] mem [longint];
  logic [31:0] pipe_d [LAT];
  logic        pipe_v [LAT];
  int          writes = 0, reads = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      for (int k = 0; k < LAT; k++) begin pipe_v[k] <= 1'b0; pipe_d[k] <= '0; end
    end else begin
      req_ready <= $urandom_range(0, 99) >= STALL_PCT;
      pipe_v[0] <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[longint'(req_addr)] = req_wdata;
          writes++;
        end else begin
          pipe_v[0] <= 1'b1;
          pipe_d[0] <= mem.exists(longint'(req_addr)) ? mem[longint'(req_addr)] : 32'd0;
          reads++;
        end
      end
      for (int k = 1; k < LAT; k++) begin
        pipe_v[k] <= pipe_v[k-1];
        pipe_d[k] <= pipe_d[k-1];
      end
    end
  end
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_rdata = pipe_d[LAT-1];
endmodule
