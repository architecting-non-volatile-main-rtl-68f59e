// line_if: one-outstanding request/response channel carrying 64-byte cache
// lines between the stages of the memory controller (LLC side, DRAM buffer
// cache, write buffer, row buffers). A request is held on req_valid with
// stable fields until req_ready; every request, read or write, is answered by
// exactly one resp_valid pulse (resp_data meaningful for reads). The master
// issues no new request before the response of the previous one.
interface line_if #(
  parameter int AW = 26,     // line address width (4 GB / 64 B)
  parameter int DW = 512
) (input logic clk, input logic rst_n);
  logic          req_valid;
  logic          req_ready;
  logic          req_we;
  logic [AW-1:0] req_addr;
  logic [DW-1:0] req_data;
  logic          resp_valid;
  logic [DW-1:0] resp_data;

  modport master (output req_valid, req_we, req_addr, req_data,
                  input  req_ready, resp_valid, resp_data);
  modport slave  (input  req_valid, req_we, req_addr, req_data,
                  output req_ready, resp_valid, resp_data);

  // Handshake rules: a pending request stays up and stable.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req_addr) && $stable(req_we));
endinterface
