// tb_mem_model: behavioural model of a line-addressed memory device, used
// for the PCM main memory and for the DRAM of the buffer cache. Sparse
// storage; never-written lines read as zero. A read is answered RD_LAT
// cycles after it is accepted; a write keeps the device busy (ready low) for
// WR_LAT cycles, modelling the slow PCM write; with WR_RESP set a write is
// also answered by resp_valid when done (line channel of the controller).
// Counts reads and writes.
module tb_mem_model #(
  parameter int AW     = 26,
  parameter int RD_LAT = 50,
  parameter int WR_LAT = 1000,
  parameter bit WR_RESP = 1'b0
) (
  input  logic           clk,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic           req_we,
  input  logic [AW-1:0]  req_addr,
  input  logic [511:0]   req_data,
  output logic           resp_valid,
  output logic [511:0]   resp_data
);
  logic [511:0] mem [logic [AW-1:0]];
  int reads, writes;
  int cnt;
  logic rd_pend, wr_pend;
  logic [511:0] rd_data;
  initial begin
    req_ready = 1'b1; resp_valid = 1'b0; resp_data = '0; cnt = 0; rd_pend = 1'b0; wr_pend = 1'b0;
    reads = 0; writes = 0;
  end
  function automatic logic [511:0] peek(logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (cnt > 0) begin
      cnt <= cnt - 1;
      if (cnt == 1) begin
        req_ready <= 1'b1;
        if (rd_pend) begin
          resp_valid <= 1'b1;
          resp_data  <= rd_data;
          rd_pend    <= 1'b0;
        end
        if (wr_pend) begin
          resp_valid <= 1'b1;
          wr_pend    <= 1'b0;
        end
      end
    end else if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr] = req_data;
        writes++;
        cnt <= WR_LAT;
        wr_pend <= WR_RESP;
      end else begin
        rd_data = peek(req_addr);
        rd_pend <= 1'b1;
        reads++;
        cnt <= RD_LAT;
      end
      req_ready <= 1'b0;
    end
  end
endmodule
