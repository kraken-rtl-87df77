// tb_mem_model: behavioural memory for testbenches, answering one TCDM-style
// port (gnt in the request cycle, rvalid/rdata one cycle later). With
// RAND_GNT set, grants are withheld at random to exercise stalls. The
// contents are a sparse associative array of 32-bit words; unwritten words
// read as zero.
module tb_mem_model
  import kraken_pkg::*;
#(
  parameter bit RAND_GNT = 1'b1
) (
  input  logic     clk_i,
  input  mem_req_t req_i,
  output mem_rsp_t rsp_o
);
  logic [31:0] mem [int unsigned];
  logic gnt_en = 1'b1;
  int unsigned writes = 0, reads = 0;

  always @(negedge clk_i) gnt_en <= RAND_GNT ? 1'($urandom % 4 != 0) : 1'b1;
  assign rsp_o.gnt = req_i.req && gnt_en;

  initial begin rsp_o.rvalid = 1'b0; rsp_o.rdata = '0; end

  always @(posedge clk_i) begin
    rsp_o.rvalid <= rsp_o.gnt;
    if (rsp_o.gnt) begin
      if (req_i.we) begin
        mem[req_i.addr >> 2] = req_i.wdata;
        writes++;
      end else begin
        rsp_o.rdata <= mem.exists(req_i.addr >> 2) ? mem[req_i.addr >> 2] : 32'h0;
        reads++;
      end
    end
  end

  function automatic logic [31:0] peek(int unsigned byte_addr);
    return mem.exists(byte_addr >> 2) ? mem[byte_addr >> 2] : 32'h0;
  endfunction
  function automatic void poke(int unsigned byte_addr, logic [31:0] v);
    mem[byte_addr >> 2] = v;
  endfunction
endmodule
