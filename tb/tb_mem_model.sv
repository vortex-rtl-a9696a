// tb_mem_model: behavioural main memory behind the core's memory port.
//
// Not synthesizable. Stores 32-bit words in an associative array (unwritten
// words read as zero). A request is accepted when ready is high (ready drops
// while one is in service); LATENCY cycles later mem_rsp_valid pulses for one
// cycle. A read returns the 16-byte line holding the address, word 0 in the
// low bits; a write stores one word under its byte enables and is
// acknowledged the same way. Testbenches load programs and inspect results
// with the write_word/read_word functions.
module tb_mem_model #(
  parameter int LATENCY = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_rw,
  input  logic [31:0]  req_addr,
  input  logic [31:0]  req_wdata,
  input  logic [3:0]   req_byteen,
  output logic         rsp_valid,
  output logic [127:0] rsp_data
);

  logic [31:0] mem [logic [29:0]];
  int          count;
  logic        pending;
  logic [31:0] paddr;
  int          reads, writes;

  function automatic void write_word(logic [31:0] addr, logic [31:0] data);
    mem[addr[31:2]] = data;
  endfunction
  function automatic logic [31:0] read_word(logic [31:0] addr);
    return mem.exists(addr[31:2]) ? mem[addr[31:2]] : 32'd0;
  endfunction

  assign req_ready = !pending;

  always_ff @(posedge clk) begin
    if (rst) begin
      pending   <= 1'b0;
      rsp_valid <= 1'b0;
      count     <= 0;
      reads     <= 0;
      writes    <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        pending <= 1'b1;
        paddr   <= req_addr;
        count   <= LATENCY;
        if (req_rw) begin
          logic [31:0] w;
          w = read_word(req_addr);
          for (int k = 0; k < 4; k++) if (req_byteen[k]) w[8*k +: 8] = req_wdata[8*k +: 8];
          write_word(req_addr, w);
          writes <= writes + 1;
        end else begin
          reads <= reads + 1;
        end
      end else if (pending) begin
        if (count <= 1) begin
          pending   <= 1'b0;
          rsp_valid <= 1'b1;
          for (int k = 0; k < 4; k++)
            rsp_data[32*k +: 32] <= read_word({paddr[31:4], 4'b0} + 32'(4 * k));
        end else begin
          count <= count - 1;
        end
      end
    end
  end

endmodule
