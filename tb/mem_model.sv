// mem_model: behavioural main memory for the testbenches (not part of the
// design). 16B words, sparse; a word never written reads as a fixed function
// of its address. A request held on mem_req is acknowledged after LAT cycles
// with a one-cycle mem_ack; reads return data with the ack. It counts reads
// and writes.
module mem_model
  import halls_pkg::*;
#(
  parameter int LAT = 5
) (
  input  logic              clk,
  input  logic              mem_req,
  input  logic              mem_we,
  input  logic [ADDR_W-1:0] mem_addr,
  input  logic [DATA_W-1:0] mem_wdata,
  output logic              mem_ack,
  output logic [DATA_W-1:0] mem_rdata
);
  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  int cnt = 0;
  int n_reads = 0, n_writes = 0;

  function automatic logic [DATA_W-1:0] init_word(logic [ADDR_W-1:0] a);
    return {a, ~a, a ^ 32'h5A5A_0F0F, 32'hC0DE_0000 | (a >> 4)};
  endfunction

  function automatic logic [DATA_W-1:0] peek(logic [ADDR_W-1:0] a);
    a[3:0] = 0;
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction

  initial begin mem_ack = 0; mem_rdata = '0; end

  always @(posedge clk) begin
    mem_ack <= 0;
    if (mem_req && !mem_ack) begin
      if (cnt == LAT - 1) begin
        cnt <= 0;
        mem_ack <= 1;
        if (mem_we) begin
          mem[{mem_addr[ADDR_W-1:4], 4'h0}] = mem_wdata;
          n_writes++;
        end else begin
          mem_rdata <= peek(mem_addr);
          n_reads++;
        end
      end else cnt <= cnt + 1;
    end
  end
endmodule
