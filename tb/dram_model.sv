// Behavioural external DRAM for testbenches: 64-bit words addressed by
// word, ready at random (3 in 4 cycles), reads returned in order after a
// random delay. Unwritten words read as init_word(a), a fixed hash.
module dram_model (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  input  logic         we,
  input  logic [31:0]  addr,
  input  logic [63:0]  wdata,
  output logic         ready,
  output logic         rvalid,
  output logic [63:0]  rdata
);
  logic [63:0] mem [int unsigned];
  int unsigned rq [$];
  initial begin ready = 0; rvalid = 0; rdata = '0; end
  function automatic logic [63:0] init_word(int unsigned a);
    return {a * 32'd7919, a ^ 32'hA5A5_5A5A};
  endfunction
  function automatic logic [63:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction
  function automatic void poke(int unsigned a, logic [63:0] v);
    mem[a] = v;
  endfunction
  always @(posedge clk) begin
    ready <= ($urandom_range(0, 3) != 0);
    rvalid <= 1'b0;
    if (rst_n && req && ready) begin
      if (we) mem[addr] = wdata; else rq.push_back(addr);
    end
    if (rq.size() > 0 && $urandom_range(0, 1) == 1) begin
      rvalid <= 1'b1; rdata <= peek(rq.pop_front());
    end
  end
endmodule
