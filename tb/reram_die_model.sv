// Behavioural model of one stacked ReRAM die with its controller, for
// testbenches only. Row read requests are accepted on the logic-die clock
// (req/addr, ready while fewer than QMAX are waiting). After LAT cycles of
// the 100 MHz ReRAM clock each row is driven on the 512-bit bus for one
// ReRAM cycle with valid high. Contents: word w of row a on die d is
// pattern(d, a, w) = a * 2654435761 + d * 40503 + w * 97 (32 bits), so a
// checker can recompute any row.
module reram_die_model #(
  parameter int DIE  = 0,
  parameter int LAT  = 2,
  parameter int QMAX = 4
) (
  input  logic          clk,
  input  logic          req,
  input  logic [14:0]   addr,
  output logic          ready,
  input  logic          rr_clk,
  output logic          valid,
  output logic [511:0]  data
);
  int unsigned q [$];
  int unsigned wait_cnt = 0;
  initial begin valid = 0; data = '0; end
  assign ready = (q.size() < QMAX);
  always @(posedge clk) if (req && ready) q.push_back(int'(addr));

  function automatic logic [511:0] pattern(int d, int unsigned a);
    logic [511:0] r;
    for (int w = 0; w < 16; w++) r[w*32 +: 32] = a * 32'd2654435761 + d * 40503 + w * 97;
    return r;
  endfunction

  always @(posedge rr_clk) begin
    if (q.size() > 0 && wait_cnt >= LAT) begin
      data  <= pattern(DIE, q.pop_front());
      valid <= 1'b1;
      wait_cnt = 0;
    end else begin
      valid <= 1'b0;
      data  <= {16{$urandom}};
      if (q.size() > 0) wait_cnt++;
    end
  end
endmodule
