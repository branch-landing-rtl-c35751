// meta_mem: behavioural model of the read-only metadata memory (the
// descriptor table and Bloom filter bit arrays, which a real system
// reads through its L1 D-cache). Not synthesizable design content.
//
// Read port: a request (req_valid, req_addr) is taken when req_ready
// is high; the word at req_addr (byte address, word aligned) returns
// LATENCY cycles later with rsp_valid. One request is outstanding at a
// time. A backdoor write port (wr_en, wr_addr, wr_data) lets the
// testbench lay out the metadata. Counts accepted reads in `reads`.
module meta_mem #(
  parameter int unsigned WORDS   = 8192,
  parameter int unsigned LATENCY = 2
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output logic        rsp_valid,
  output logic [31:0] rsp_data,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data,
  output int          reads
);

  logic [31:0] mem [WORDS];
  int          cnt;
  logic [31:0] addr_q;
  logic        busy;

  initial begin
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
    busy = 1'b0;
    cnt = 0;
    reads = 0;
    addr_q = '0;
  end

  assign req_ready = !busy;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (wr_en) mem[(wr_addr >> 2) % WORDS] <= wr_data;
    if (busy) begin
      if (cnt <= 1) begin
        rsp_valid <= 1'b1;
        rsp_data  <= mem[(addr_q >> 2) % WORDS];
        busy      <= 1'b0;
      end else begin
        cnt <= cnt - 1;
      end
    end else if (req_valid) begin
      addr_q <= req_addr;
      busy   <= 1'b1;
      cnt    <= LATENCY;
      reads  <= reads + 1;
    end
  end

endmodule
