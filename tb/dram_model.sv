// dram_model -- behavioural model of the off-chip DRAM seen by the MIU (not
// synthesizable, testbench only). Word-addressed, DEPTH words. Read port:
// a request is accepted when rd_valid && rd_ready; the word comes back on
// rvalid/rdata 1 + 0..MAX_LAT cycles later; one request in flight. Write port:
// a write is accepted when wr_valid && wr_ready; wr_ready is randomly low
// when STALL is set. Testbenches preload and inspect `mem` directly, and gate
// the two valid inputs with the design's reset: the design's registers hold
// arbitrary values until the first clock edge under reset, as real memory
// would not see a request while its controller is held in reset.
module dram_model #(
  parameter int DEPTH   = 1 << 16,
  parameter int MAX_LAT = 2,
  parameter bit STALL   = 1
) (
  input  logic        clk,
  input  logic        rd_valid,
  output logic        rd_ready,
  input  logic [31:0] rd_addr,
  output logic        rvalid,
  output logic [31:0] rdata,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);
  logic [31:0] mem [DEPTH];
  int reads = 0, writes = 0;

  initial begin
    rd_ready = 1; rvalid = 0; rdata = 0; wr_ready = 1;
    for (int i = 0; i < DEPTH; i++) mem[i] = 0;
  end

  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      mem[wr_addr % DEPTH] <= wr_data;
      writes <= writes + 1;
    end
  end
  always @(negedge clk) wr_ready = STALL ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    forever begin
      @(posedge clk);
      if (rd_valid && rd_ready) begin
        logic [31:0] a;
        a = rd_addr;
        #1 rd_ready = 0;
        repeat ($urandom_range(0, MAX_LAT)) @(posedge clk);
        #1 rvalid = 1; rdata = mem[a % DEPTH]; reads++;
        @(posedge clk);
        #1 rvalid = 0; rd_ready = 1;
      end
    end
  end
endmodule
