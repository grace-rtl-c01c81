// ddr_model: behavioural model of the DDR memory behind the accelerator's
// memory ports, for simulation only (the real part is the board's DDR3 and
// the processing system's memory controller, which this design does not
// build).
//
// A byte array of BYTES bytes. Read requests are accepted when a random
// ready (probability READY_PCT percent) is high; each returns the aligned
// 32-bit word after a random latency of 1..MAX_LAT cycles, in order, held
// until rd_resp_ready. Writes are accepted with the same random ready and
// update the bytes selected by wr_strb. Stall counters (cycles a valid was
// not accepted) and access counters are public for the testbench; so is
// mem, which the testbench fills and inspects directly. Assertions check
// the handshake rule of both request channels: a request that is not
// accepted stays valid, with the same address and data, until it is.
module ddr_model #(
  parameter int BYTES     = 1 << 20,
  parameter int READY_PCT = 70,
  parameter int MAX_LAT   = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_resp_valid,
  input  logic        rd_resp_ready,
  output logic [31:0] rd_resp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data,
  input  logic [3:0]  wr_strb
);
  logic [7:0] mem [BYTES];
  longint     cycle = 0;
  int         rd_stalls = 0, wr_stalls = 0, resp_waits = 0, reads = 0, writes = 0;

  typedef struct { longint due; logic [31:0] data; } resp_t;
  resp_t q [$];

  function automatic logic [31:0] word_at(logic [31:0] a);
    logic [31:0] b;
    b = {a[31:2], 2'b00};
    return {mem[(b + 3) % BYTES], mem[(b + 2) % BYTES], mem[(b + 1) % BYTES], mem[b % BYTES]};
  endfunction

  always_ff @(posedge clk) cycle <= cycle + 1;

  // random ready levels, changed on the falling edge so that the design
  // sees them as ordinary register outputs
  initial begin
    rd_req_ready = 0; wr_ready = 0;
    forever begin
      @(negedge clk);
      rd_req_ready = ($urandom_range(0, 99) < READY_PCT);
      wr_ready     = ($urandom_range(0, 99) < READY_PCT);
    end
  end

  assign rd_resp_valid = (q.size() != 0) && (q[0].due <= cycle);
  assign rd_resp_data  = (q.size() != 0) ? q[0].data : 32'd0;

  always @(posedge clk) begin
    if (!rst_n) q.delete();
    else begin
      if (rd_resp_valid && rd_resp_ready) void'(q.pop_front());
      if (rd_resp_valid && !rd_resp_ready) resp_waits++;
      if (rd_req_valid && rd_req_ready) begin
        resp_t r;
        r.due  = cycle + longint'($urandom_range(1, MAX_LAT));
        r.data = word_at(rd_req_addr);
        q.push_back(r);
        reads++;
      end
      if (rd_req_valid && !rd_req_ready) rd_stalls++;
      if (wr_valid && wr_ready) begin
        for (int b = 0; b < 4; b++)
          if (wr_strb[b]) mem[({wr_addr[31:2], 2'b00} + b) % BYTES] <= wr_data[8*b +: 8];
        writes++;
      end
      if (wr_valid && !wr_ready) wr_stalls++;
    end
  end

  a_rd_req_holds: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr));
  a_wr_holds: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data) && $stable(wr_strb));
endmodule
