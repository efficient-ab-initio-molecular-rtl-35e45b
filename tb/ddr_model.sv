// ddr_model: behavioural model of the DDR memory seen through its controller, for testbenches.
//
// It holds LINES lines of 512 bits (eight complex single-precision points). Read requests are
// accepted when rd_req_ready is high and answered in order `lat` cycles later (a run-time
// setting, at least 1); writes are accepted when wr_ready is high. With `stalls` set, both ready
// signals drop at random about one cycle in four, so the design sees a memory that is sometimes
// busy. The testbench reads and writes `mem` directly to load the input and check the result.
module ddr_model
  import fft3d_pkg::*;
#(
  parameter int LINES = 1024,
  parameter int AW    = 32
) (
  input  logic          clk,
  input  logic          stalls,
  input  int            lat,
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  logic [AW-1:0] rd_req_addr,
  output logic          rd_resp_valid,
  output beat_t         rd_resp_data,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [AW-1:0] wr_addr,
  input  beat_t         wr_data
);

  beat_t         mem [LINES];
  longint        due_q [$];
  logic [AW-1:0] addr_q [$];
  longint        now = 0;
  int            reads = 0, writes = 0, rd_busy = 0, wr_busy = 0;

  initial begin
    rd_req_ready  = 1'b1;
    wr_ready      = 1'b1;
    rd_resp_valid = 1'b0;
    rd_resp_data  = '0;
  end

  always @(posedge clk) begin
    now = now + 1;
    if (rd_req_valid && !rd_req_ready) rd_busy++;
    if (wr_valid && !wr_ready) wr_busy++;
    if (wr_valid && wr_ready) begin
      if (wr_addr >= AW'(LINES)) $error("ddr_model: write address %0d out of range", wr_addr);
      else mem[wr_addr] <= wr_data;
      writes++;
    end
    if (rd_req_valid && rd_req_ready) begin
      due_q.push_back(now + longint'(lat) - 1);
      addr_q.push_back(rd_req_addr);
      reads++;
    end
    if (due_q.size() > 0 && due_q[0] <= now) begin
      void'(due_q.pop_front());
      rd_resp_valid <= 1'b1;
      rd_resp_data  <= mem[addr_q.pop_front() % LINES];
    end else begin
      rd_resp_valid <= 1'b0;
    end
    rd_req_ready <= !stalls || ($urandom_range(3) != 0);
    wr_ready     <= !stalls || ($urandom_range(3) != 0);
  end

endmodule
