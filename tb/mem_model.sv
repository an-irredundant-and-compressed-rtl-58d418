// mem_model: behavioural model of the off-chip memory seen through a burst
// port (test use only; the DRAM and its controller are not part of the
// design). Word-addressed array of WORDS entries of BUS_W bits. Read
// requests are queued and answered in order, one beat per cycle with random
// idle cycles (STALL_PCT percent) to exercise back-pressure; write requests
// are followed by their data beats, accepted with random wait cycles.
// Counters expose how many read / write stall cycles were inserted.
module mem_model #(
  parameter int BUS_W     = 32,
  parameter int ADDR_W    = 32,
  parameter int LEN_W     = 8,
  parameter int WORDS     = 4096,
  parameter int STALL_PCT = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  input  logic [LEN_W-1:0]  rd_req_len,
  output logic              rd_valid,
  input  logic              rd_ready,
  output logic [BUS_W-1:0]  rd_data,
  output logic              rd_last,
  input  logic              wr_req_valid,
  output logic              wr_req_ready,
  input  logic [ADDR_W-1:0] wr_req_addr,
  input  logic [LEN_W-1:0]  wr_req_len,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [BUS_W-1:0]  wr_data,
  input  logic              wr_last
);
  logic [BUS_W-1:0] mem [WORDS];
  int unsigned q_addr[$], q_len[$];
  int unsigned cur_addr, cur_left;
  int unsigned w_addr, w_left;
  logic        w_active;
  int          rd_stalls, wr_stalls, rd_bursts, wr_bursts;
  int          errors;
  logic        rd_gap, wr_gap;

  assign rd_req_ready = 1'b1;
  assign wr_req_ready = !w_active;
  assign rd_valid     = (cur_left != 0) && !rd_gap;
  assign rd_data      = (cur_left != 0) ? mem[cur_addr % WORDS] : '0;
  assign rd_last      = (cur_left == 1);
  assign wr_ready     = w_active && !wr_gap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_left <= 0; w_active <= 1'b0; rd_gap <= 1'b0; wr_gap <= 1'b0;
      rd_stalls <= 0; wr_stalls <= 0; rd_bursts <= 0; wr_bursts <= 0; errors <= 0;
    end else begin
      rd_gap <= ($urandom_range(99) < STALL_PCT);
      wr_gap <= ($urandom_range(99) < STALL_PCT);
      if (rd_req_valid && rd_req_ready) begin
        q_addr.push_back(int'(rd_req_addr));
        q_len.push_back(int'(rd_req_len));
        rd_bursts <= rd_bursts + 1;
      end
      if (cur_left != 0 && rd_gap) rd_stalls <= rd_stalls + 1;
      if (rd_valid && rd_ready) begin
        cur_left <= cur_left - 1;
        cur_addr <= cur_addr + 1;
      end else if (cur_left == 0 && q_addr.size() != 0) begin
        cur_addr <= q_addr.pop_front();
        cur_left <= q_len.pop_front();
      end
      if (wr_req_valid && wr_req_ready) begin
        w_active <= 1'b1;
        w_addr   <= int'(wr_req_addr);
        w_left   <= int'(wr_req_len);
        wr_bursts <= wr_bursts + 1;
      end
      if (w_active && wr_gap) wr_stalls <= wr_stalls + 1;
      if (wr_valid && wr_ready) begin
        mem[w_addr % WORDS] <= wr_data;
        w_addr <= w_addr + 1;
        w_left <= w_left - 1;
        if (wr_last != (w_left == 1)) errors <= errors + 1;
        if (w_left == 1) w_active <= 1'b0;
      end
    end
  end
endmodule
