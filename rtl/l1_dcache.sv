// l1_dcache: the private L1 data cache of one core, 32 KB, 8-way set
// associative, 64-byte lines, with a 2-cycle hit. The two-cycle hit time is
// the design's: its L1 arrays are split over two logic layers joined by
// dense vias, which shortens the wires and cuts the access from 4 cycles to
// 2. Logically it is an ordinary write-back, write-allocate cache, which is
// what is written here. There is no level below it on chip: a miss goes
// straight to main memory over the baseline path.
//
// Operation. A request (load or store of one 64-bit word with byte enables)
// is taken in IDLE, or in RESP while the previous answer leaves.
//   TAG   the tags of the set are compared; on a hit the line is read out
//         (registered); on a miss the victim line is read out instead
//   RESP  the answer is valid (resp_valid, resp_rdata, resp_miss); a store
//         writes its merged line back into the array at the end of RESP
//   WB    a dirty victim is written to memory (one 64-byte write)
//   FILL  the missing line is read from memory, written into the victim's
//         way, and the request goes through TAG again, now as a hit
// Timing: a hit accepted at edge 0 has resp_valid high between edges 1 and
// 2, i.e. its data is taken at edge 2: 2 cycles. A new request may be taken
// at that same edge, so hits flow at one every two cycles. A miss adds the
// write-back and the memory read.
// Interface:
//   req_valid/req_ready/req_we/req_addr/req_wdata/req_be   core side
//   resp_valid/resp_rdata/resp_miss                        answer (no ready)
//   mem_req_valid/mem_req_ready/mem_req_we/mem_req_addr/mem_req_wdata
//   mem_resp_valid/mem_resp_row                           line reads
// Own choices: blocking (one miss at a time), round-robin replacement per
// set, one array read and one array write port, read-modify-write stores.
module l1_dcache
  import revamp_pkg::*;
#(
  parameter int unsigned BYTES = 32768,
  parameter int unsigned WAYS  = 8,
  localparam int unsigned SETS = BYTES / ROW_BYTES / WAYS,
  localparam int unsigned OW   = $clog2(ROW_BYTES),
  localparam int unsigned SW   = clog2_min1(SETS),
  localparam int unsigned WW   = clog2_min1(WAYS),
  localparam int unsigned TW   = ADDR_W - OW - SW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  addr_t        req_addr,
  input  logic [63:0]  req_wdata,
  input  logic [7:0]   req_be,
  output logic         resp_valid,
  output logic [63:0]  resp_rdata,
  output logic         resp_miss,
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output logic         mem_req_we,
  output addr_t        mem_req_addr,
  output row_t         mem_req_wdata,
  input  logic         mem_resp_valid,
  input  row_t         mem_resp_row
);

  typedef enum logic [2:0] {S_IDLE, S_TAG, S_RESP, S_WB, S_FILL_REQ, S_FILL_WAIT} st_e;
  st_e st;

  // arrays
  row_t            dmem  [SETS*WAYS];
  logic [TW-1:0]   tags  [SETS][WAYS];
  logic [WAYS-1:0] vld   [SETS];
  logic [WAYS-1:0] dty   [SETS];
  logic [WW-1:0]   rr    [SETS];

  // the request being served
  logic            q_we, q_miss;
  addr_t           q_addr;
  logic [63:0]     q_wdata;
  logic [7:0]      q_be;
  logic [WW-1:0]   v_way, h_way_q;
  row_t            rd_row;

  logic [SW-1:0]   set;
  logic [TW-1:0]   tag;
  logic [2:0]      woff;
  assign set  = q_addr[OW +: SW];
  assign tag  = q_addr[ADDR_W-1 -: TW];
  assign woff = q_addr[OW-1 -: 3];

  // tag compare
  logic            hit;
  logic [WW-1:0]   h_way;
  always_comb begin
    hit = 1'b0;
    h_way = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (!hit && vld[set][w] && tags[set][w] == tag) begin
        hit = 1'b1;
        h_way = WW'(w);
      end
  end

  logic take;
  assign req_ready = (st == S_IDLE) || (st == S_RESP);
  assign take      = req_valid && req_ready;

  // store merge of the word into the line read in TAG
  row_t merged;
  always_comb begin
    merged = rd_row;
    for (int unsigned k = 0; k < 8; k++)
      if (q_be[k]) merged[{woff, 3'(k)} * 8 +: 8] = q_wdata[k*8 +: 8];
  end

  // one read port, one write port on the data array
  logic                 rd_en, wr_en;
  logic [SW+WW-1:0]     rd_idx, wr_idx;
  row_t                 wr_row;
  always_comb begin
    rd_en  = (st == S_TAG);
    rd_idx = {set, hit ? h_way : rr[set]};
    wr_en  = 1'b0;
    wr_idx = {set, h_way_q};
    wr_row = merged;
    if (st == S_RESP && q_we) wr_en = 1'b1;
    if (st == S_FILL_WAIT && mem_resp_valid) begin
      wr_en  = 1'b1;
      wr_idx = {set, v_way};
      wr_row = mem_resp_row;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) dmem[wr_idx] <= wr_row;
    if (rd_en) rd_row <= dmem[rd_idx];
  end

  // memory side
  always_comb begin
    mem_req_valid = (st == S_WB) || (st == S_FILL_REQ);
    mem_req_we    = (st == S_WB);
    mem_req_addr  = (st == S_WB) ? {tags[set][v_way], set, OW'(0)} : {tag, set, OW'(0)};
    mem_req_wdata = rd_row;
  end

  assign resp_valid = (st == S_RESP);
  assign resp_rdata = rd_row[woff*64 +: 64];
  assign resp_miss  = q_miss;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      q_we    <= 1'b0;
      q_miss  <= 1'b0;
      q_addr  <= '0;
      q_wdata <= '0;
      q_be    <= '0;
      v_way   <= '0;
      h_way_q <= '0;
      for (int unsigned s = 0; s < SETS; s++) begin
        vld[s] <= '0;
        dty[s] <= '0;
        rr[s]  <= '0;
        for (int unsigned w = 0; w < WAYS; w++) tags[s][w] <= '0;
      end
    end else begin
      unique case (st)
        S_IDLE, S_RESP: begin
          if (st == S_RESP && q_we) dty[set][h_way_q] <= 1'b1;
          if (take) begin
            q_we    <= req_we;
            q_addr  <= req_addr;
            q_wdata <= req_wdata;
            q_be    <= req_be;
            q_miss  <= 1'b0;
            st      <= S_TAG;
          end else begin
            st <= S_IDLE;
          end
        end
        S_TAG: begin
          if (hit) begin
            h_way_q <= h_way;
            st      <= S_RESP;
          end else begin
            q_miss <= 1'b1;
            v_way  <= rr[set];
            st     <= (vld[set][rr[set]] && dty[set][rr[set]]) ? S_WB : S_FILL_REQ;
          end
        end
        S_WB:       if (mem_req_ready) st <= S_FILL_REQ;
        S_FILL_REQ: if (mem_req_ready) st <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_resp_valid) begin
          tags[set][v_way] <= tag;
          vld[set][v_way]  <= 1'b1;
          dty[set][v_way]  <= 1'b0;
          rr[set]          <= rr[set] + 1'b1;
          st               <= S_TAG;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Line data comes back only when a line read is outstanding.
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> st == S_FILL_WAIT);

endmodule
