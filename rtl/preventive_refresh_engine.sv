// preventive_refresh_engine: turns "RAC reached PRT" events into victim-row
// refreshes in every bank.
//
// ABACuS cannot use the row-agnostic REF command for targeted refresh, so a
// victim row is refreshed by having the memory controller open and close it once
// (ACT then PRE). For each aggressor row ID queued here the engine asks for the
// rows at distance 1..BLAST_RADIUS on both sides, in every one of the N_BANKS
// banks, skipping row IDs outside 0..N_ROWS-1. While a bank still has victim
// refreshes pending, its bit of bank_block is high: the memory controller serves
// no demand request to that bank until then, as the paper prescribes. Victims are
// visited bank by bank (bank 0 first; within a bank, distance 1 first, lower
// neighbour first), so banks are released one after another; this order, the
// queue depth and the handshake are this design's choices.
//
// flush empties the queue (a refresh cycle refreshes every row anyway).
//
// Interface: req/req_row push an aggressor row ID (only when can_accept). The
// request channel vr_valid/vr_bank/vr_row is a valid/ready handshake: a victim
// counts as refreshed in the cycle vr_valid && vr_ready. bank_block includes a
// request pushed in the same cycle.
module preventive_refresh_engine #(
  parameter int unsigned N_BANKS      = abacus_pkg::S_SAV_DEF,
  parameter int unsigned S_RID        = abacus_pkg::S_RID_DEF,
  parameter int unsigned N_ROWS       = 1 << S_RID,
  parameter int unsigned BLAST_RADIUS = abacus_pkg::BLAST_RADIUS_DEF,
  parameter int unsigned QDEPTH       = 4,
  localparam int unsigned BW          = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned DW          = $clog2(BLAST_RADIUS + 1),
  localparam int unsigned QW          = $clog2(QDEPTH + 1),
  localparam int unsigned PW          = (QDEPTH > 1) ? $clog2(QDEPTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic               req,
  input  logic [S_RID-1:0]   req_row,
  output logic               can_accept,
  output logic               vr_valid,
  output logic [BW-1:0]      vr_bank,
  output logic [S_RID-1:0]   vr_row,
  input  logic               vr_ready,
  output logic [N_BANKS-1:0] bank_block
);

  logic [S_RID-1:0] q [QDEPTH];
  logic [PW-1:0]    head, tail;
  logic [QW-1:0]    count;

  logic [BW-1:0]    cur_bank;
  logic [DW-1:0]    cur_dist;     // 1 .. BLAST_RADIUS
  logic             cur_side;     // 0: row - dist, 1: row + dist

  logic [S_RID-1:0] agg;
  logic             in_range;
  logic             step, last_step, pop, busy;

  assign agg      = q[head];
  assign busy     = (count != '0);
  assign can_accept = (count != QW'(QDEPTH));

  always_comb begin
    if (cur_side == 1'b0) begin
      in_range = ({1'b0, agg} >= (S_RID+1)'(cur_dist));
      vr_row   = agg - S_RID'(cur_dist);
    end else begin
      in_range = (32'(agg) + 32'(cur_dist) < 32'(N_ROWS));
      vr_row   = agg + S_RID'(cur_dist);
    end
  end

  assign vr_valid  = busy && in_range;
  assign vr_bank   = cur_bank;
  assign step      = busy && (!in_range || vr_ready);
  assign last_step = (cur_bank == BW'(N_BANKS - 1)) && (cur_dist == DW'(BLAST_RADIUS)) && cur_side;
  assign pop       = step && last_step;

  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++)
      bank_block[b] = req || (count > QW'(1)) || (busy && (BW'(b) >= cur_bank));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head     <= '0;
      tail     <= '0;
      count    <= '0;
      cur_bank <= '0;
      cur_dist <= DW'(1);
      cur_side <= 1'b0;
    end else if (flush) begin
      head     <= '0;
      tail     <= '0;
      count    <= '0;
      cur_bank <= '0;
      cur_dist <= DW'(1);
      cur_side <= 1'b0;
    end else begin
      if (req) begin
        q[tail] <= req_row;
        tail    <= (tail == PW'(QDEPTH - 1)) ? '0 : tail + 1'b1;
      end
      if (pop) head <= (head == PW'(QDEPTH - 1)) ? '0 : head + 1'b1;
      count <= count + QW'(req) - QW'(pop);
      if (step) begin
        if (!cur_side) begin
          cur_side <= 1'b1;
        end else begin
          cur_side <= 1'b0;
          if (cur_dist != DW'(BLAST_RADIUS)) begin
            cur_dist <= cur_dist + 1'b1;
          end else begin
            cur_dist <= DW'(1);
            cur_bank <= last_step ? '0 : cur_bank + 1'b1;
          end
        end
      end
    end
  end

  // A request is only pushed when there is room for it.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) (req && !flush) |-> can_accept)
    else $error("preventive refresh queue overflow");

endmodule
