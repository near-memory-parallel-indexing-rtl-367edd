// elem_req_gen: element request generator of the indirect stream unit.
//
// It reads the indices of one burst from the heads of the N index queues and turns index
// j of the burst into the narrow request elem_base + index*8 on lane j mod N. Groups of N
// consecutive indices are served one after the other; inside a group every lane has its
// own valid/ready, so lanes that are accepted early wait for the rest. An index at position
// p (counted from the start of the first block, so the first one is at start_pos) lies in
// block p >> (6 - idx_size) at byte (p mod indices-per-block) << idx_size; a crossbar picks
// it out of the concatenated queue heads. A lane only fires when its block is the one at
// the head of the queues. When the last index of a block (or of the burst) is taken, the
// block is popped from all queues, as soon as every lane reading from it has been accepted (beat_pop_o, also the index fetcher's credit return).
// On starting a burst the element count is passed to the element packer (pk_cmd).
//
// Interface: cmd (valid/ready), seg_i/seg_valid_i, beat_pop_o, N request lanes
// (addr/valid/ready), pk_num (valid/ready).
// Timing: up to N requests per cycle; a group that spans two blocks takes two cycles.
// Extracting indices and adding them to the base address follows the paper; the
// lane assignment, the per-lane handshake and the x8 element scaling are this design's.
module elem_req_gen
  import isu_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  erg_cmd_t                   cmd_i,
  input  logic                       cmd_valid_i,
  output logic                       cmd_ready_o,
  input  logic [N-1:0][WIDE_W/N-1:0] seg_i,
  input  logic                       seg_valid_i,
  output logic                       beat_pop_o,
  output addr_t [N-1:0]              req_addr_o,
  output logic  [N-1:0]              req_valid_o,
  input  logic  [N-1:0]              req_ready_i,
  output logic [NUM_W-1:0]           pk_num_o,
  output logic                       pk_valid_o,
  input  logic                       pk_ready_i
);
  localparam int unsigned PW = NUM_W + POS_W + 1;  // index position counter

  logic             active_q;
  addr_t            base_q;
  idx_size_e        size_q;
  logic [NUM_W-1:0] rem_q;     // indices of the burst not yet in a finished group
  logic [PW-1:0]    pbase_q;   // position of lane 0 of the current group
  logic [PW-1:0]    hb_q;      // block number at the head of the index queues
  logic [N-1:0]     sent_q;    // lanes of the current group already accepted

  wide_t block;
  assign block = seg_i;

  // Start of a burst.
  assign cmd_ready_o = !active_q && pk_ready_i;
  assign pk_valid_o  = !active_q && cmd_valid_i;
  assign pk_num_o    = cmd_i.num;

  logic [NUM_W-1:0] n_grp;
  assign n_grp = (rem_q < NUM_W'(N)) ? rem_q : NUM_W'(N);

  logic [N-1:0] need, fire, endblk, inblk;
  logic [2:0]   ipb_log;
  assign ipb_log = 3'(BLK_LSB) - 3'(size_q);

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic [PW-1:0]  p, b;
      logic [POS_W-1:0] q;
      logic [BLK_LSB+2:0] bit_off;
      logic [63:0]    idx;
      p    = pbase_q + PW'(k);
      b    = p >> ipb_log;
      q    = POS_W'(p & ((PW'(1) << ipb_log) - 1'b1));
      bit_off = (BLK_LSB+3)'(q) << (3 + size_q);
      idx  = 64'(block >> bit_off);
      case (size_q)
        IDX8:    idx = {56'b0, idx[7:0]};
        IDX16:   idx = {48'b0, idx[15:0]};
        IDX32:   idx = {32'b0, idx[31:0]};
        default: idx = idx;
      endcase
      need[k]        = active_q && (NUM_W'(k) < n_grp);
      inblk[k]       = need[k] && (b == hb_q);
      req_valid_o[k] = inblk[k] && !sent_q[k] && seg_valid_i;
      req_addr_o[k]  = base_q + ADDR_W'(idx << ELEM_LSB);
      endblk[k]      = (q == POS_W'((32'd1 << ipb_log) - 1)) || (NUM_W'(k) == rem_q - 1'b1);
    end
  end

  assign fire       = req_valid_o & req_ready_i;
  // Pop the head block once every lane that reads from it has been accepted and one of
  // them holds the block's (or the burst's) last index.
  assign beat_pop_o = |(fire & inblk) && |(inblk & endblk) && ((inblk & ~(sent_q | fire)) == '0);

  logic group_done;
  assign group_done = active_q && (&(sent_q | fire | ~need));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      base_q   <= '0;
      size_q   <= IDX32;
      rem_q    <= '0;
      pbase_q  <= '0;
      hb_q     <= '0;
      sent_q   <= '0;
    end else begin
      if (beat_pop_o) hb_q <= hb_q + 1'b1;
      if (!active_q) begin
        if (cmd_valid_i && cmd_ready_o) begin
          active_q <= 1'b1;
          base_q   <= cmd_i.elem_base;
          size_q   <= cmd_i.idx_size;
          rem_q    <= cmd_i.num;
          pbase_q  <= PW'(cmd_i.start_pos);
          hb_q     <= '0;
          sent_q   <= '0;
        end
      end else if (group_done) begin
        sent_q  <= '0;
        rem_q   <= rem_q - n_grp;
        pbase_q <= pbase_q + PW'(n_grp);
        if (rem_q == n_grp) active_q <= 1'b0;
      end else begin
        sent_q <= sent_q | fire;
      end
    end
  end
endmodule
