// Event storage: keeps the 128 GTUs of pixel data around each accepted L1
// trigger and hands them to the CPU side row by row.
//
// The pixel stream is written continuously into an "open" slot that works as
// a ring of EV_GTU frames (the ring index is the GTU number modulo EV_GTU).
// A trigger for GTU g is accepted when (a) no event is being completed, (b)
// the open slot already holds frames g-PRE_GTU onwards, and (c) fewer than
// N_EVENTS events were accepted in the current gate of GATE_GTU GTUs. After
// acceptance, writing continues up to GTU g+POST_GTU (POST_GTU = EV_GTU-1-
// PRE_GTU); the slot then holds GTUs g-PRE_GTU .. g+POST_GTU and is closed.
// Writing moves to the next free slot, with an empty history; if all slots
// wait for read-out, writing pauses until one is freed.
//
// Read-out streams a closed slot, oldest event first, frame by frame in time
// order and MAPMT rows 0..N_ROWS-1 within a frame, with a valid/ready
// handshake; rd_trig_gtu is the trigger's GTU number, rd_gtu the GTU of the
// frame being sent and rd_last marks the event's last row. The slot is freed
// after its last row has been taken.
//
// The 128-GTU event length, the limit of 4 events per gate and the 5.24 s
// gate (128 x 128 x 128 GTUs of 2.5 us) follow the published system; the trigger's
// position in the event (PRE_GTU), the number of slots, the read-out format
// and the acceptance rules are this design's choices.
module event_storage #(
  parameter int unsigned N_ROWS   = 36,
  parameter int unsigned LANES    = 64,
  parameter int unsigned PIX_W    = 8,
  parameter int unsigned EV_GTU   = 128,
  parameter int unsigned PRE_GTU  = 63,
  parameter int unsigned N_SLOTS  = 4,
  parameter int unsigned N_EVENTS = 4,
  parameter int unsigned GATE_GTU = 2097152,
  localparam int unsigned RW      = $clog2(N_ROWS),
  localparam int unsigned FW      = $clog2(EV_GTU),
  localparam int unsigned SW      = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // pixel stream, as received by the trigger
  input  logic                        wr_valid,
  input  logic [RW-1:0]               wr_row,
  input  logic [LANES-1:0][PIX_W-1:0] wr_pix,
  // L1 trigger and the GTU it belongs to
  input  logic                        trig,
  input  logic [31:0]                 trig_gtu,
  output logic                        trig_accepted,
  output logic                        trig_rejected,
  // read-out towards the CPU
  output logic                        rd_valid,
  input  logic                        rd_ready,
  output logic [31:0]                 rd_trig_gtu,
  output logic [31:0]                 rd_gtu,
  output logic [RW-1:0]               rd_row,
  output logic [LANES-1:0][PIX_W-1:0] rd_pix,
  output logic                        rd_last
);

  localparam int unsigned POST_GTU = EV_GTU - 1 - PRE_GTU;

  // slot s, ring frame f, row r at word (s*EV_GTU + f)*N_ROWS + r
  localparam int unsigned DEPTH = N_SLOTS * EV_GTU * N_ROWS;
  localparam int unsigned AW    = $clog2(DEPTH);
  logic [LANES-1:0][PIX_W-1:0] mem [DEPTH];

  function automatic logic [AW-1:0] addr(logic [SW-1:0] s, logic [FW-1:0] f, logic [RW-1:0] r);
    return AW'((AW'(s) * AW'(EV_GTU) + AW'(f)) * AW'(N_ROWS) + AW'(r));
  endfunction

  // ---------------- write side ----------------
  logic [31:0]       gtu_wr;        // GTU number being written
  logic              open;          // a slot is open for writing
  logic [SW-1:0]     wslot;
  logic [FW:0]       hist;          // frames written into the open slot (saturating)
  logic              post;          // event accepted, completing it
  logic [31:0]       ev_gtu;        // trigger GTU of the event being completed
  logic [N_SLOTS-1:0] full;
  logic [31:0]       slot_trig [N_SLOTS];
  logic [31:0]       gate_cnt;
  logic [$clog2(N_EVENTS+1)-1:0] gate_ev;

  wire frame_done = wr_valid && open && wr_row == RW'(N_ROWS - 1);
  wire close      = frame_done && post && gtu_wr == ev_gtu + POST_GTU;

  // history needed: frames trig_gtu-PRE_GTU .. gtu_wr-1 are in the slot
  wire [31:0] need = gtu_wr - trig_gtu + PRE_GTU;
  assign trig_accepted = trig && open && !post && 32'(hist) >= need
                         && gtu_wr - trig_gtu <= POST_GTU && 32'(gate_ev) < N_EVENTS;
  assign trig_rejected = trig && !trig_accepted;

  // next free slot after wslot, not counting one that closes now
  logic          nf_ok;
  logic [SW-1:0] nf_slot;
  always_comb begin
    nf_ok   = 1'b0;
    nf_slot = wslot;
    for (int i = N_SLOTS; i >= 1; i--) begin
      if (!full[SW'((int'(wslot) + i) % N_SLOTS)] && (i != N_SLOTS || !close)) begin
        nf_ok   = 1'b1;
        nf_slot = SW'((int'(wslot) + i) % N_SLOTS);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && open) mem[addr(wslot, gtu_wr[FW-1:0], wr_row)] <= wr_pix;
  end

  // ---------------- read side ----------------
  logic          rd_busy;           // a slot is being streamed
  logic [SW-1:0] rslot;
  logic [FW-1:0] rframe;            // frame index within the event, 0 = oldest
  logic [RW-1:0] rrow;
  logic          fetch;
  logic          rd_done;           // last row of the event taken

  wire fetch_last = rframe == FW'(EV_GTU - 1) && rrow == RW'(N_ROWS - 1);
  wire [31:0] first_gtu = slot_trig[rslot] - PRE_GTU;
  assign fetch   = rd_busy && (!rd_valid || rd_ready);
  assign rd_done = rd_valid && rd_ready && rd_last;

  always_ff @(posedge clk) begin
    if (fetch) rd_pix <= mem[addr(rslot, FW'(first_gtu + 32'(rframe)), rrow)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gtu_wr   <= '0;
      open     <= 1'b1;
      wslot    <= '0;
      hist     <= '0;
      post     <= 1'b0;
      ev_gtu   <= '0;
      full     <= '0;
      for (int s = 0; s < N_SLOTS; s++) slot_trig[s] <= '0;
      gate_cnt <= '0;
      gate_ev  <= '0;
      rd_busy  <= 1'b0;
      rslot    <= '0;
      rframe   <= '0;
      rrow     <= '0;
      rd_valid <= 1'b0;
      rd_trig_gtu <= '0;
      rd_gtu   <= '0;
      rd_row   <= '0;
      rd_last  <= 1'b0;
    end else begin
      // GTU numbering and gate, counted on the input stream
      if (wr_valid && wr_row == RW'(N_ROWS - 1)) begin
        gtu_wr   <= gtu_wr + 1'b1;
        gate_cnt <= (gate_cnt == GATE_GTU - 1) ? '0 : gate_cnt + 1'b1;
        if (gate_cnt == GATE_GTU - 1) gate_ev <= '0;
      end
      if (trig_accepted) begin
        post    <= 1'b1;
        ev_gtu  <= trig_gtu;
        gate_ev <= gate_ev + 1'b1;
      end
      if (frame_done && hist != (FW+1)'(EV_GTU)) hist <= hist + 1'b1;
      if (close) begin
        post             <= 1'b0;
        full[wslot]      <= 1'b1;
        slot_trig[wslot] <= ev_gtu;
        hist             <= '0;
        open             <= nf_ok;
        wslot            <= nf_slot;
      end else if (!open && nf_ok && wr_valid && wr_row == RW'(N_ROWS - 1)) begin
        // a slot was freed: resume writing with the next frame
        open  <= 1'b1;
        wslot <= nf_slot;
      end

      // read-out
      if (!rd_busy && !rd_valid && full[rslot]) begin
        rd_busy <= 1'b1;
        rframe  <= '0;
        rrow    <= '0;
      end
      if (fetch) begin
        rd_valid    <= 1'b1;
        rd_trig_gtu <= slot_trig[rslot];
        rd_gtu      <= first_gtu + 32'(rframe);
        rd_row      <= rrow;
        rd_last     <= fetch_last;
        if (rrow == RW'(N_ROWS - 1)) begin
          rrow   <= '0;
          rframe <= rframe + 1'b1;
        end else begin
          rrow <= rrow + 1'b1;
        end
        if (fetch_last) rd_busy <= 1'b0;
      end else if (rd_valid && rd_ready) begin
        rd_valid <= 1'b0;
      end
      if (rd_done) begin
        full[rslot] <= 1'b0;
        rslot       <= SW'((int'(rslot) + 1) % N_SLOTS);
      end
    end
  end

  // the read pointer only moves on to a slot after the previous one is freed
  a_no_read_of_open: assert property (@(posedge clk) disable iff (!rst_n)
    rd_busy |-> full[rslot]);

endmodule
