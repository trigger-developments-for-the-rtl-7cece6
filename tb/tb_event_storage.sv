// Testbench for event_storage with a small geometry (2 rows x 2 lanes,
// 8-GTU events with the trigger 3 GTUs after the first stored frame, 2
// slots, at most 2 events per 60-GTU gate). Frames carry a known pattern of
// their GTU number, so every stored frame can be checked. Scripted triggers
// cover each acceptance rule: too little history after reset, an event still
// being completed, both slots waiting for read-out, the per-gate limit, and
// a new gate. Each accepted event must be read out once, with GTUs
// g-3 .. g+4 in order and the right data.
module tb_event_storage;
  localparam int NR = 2, NL = 2, PW = 8, EV = 8, PRE = 3, NS = 2, NEV = 2, GATE = 60;
  localparam int RW = $clog2(NR);

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0;
  logic [RW-1:0] wr_row = '0;
  logic [NL-1:0][PW-1:0] wr_pix = '0;
  logic trig = 0;
  logic [31:0] trig_gtu = '0;
  logic trig_accepted, trig_rejected;
  logic rd_valid, rd_ready = 0, rd_last;
  logic [31:0] rd_trig_gtu, rd_gtu;
  logic [RW-1:0] rd_row;
  logic [NL-1:0][PW-1:0] rd_pix;
  int checks = 0, failures = 0;

  event_storage #(.N_ROWS(NR), .LANES(NL), .PIX_W(PW), .EV_GTU(EV), .PRE_GTU(PRE),
                  .N_SLOTS(NS), .N_EVENTS(NEV), .GATE_GTU(GATE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PW-1:0] pat(int g, int r, int l);
    return PW'(g * 7 + r * 3 + l * 11 + 1);
  endfunction

  // triggers to issue while writing frame w (for GTU w-1) and the verdict
  int  trig_at [7]  = '{2, 6, 7, 15, 25, 50, 66};
  bit  trig_exp [7] = '{0, 1, 0, 1, 0, 0, 1};
  int  accepted_q[$];

  // read-out checker
  int ev_rows = 0, n_events = 0;
  always @(posedge clk) begin
    if (rst_n && rd_valid && rd_ready) begin
      int g, k;
      checks++;
      if (accepted_q.size() == 0) begin failures++; $display("unexpected event data"); end
      else begin
        g = accepted_q[0];
        k = ev_rows;
        if (rd_trig_gtu != 32'(g) || rd_gtu != 32'(g - PRE + k / NR) || rd_row != RW'(k % NR)
            || rd_last != (k == EV * NR - 1)) begin
          failures++; $display("event %0d row %0d: gtu %0d row %0d last %0b", g, k, rd_gtu, rd_row, rd_last);
        end
        for (int l = 0; l < NL; l++)
          if (rd_pix[l] != pat(g - PRE + k / NR, k % NR, l)) begin
            failures++; $display("event %0d row %0d lane %0d data %0d", g, k, l, rd_pix[l]);
          end
        ev_rows++;
        if (rd_last) begin ev_rows = 0; n_events++; void'(accepted_q.pop_front()); end
      end
    end
  end

  initial begin
    int ti;
    ti = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 100; w++) begin
      if (w == 26) rd_ready = 1;
      for (int r = 0; r < NR; r++) begin
        @(negedge clk);
        wr_valid = 1; wr_row = RW'(r);
        for (int l = 0; l < NL; l++) wr_pix[l] = pat(w, r, l);
        trig = 0;
        if (r == 0 && ti < 7 && trig_at[ti] == w) begin
          trig = 1; trig_gtu = 32'(w - 1);
          #1;
          checks++;
          if (trig_accepted != trig_exp[ti] || trig_rejected == trig_exp[ti]) begin
            failures++; $display("trigger %0d (GTU %0d): accepted %0b expected %0b", ti, w - 1, trig_accepted, trig_exp[ti]);
          end
          if (trig_accepted) accepted_q.push_back(w - 1);
          ti++;
        end
      end
    end
    @(negedge clk); wr_valid = 0; trig = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (n_events != 3 || accepted_q.size() != 0) begin failures++; $display("events read %0d", n_events); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
