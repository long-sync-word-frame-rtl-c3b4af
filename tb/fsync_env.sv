// fsync_env: stimulus, reference model and scoreboard for the frame
// synchronizer, shared by the end-to-end, full-size and channel-error
// testbenches.
//
// It builds a bitstream of NFRAMES frames (syncword followed by N random
// payload bits, with random noise gaps between some frames), optionally flips
// bits at a bit error rate of BER_PPM per million, and, with SCENARIOS set,
// plants directed cases: a syncword with exactly threshold+1 matching bits
// (must be found), one with exactly threshold matches (must be missed,
// the comparison is strict), one corrupted well below the threshold, and a
// syncword copy inside a payload (must be ignored while capturing).
//
// The reference model works bit by bit, independently of the trees: for
// every block of M bits it correlates the K bits ending at each of the M
// positions with the syncword, takes the largest value (lowest position on a
// tie), and if it exceeds the threshold and no capture is running, expects a
// frame whose payload starts right after that position. It predicts each
// payload word, its flags and the valid clock on which it must appear
// (block of its last bit + DLAT + 1), and the clock of frame_start.
// The stream is fed with random stalls (STALL_PCT % of clocks idle).
// At the end it prints the TB_RESULT line (or, with FINISH = 0, sets
// `finished` and leaves the report to the enclosing bench) and the frame synchronization
// error rate (true frames whose payload was not delivered).
module fsync_env #(
  parameter int unsigned K          = 300,
  parameter int unsigned M          = 15,
  parameter int unsigned N          = 3000,
  parameter int unsigned THR        = 210,
  parameter int unsigned VW         = $clog2(K + 1),
  parameter int unsigned NFRAMES    = 8,
  parameter int unsigned BER_PPM    = 0,
  parameter int unsigned STALL_PCT  = 10,
  parameter bit          SCENARIOS  = 1'b1,
  parameter int unsigned SEED       = 1,
  parameter int unsigned MAX_CYCLES = 2000000,
  parameter bit          FINISH     = 1'b1
) (
  output logic          clk,
  output logic          rst_n,
  output logic          in_valid,
  output logic [M-1:0]  in_bits,
  output logic [K-1:0]  syncword,
  output logic [VW-1:0] threshold,
  input  logic          busy,
  input  logic          frame_start,
  input  logic          det_dropped,
  input  logic          pl_valid,
  input  logic          pl_first,
  input  logic          pl_last,
  input  logic [M-1:0]  pl_bits
);

  localparam int DLAT = $clog2(K) + ((M > 1) ? $clog2(M) : 0) + 1;
  localparam int NW   = N / M;
  localparam int MI = M, KI = K, NI = N, THRI = THR, NFI = NFRAMES, MAXC = MAX_CYCLES;

  typedef struct {
    int        vclk;
    bit [M-1:0] bits;
    bit        first;
    bit        last;
  } word_t;

  int checks = 0, failures = 0;
  int cycles = 0;
  bit finished = 1'b0;   // set when done if FINISH is 0 (an enclosing bench reports)

  bit   stream[$];
  int   true_start[$];     // payload start of every transmitted frame
  word_t exp_words[$];
  int   exp_start_edge[$];
  int   exp_dropped = 0;
  int   nblocks;

  // mechanism counters
  int n_stall = 0, n_frames_out = 0, n_dropped = 0, n_missed = 0;
  int n_words = 0, n_edge_thr_found = 0, n_eq_thr_missed = 0;
  int n_delivered = 0;
  int n_flips = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cycles++;
    if (cycles >= MAXC) begin
      failures++;
      $display("watchdog expired after %0d cycles", cycles);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endfunction

  function automatic bit sbit(int idx);
    return (idx < 0) ? 1'b0 : stream[idx];
  endfunction

  // flip `cnt` distinct bits of the syncword copy starting at stream[pos]
  function automatic void corrupt(int pos, int cnt);
    bit done[] = new[K];
    int c = 0;
    while (c < cnt) begin
      int j = int'($urandom % K);
      if (!done[j]) begin
        done[j] = 1'b1;
        stream[pos + j] = ~stream[pos + j];
        c++;
      end
    end
  endfunction

  function automatic logic [M-1:0] get_block(int b);
    logic [M-1:0] v;
    for (int i = 0; i < MI; i++) v[i] = stream[b * MI + i];
    return v;
  endfunction

  task automatic build_stream();
    int gap;
    int sync_pos [NFRAMES];
    void'($urandom(SEED));
    for (int j = 0; j < KI; j++) syncword[j] = 1'($urandom);
    for (int f = 0; f < NFI; f++) begin
      gap = (f == 0) ? 37 : ((f % 3 == 0) ? int'($urandom % 64) : 0);
      repeat (gap) stream.push_back(1'($urandom));
      sync_pos[f] = stream.size();
      for (int j = 0; j < KI; j++) stream.push_back(syncword[j]);
      true_start.push_back(stream.size());
      for (int j = 0; j < NI; j++) stream.push_back(1'($urandom));
    end
    repeat (NI + MI * (DLAT + 4)) stream.push_back(1'($urandom));
    while (stream.size() % M != 0) stream.push_back(1'($urandom));
    if (SCENARIOS) begin
      corrupt(sync_pos[1], int'(K - THR) - 1);        // THR+1 matches: found
      corrupt(sync_pos[2], int'(K - THR) + 10);       // well below: missed
      begin                                           // copy inside payload 3
        int at = true_start[3] + int'(N - K) / 2;
        for (int j = 0; j < KI; j++) stream[at + j] = syncword[j];
      end
      corrupt(sync_pos[4], int'(K - THR));            // exactly THR: missed
    end
    if (BER_PPM != 0)
      foreach (stream[i])
        if (($urandom % 1000000) < BER_PPM) begin
          stream[i] = ~stream[i];
          n_flips++;
        end
    nblocks = stream.size() / M;
  endtask

  task automatic run_model();
    int blast = -1;
    for (int t = 0; t < nblocks; t++) begin
      int best = -1, besti = 0;
      for (int i = 0; i < MI; i++) begin
        int e = t * MI + i;
        int c = 0;
        for (int j = 0; j < KI; j++)
          c += (sbit(e - KI + 1 + j) == syncword[j]) ? 1 : 0;
        if (c > best) begin
          best = c;
          besti = i;
        end
      end
      if (best > THRI) begin
        if (t > blast) begin
          int p0 = t * MI + besti + 1;
          exp_start_edge.push_back(t + DLAT + 1);
          for (int w = 0; w < NW; w++) begin
            word_t x;
            x.vclk  = (p0 + w * MI + MI - 1) / MI + DLAT + 1;
            for (int b = 0; b < MI; b++) x.bits[b] = sbit(p0 + w * MI + b);
            x.first = (w == 0);
            x.last  = (w == NW - 1);
            if (x.vclk < nblocks) exp_words.push_back(x);
          end
          blast = (p0 + NI - 1) / MI;
        end else begin
          exp_dropped++;
        end
      end
    end
  endtask

  initial run_all();

  task automatic run_all();
    int e;
    int blk;
    bit drove;
    int starts[$];
    int got_start_edges[$];
    bit [M-1:0] cur_word[$];
    int cur_start;
    int idle;

    rst_n     = 1'b0;
    in_valid  = 1'b0;
    in_bits   = '0;
    threshold = VW'(THR);
    build_stream();
    run_model();
    $display("stream: %0d bits, %0d blocks, %0d expected frames, %0d expected words, %0d bit flips",
             stream.size(), nblocks, exp_start_edge.size(), exp_words.size(), n_flips);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    e = 0;
    blk = 0;
    drove = 1'b0;
    idle = 0;
    cur_start = -1;
    while (blk < nblocks || idle < DLAT + 8) begin
      @(negedge clk);
      if (drove) begin
        // outputs of valid edge e
        if (frame_start) begin
          n_frames_out++;
          check(exp_start_edge.size() != 0 && exp_start_edge[0] == e,
                $sformatf("frame_start at valid clock %0d, expected %0d", e,
                          (exp_start_edge.size() != 0) ? exp_start_edge[0] : -1));
          if (exp_start_edge.size() != 0) void'(exp_start_edge.pop_front());
        end
        if (det_dropped) n_dropped++;
        if (pl_valid) begin
          n_words++;
          if (exp_words.size() == 0) begin
            check(1'b0, "unexpected payload word");
          end else begin
            word_t x = exp_words.pop_front();
            check(x.vclk == e, $sformatf("payload word at valid clock %0d, expected %0d", e, x.vclk));
            check(pl_bits == x.bits, $sformatf("payload word %h, expected %h", pl_bits, x.bits));
            check(pl_first == x.first && pl_last == x.last, "payload first/last flags");
          end
        end
        e++;
      end else begin
        check(!pl_valid && !frame_start && !det_dropped, "output pulse on a stalled clock");
      end
      // drive the next clock
      if (blk < nblocks && ($urandom % 100) >= STALL_PCT) begin
        in_bits  = get_block(blk);
        in_valid = 1'b1;
        blk++;
      end else if (blk < nblocks) begin
        in_valid = 1'b0;
        n_stall++;
      end else begin
        // flush: keep clocking zeros so the pipeline drains
        in_bits  = '0;
        in_valid = 1'b1;
        idle++;
      end
      drove = in_valid;
    end

    check(exp_start_edge.size() == 0, $sformatf("%0d expected frame starts never came", exp_start_edge.size()));
    // words predicted past the end of the real stream may still be pending
    check(n_dropped == exp_dropped, $sformatf("dropped detections %0d, expected %0d", n_dropped, exp_dropped));

    // frame synchronization error rate against the transmitted frames
    begin
      int delivered = 0;
      n_missed = 0;
      foreach (true_start[f]) begin
        int c = 0;
        for (int j = 0; j < KI; j++)
          c += (sbit(true_start[f] - KI + j) == syncword[j]) ? 1 : 0;
        if (c > THRI) delivered++;
        else n_missed++;
        if (SCENARIOS && f == 1 && c == THRI + 1) n_edge_thr_found++;
        if (SCENARIOS && f == 4 && c == THRI) n_eq_thr_missed++;
      end
      n_delivered = delivered;
      $display("frames sent %0d, syncword above threshold %0d, missed %0d, FSER %0.4f",
               NFRAMES, delivered, n_missed, real'(n_missed) / real'(NFRAMES));
    end

    $display("mechanisms: stalls=%0d frames=%0d words=%0d dropped_detections=%0d missed=%0d thr+1_found=%0d thr_equal_missed=%0d",
             n_stall, n_frames_out, n_words, n_dropped, n_missed, n_edge_thr_found, n_eq_thr_missed);
    check(n_frames_out > 0, "no frame was ever captured");
    check(n_words > 0, "no payload word was ever delivered");
    if (STALL_PCT != 0) check(n_stall > 0, "the stream never stalled");
    if (SCENARIOS) begin
      check(n_dropped > 0, "no detection was ever ignored during a capture");
      check(n_missed > 0, "no frame was ever missed");
      check(n_edge_thr_found > 0, "threshold+1 syncword not exercised");
      check(n_eq_thr_missed > 0, "threshold-equal syncword not exercised");
    end
    finished = 1'b1;
    if (FINISH) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

endmodule
