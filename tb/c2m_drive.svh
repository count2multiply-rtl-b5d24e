// c2m_drive.svh: driver and checker tasks shared by the control-unit
// testbenches. Expects in scope: clk, the request signals, busy, the model's
// host port (wr_en, wr_row, wr_data, rd_row, rd_data), parameters
// N_BITS, DIGITS, COLS, CNT_BASE, and int checks, failures.

  localparam int RADIX_T = 2 * N_BITS;

  // expected counter of every column, modulo RADIX_T**DIGITS
  longint exp_cnt [COLS];
  logic [COLS-1:0] masks [MASK_ROWS];

  function automatic longint modcap(input longint v);
    longint cap, r;
    cap = 1;
    for (int i = 0; i < DIGITS; i++) cap *= RADIX_T;
    if (cap == 0) return v;   // capacity 2**64: longint arithmetic already wraps
    r = v % cap;
    if (r < 0) r += cap;
    return r;
  endfunction

  task automatic host_write(input int row, input logic [COLS-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_row = ROW_IW'(row); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic send(input req_op_e op, input int x, input int sh, input bit ng, input int mrow);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = op; req_x = 8'(x); req_shift = 3'(sh); req_neg = ng;
    req_mask = ROW_IW'(mrow);
    @(negedge clk);
    req_valid = 0;
    while (busy) @(negedge clk);
  endtask

  // accumulate sign*(x << sh) into the columns of mask row MASK_BASE + mi
  task automatic acc(input int x, input int sh, input bit ng, input int mi);
    send(REQ_ACC, x, sh, ng, MASK_BASE + mi);
    for (int c = 0; c < COLS; c++)
      if (masks[mi][c]) exp_cnt[c] = modcap(exp_cnt[c] + (ng ? -1 : 1) * (longint'(x) <<< sh));
  endtask

  // write a random flushed counter array (same row layout as the counters)
  // at row base, then add it to the counters with REQ_ADDC
  task automatic add_counters(input int base);
    longint c2 [COLS];
    logic [COLS-1:0] rows [DIGITS * (N_BITS + 1)];
    for (int c = 0; c < COLS; c++) c2[c] = 0;
    for (int r = 0; r < DIGITS * (N_BITS + 1); r++) rows[r] = '0;
    for (int c = 0; c < COLS; c++) begin
      longint w;
      w = 1;
      for (int d = 0; d < DIGITS; d++) begin
        int dv;
        logic [15:0] b;
        dv = int'($urandom_range(RADIX_T - 1));
        b  = jc_enc(N_BITS, dv);
        for (int i = 0; i < N_BITS; i++) rows[d * (N_BITS + 1) + i][c] = b[i];
        c2[c] += longint'(dv) * w;
        w *= RADIX_T;
      end
    end
    for (int r = 0; r < DIGITS * (N_BITS + 1); r++) host_write(base + r, rows[r]);
    send(REQ_ADDC, 0, 0, 0, base);
    for (int c = 0; c < COLS; c++) exp_cnt[c] = modcap(exp_cnt[c] + c2[c]);
  endtask

  // ReLU: counters holding a negative value (radix complement) become 0
  task automatic relu();
    longint cap;
    cap = 1;
    for (int i = 0; i < DIGITS; i++) cap *= RADIX_T;
    send(REQ_RELU, 0, 0, 0, 0);
    for (int c = 0; c < COLS; c++)
      if ((cap == 0) ? (exp_cnt[c] < 0) : (exp_cnt[c] >= cap / 2)) exp_cnt[c] = 0;
  endtask

  // shift left by one: copy the counters to row base on, add them back
  task automatic shift_left1(input int base);
    send(REQ_COPY, 0, 0, 0, base);
    send(REQ_ADDC, 0, 0, 0, base);
    for (int c = 0; c < COLS; c++) exp_cnt[c] = modcap(exp_cnt[c] * 2);
  endtask

  task automatic clear_all();
    send(REQ_CLEAR, 0, 0, 0, 0);
    for (int c = 0; c < COLS; c++) exp_cnt[c] = 0;
  endtask

  // flush, read every counter row and compare each column with exp_cnt
  task automatic flush_and_check();
    logic [COLS-1:0] rows [DIGITS * (N_BITS + 1)];
    send(REQ_FLUSH, 0, 0, 0, 0);
    for (int r = 0; r < DIGITS * (N_BITS + 1); r++) begin
      @(negedge clk);
      rd_row = ROW_IW'(CNT_BASE + r);
      #1 rows[r] = rd_data;
    end
    for (int c = 0; c < COLS; c++) begin
      longint v, w;
      bit bad;
      v = 0; w = 1; bad = 0;
      for (int d = 0; d < DIGITS; d++) begin
        logic [15:0] b;
        int dv;
        b = '0;
        for (int i = 0; i < N_BITS; i++) b[i] = rows[d * (N_BITS + 1) + i][c];
        dv = jc_dec(N_BITS, b);
        if (dv < 0) bad = 1;
        if (rows[d * (N_BITS + 1) + N_BITS][c]) bad = 1;   // flag left set
        v += longint'(dv) * w;
        w *= RADIX_T;
      end
      checks++;
      if (bad || v != exp_cnt[c]) begin
        failures++;
        if (failures < 10) $display("column %0d: counter %0d expected %0d%s", c, v, exp_cnt[c], bad ? " (bad digit or flag)" : "");
      end
    end
  endtask
