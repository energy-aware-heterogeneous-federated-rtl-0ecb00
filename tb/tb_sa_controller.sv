// tb_sa_controller: checks the tile sequencer against small cycle-level
// models of the WBuf/IBuf stream ports, the array (fixed latency LAT) and
// OBuf (busy one cycle after each row).  Three commands: with a weight load,
// without one (weights reused) and with accumulation.  Checked: the weight
// stream is started (with the command's word address and ROWS values) before
// the input stream and only when load_w is set; the input stream gets the
// command's word address and row count; every output row gets OBuf address
// o_addr + k and the command's acc flag; cmd_ready is low while busy; done
// pulses exactly once, 3 cycles after the last output row.
module tb_sa_controller;
  import accel_pkg::*;
  int checks = 0, failures = 0;

  localparam int ROWS = 16, LAT = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  sa_cmd_t cmd;
  logic w_st_start, w_st_busy, i_st_start, i_st_busy;
  logic [9:0] w_st_word, i_st_word, ob_row_addr;
  logic [15:0] w_st_count, i_st_count;
  logic sa_out_valid, ob_row_acc, ob_busy;

  sa_controller #(.ROWS(ROWS), .WAW(10), .IAW(10), .OAW(10)) dut (.*);

  // stream-port and array models
  int w_left = 0, i_left = 0;
  logic [LAT+1:0] vpipe = '0;
  logic i_valid;
  always_ff @(posedge clk) begin
    if (w_st_start) w_left <= ROWS + 1; else if (w_left > 0) w_left <= w_left - 1;
    if (i_st_start) i_left <= int'(i_st_count) + 1; else if (i_left > 0) i_left <= i_left - 1;
    vpipe   <= {vpipe[LAT:0], i_valid};
    ob_busy <= sa_out_valid;
  end
  assign w_st_busy    = (w_left > 0);
  assign i_st_busy    = (i_left > 0);
  assign i_valid      = (i_left > 0) && (i_left <= int'(i_st_count));
  assign sa_out_valid = vpipe[LAT];

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%0d exp=%0d", tag, got, exp);
    end
  endtask

  task automatic run(bit load, int w, int i, int rows, int o, bit acc);
    int n_w = 0, n_i = 0, n_out = 0, n_done = 0, since_last = -1, t = 0, i_at = -1, w_at = -1;
    cmd = '0;
    cmd.load_w = load; cmd.w_word = 16'(w); cmd.i_word = 16'(i);
    cmd.rows = 16'(rows); cmd.o_addr = 16'(o); cmd.acc = acc;
    chk("ready idle", int'(cmd_ready), 1);
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (n_done == 0 && t < 400) begin
      t++;
      if (w_st_start) begin
        n_w++; w_at = t;
        chk("w word", int'(w_st_word), w);
        chk("w count", int'(w_st_count), ROWS);
      end
      if (i_st_start) begin
        n_i++; i_at = t;
        chk("i word", int'(i_st_word), i);
        chk("i count", int'(i_st_count), rows);
      end
      if (sa_out_valid) begin
        chk("row addr", int'(ob_row_addr), o + n_out);
        chk("row acc", int'(ob_row_acc), int'(acc));
        n_out++;
        since_last = 0;
      end else if (since_last >= 0) since_last++;
      if (done) begin
        n_done++;
        chk("done 3 cycles after last row", since_last, 3);
      end else chk("busy: not ready", int'(cmd_ready), 0);
      @(negedge clk);
    end
    chk("weight stream starts", n_w, int'(load));
    chk("input stream starts", n_i, 1);
    if (load) chk("weights before inputs", int'(w_at < i_at), 1);
    chk("rows out", n_out, rows);
    chk("done pulses", n_done, 1);
    chk("done is a pulse", int'(done), 0);
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(1, 3, 5, 20, 100, 0);
    run(0, 0, 9, 7, 40, 0);
    run(1, 12, 0, 33, 200, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
