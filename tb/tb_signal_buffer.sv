// tb_signal_buffer: self-checking testbench of the raw-signal buffer.
//
// With 8 channels of 16 samples and 32 output lanes (reduced from 512 x 1225 x 512), it
// writes random samples to random channels while reading chunks from random channels,
// and checks against a queue model per channel: FIFO order across pointer wrap-around,
// the INT10 conversion (arithmetic shift, saturation), the placement at out_off, the
// timing (sample k in out_vec after edge k+2 of a read started at edge 0, done after
// edge count+1; one sample per cycle, the paper's 1-cycle SRAM access), the overflow
// (drop, sticky flag, drop counter) and the underflow (zero, sticky flag).
module tb_signal_buffer;
  import cimba_pkg::*;

  localparam int NCH = 8, D = 16, LN = 32;

  logic clk = 1'b0, rst = 1'b1;
  logic wr_valid, start, busy, done, overflow, underflow;
  logic [2:0] wr_ch;
  logic [15:0] wr_sample;
  sb_cmd_t cmd;
  logic signed [9:0] out_vec [LN];
  logic [31:0] overflow_cnt;
  int checks = 0, failures = 0;
  int n_over = 0, n_under = 0, n_reads = 0, n_wrap = 0;
  int q [NCH][$];
  int wrote [NCH];

  signal_buffer #(.N_CH(NCH), .DEPTH(D), .SAMPLE_W(16), .LANES(LN)) dut (
    .clk, .rst, .wr_valid, .wr_ch, .wr_sample, .start, .cmd, .busy, .done, .out_vec,
    .overflow, .overflow_cnt, .underflow
  );

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int conv(input int s, input int sh);
    int v;
    v = s >>> sh;
    return (v > 511) ? 511 : (v < -512) ? -512 : v;
  endfunction

  // writer: random writes, modelled at the edge that accepts them
  bit wr_on = 1'b0;
  int wr_drop = 0;
  always @(posedge clk) begin
    if (!rst && wr_valid) begin
      if (q[wr_ch].size() < D) begin
        q[wr_ch].push_back(int'($signed(wr_sample)));
        wrote[wr_ch]++;
      end else begin
        wr_drop++;
        n_over++;
      end
    end
    #1;
    if (wr_on) begin
      if (($urandom % 3) == 0) begin
        wr_valid <= 1'b1;
        wr_ch <= 3'($urandom % NCH);
        wr_sample <= 16'($urandom % 20000) - 16'd10000;
      end else wr_valid <= 1'b0;
    end
  end

  task automatic read_chunk(input int ch, input int cnt, input int off, input int sh);
    int exp_v [$];
    bit und;
    int n;
    cmd.ch = 9'(ch); cmd.count = OFF_W'(cnt); cmd.out_off = OFF_W'(off); cmd.shift = 4'(sh);
    start <= 1'b1;
    @(posedge clk);                          // edge 0
    start <= 1'b0;
    n = 0;
    und = 1'b0;
    // the model pops at the edge the SRAM is read (edges 1..cnt)
    for (int e = 1; e <= cnt + 1; e++) begin
      @(posedge clk);
      if (e <= cnt) begin
        if (q[ch].size() > 0) exp_v.push_back(conv(q[ch].pop_front(), sh));
        else begin exp_v.push_back(0); und = 1'b1; end
      end
      #1;
      if (e >= 2) begin
        checks++;
        if (int'(out_vec[off + e - 2]) != exp_v[e - 2]) begin
          failures++;
          if (failures < 10) $display("ch %0d sample %0d: %0d vs %0d", ch, e - 2, out_vec[off + e - 2], exp_v[e - 2]);
        end
      end
      checks++;
      if (done !== (e == cnt + 1)) begin
        failures++;
        $display("done at edge %0d of a %0d-sample read", e, cnt);
      end
    end
    if (und) begin
      n_under++;
      checks++;
      if (!underflow) begin failures++; $display("underflow not flagged"); end
    end
    n_reads++;
  endtask

  initial begin
    wr_valid = 1'b0; wr_ch = '0; wr_sample = '0; start = 1'b0; cmd = '0;
    for (int c = 0; c < NCH; c++) wrote[c] = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    // underflow first: read an empty channel
    read_chunk(3, 4, 0, 0);
    // overflow: fill channel 5 past its depth with writes only
    for (int i = 0; i < D + 3; i++) begin
      wr_valid <= 1'b1; wr_ch <= 3'd5; wr_sample <= 16'(i * 100 - 700);
      @(posedge clk);
    end
    wr_valid <= 1'b0;
    @(posedge clk);
    checks += 2;
    if (!overflow || overflow_cnt != 32'(wr_drop)) begin
      failures++;
      $display("overflow flag %0b count %0d expected %0d", overflow, overflow_cnt, wr_drop);
    end
    // saturating conversion: shift 0 on samples beyond the INT10 range
    read_chunk(5, D, 8, 0);
    // random traffic
    wr_on = 1'b1;
    repeat (20) @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      int ch, cnt, off;
      ch  = int'($urandom % NCH);
      cnt = int'($urandom % 6) + 1;
      off = int'($urandom % (LN - cnt + 1));
      read_chunk(ch, cnt, off, int'($urandom % 6));
      repeat (int'($urandom % 4)) @(posedge clk);
    end
    wr_on = 1'b0;
    wr_valid <= 1'b0;
    @(posedge clk);
    for (int c = 0; c < NCH; c++) if (wrote[c] > D) n_wrap++;
    checks += 3;
    if (n_over == 0 || n_under == 0 || n_wrap == 0) begin
      failures++;
      $display("mechanism missing: overflow %0d underflow %0d wrap %0d", n_over, n_under, n_wrap);
    end
    if (overflow_cnt != 32'(wr_drop)) begin failures++; $display("drop count"); end
    $display("reads %0d overflows %0d underflow reads %0d wrapped channels %0d", n_reads, n_over, n_under, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
