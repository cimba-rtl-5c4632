// signal_buffer: the on-chip SRAM that holds raw nanopore samples of all flow-cell
// channels until the network consumes them.
//
// Samples arrive from the IO interface one at a time, tagged with their channel, at the
// rate of the sensor. The buffer keeps a FIFO per channel (N_CH channels, DEPTH samples
// each, in one memory of N_CH*DEPTH words) and hands out a chunk of one channel to the
// mesh when the schedule starts a read. A read (cmd: channel, count, out_off, shift) pops
// count samples, one per cycle, and writes each into out_vec[out_off + k] as
// sat_INT10(sample >>> shift), the format of the mesh. Popping an empty channel yields 0
// and sets the sticky underflow flag. Writing to a full channel drops the sample, sets the
// sticky overflow flag and counts the drop in overflow_cnt.
// The size (512 channels, 2.45 kB per channel, 1.25 MB in all, room for more than 1000
// samples per channel) and the 1-cycle SRAM access are the paper's; 16-bit samples
// (giving DEPTH = 1225), FIFO organisation, the INT10 conversion by shift and the overflow
// handling are this design's.
//
// Timing: start (when not busy) latches cmd at edge 0; sample k (from 0) is read from the
// SRAM at edge k+1 (1-cycle SRAM access) and is in out_vec after edge k+2; done pulses
// with the last sample, after edge count+1. A write is accepted at the
// edge where wr_valid is high.
module signal_buffer
  import fp16_pkg::*;
  import cimba_pkg::*;
#(
  parameter int N_CH     = 512,
  parameter int DEPTH    = 1225,
  parameter int SAMPLE_W = 16,
  parameter int LANES    = 512
) (
  input  logic                    clk,
  input  logic                    rst,
  // IO side
  input  logic                    wr_valid,
  input  logic [$clog2(N_CH)-1:0] wr_ch,
  input  logic [SAMPLE_W-1:0]     wr_sample,
  // read side
  input  logic                    start,
  input  sb_cmd_t                 cmd,
  output logic                    busy,
  output logic                    done,
  output int10_t                  out_vec [LANES],
  // status
  output logic                    overflow,
  output logic [31:0]             overflow_cnt,
  output logic                    underflow
);
  localparam int CHB = $clog2(N_CH);
  localparam int PB  = $clog2(DEPTH + 1);
  localparam int AB  = $clog2(N_CH * DEPTH);

  logic [SAMPLE_W-1:0] mem [N_CH * DEPTH];
  logic [PB-1:0]       wr_ptr [N_CH];
  logic [PB-1:0]       rd_ptr [N_CH];
  logic [PB-1:0]       cnt    [N_CH];

  sb_cmd_t          c_q;
  logic [OFF_W-1:0] k;
  logic [CHB-1:0]   rch;

  function automatic int10_t to_int10(input logic [SAMPLE_W-1:0] s, input logic [3:0] sh);
    logic signed [SAMPLE_W-1:0] v;
    v = $signed(s) >>> sh;
    if (v > SAMPLE_W'(511))   return int10_t'(511);
    if (v < -SAMPLE_W'(512))  return int10_t'(-512);
    return int10_t'(v);
  endfunction

  function automatic logic [AB-1:0] addr(input logic [CHB-1:0] ch, input logic [PB-1:0] p);
    return AB'(int'(ch) * DEPTH + int'(p));
  endfunction

  function automatic logic [PB-1:0] inc(input logic [PB-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  logic wr_ok, rd_go, rd_ok;
  assign rch   = c_q.ch[CHB-1:0];
  assign rd_go = busy;
  assign rd_ok = rd_go && (cnt[rch] != '0);
  assign wr_ok = wr_valid && (int'(cnt[wr_ch]) < DEPTH);

  // memory: one write and one synchronous read port, no reset (only written words are read)
  logic [SAMPLE_W-1:0] rdata;
  always_ff @(posedge clk) begin
    if (wr_ok) mem[addr(wr_ch, wr_ptr[wr_ch])] <= wr_sample;
    rdata <= mem[addr(rch, rd_ptr[rch])];
  end

  logic             rv;          // a read happened in the previous cycle
  logic             rv_ok;       // ... and found data
  logic             rv_last;
  logic [OFF_W-1:0] rv_lane;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      overflow     <= 1'b0;
      underflow    <= 1'b0;
      overflow_cnt <= '0;
      c_q          <= '0;
      k            <= '0;
      rv           <= 1'b0;
      rv_ok        <= 1'b0;
      rv_last      <= 1'b0;
      rv_lane      <= '0;
      for (int i = 0; i < N_CH; i++) begin
        wr_ptr[i] <= '0;
        rd_ptr[i] <= '0;
        cnt[i]    <= '0;
      end
      for (int l = 0; l < LANES; l++) out_vec[l] <= '0;
    end else begin
      // IO write
      if (wr_ok) wr_ptr[wr_ch] <= inc(wr_ptr[wr_ch]);
      if (wr_valid && !wr_ok) begin
        overflow     <= 1'b1;
        overflow_cnt <= overflow_cnt + 1'b1;
      end
      // occupancy
      if (wr_ok && rd_ok && wr_ch == rch) begin
        cnt[rch] <= cnt[rch];
      end else begin
        if (wr_ok) cnt[wr_ch] <= cnt[wr_ch] + 1'b1;
        if (rd_ok) cnt[rch]   <= cnt[rch] - 1'b1;
      end
      // read sequencing
      if (rd_ok) rd_ptr[rch] <= inc(rd_ptr[rch]);
      if (rd_go && !rd_ok) underflow <= 1'b1;
      rv      <= rd_go;
      rv_ok   <= rd_ok;
      rv_lane <= c_q.out_off + k;
      rv_last <= rd_go && (k + 1'b1 == c_q.count);
      if (start && !busy) begin
        c_q  <= cmd;
        k    <= '0;
        busy <= (cmd.count != '0);
      end else if (busy) begin
        k <= k + 1'b1;
        if (k + 1'b1 == c_q.count) busy <= 1'b0;
      end
      // output
      if (rv && int'(rv_lane) < LANES)
        out_vec[$clog2(LANES)'(rv_lane)] <= rv_ok ? to_int10(rdata, c_q.shift) : '0;
      done <= rv_last;
    end
  end
endmodule
