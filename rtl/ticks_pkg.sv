// ticks_pkg: types and constants shared by the time-stamping firmware.
//
// A time-stamp is {TAI seconds, coarse count of 8 ns WR-clock ticks since
// the last PPS, fine position in ns inside the tick}. An event adds the
// channel, the event and PPS counter values and the 16-bit SPI word sent
// by the camera. The 12-byte (96-bit) event record that goes into the
// bunch FIFO keeps only the least significant bits of the fields; the
// 20-byte (160-bit) tailer sent at the end of each bunch keeps them whole.
// The record and tailer sizes follow the paper; the bit layout of both is
// this design's own choice:
//
//   record [95]     channel (0 read-out, 1 busy)
//          [94]     SPI word valid (0: SPI time-out)
//          [93:78]  SPI word
//          [77:54]  event counter, 24 LSBs
//          [53:46]  PPS counter, 8 LSBs
//          [45:30]  TAI seconds, 16 LSBs
//          [29:3]   coarse count (27 bits, full)
//          [2:0]    fine ns
//
//   tailer [159:120] TAI seconds (40)   [119:93] coarse (27)   [92:90] fine
//          [89]      channel            [88:83]  events in bunch
//          [82:51]   event counter (32) [50:19]  PPS counter (32)
//          [18:0]    reserved, zero
package ticks_pkg;

  localparam int unsigned TAI_W    = 40;
  localparam int unsigned COARSE_W = 27;  // 125e6 ticks per second
  localparam int unsigned FINE_W   = 3;   // 8 samples per WR tick
  localparam int unsigned CNT_W    = 32;
  localparam int unsigned SPI_W    = 16;
  localparam int unsigned REC_W    = 96;
  localparam int unsigned TAILER_W = 160;
  localparam int unsigned NEV_W    = 6;   // a bunch can hold up to 40

  // Time-stamp as captured in the 125 MHz WR-clock domain.
  typedef struct packed {
    logic [TAI_W-1:0]    tai;
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
    logic [CNT_W-1:0]    evt_cnt;
    logic [CNT_W-1:0]    pps_cnt;
  } ts_t;

  localparam int unsigned TS_W = $bits(ts_t);

  // Complete event, formed in the 62.5 MHz system domain.
  typedef struct packed {
    logic             ch;
    logic             spi_valid;
    logic [SPI_W-1:0] spi;
    ts_t              ts;
  } event_t;

  function automatic logic [REC_W-1:0] pack_record(event_t e);
    return {e.ch, e.spi_valid, e.spi, e.ts.evt_cnt[23:0], e.ts.pps_cnt[7:0],
            e.ts.tai[15:0], e.ts.coarse, e.ts.fine};
  endfunction

  function automatic logic [TAILER_W-1:0] pack_tailer(event_t e, logic [NEV_W-1:0] nev);
    return {e.ts.tai, e.ts.coarse, e.ts.fine, e.ch, nev,
            e.ts.evt_cnt, e.ts.pps_cnt, 19'h0};
  endfunction

  // Command opcodes carried in the first 16-bit word of a control datagram.
  typedef enum logic [15:0] {
    CMD_SET_DEST_MAC = 16'h0001,  // + 3 words: MAC, most significant first
    CMD_SET_EXT_TRIG = 16'h0002,  // + 3 words TAI (40 b, right aligned) + 2 words coarse
    CMD_RESET        = 16'h0003,
    CMD_GET_READY    = 16'h0004
  } cmd_e;

endpackage
