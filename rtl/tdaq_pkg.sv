// tdaq_pkg: constants, types and helper functions shared by the tracker
// read-out (TDAQ) firmware.
//
// Geometry follows the detector: 5 turrets, 3 staves per turret (15 staves),
// 2 master chips per stave, each master serving itself and 4 slaves (5 chips).
// The Control Logic Bus (CLB) character format, the command opcodes, the chip
// data-word format and the event-packet layout are this design's own choices;
// the opcodes and the data words borrow the structure of the public ALPIDE
// conventions (header / region / hit / trailer words) without claiming to be
// bit-exact with the sensor.
//
// Hamming(7,4) is used for FSM state registers and, nibble by nibble, for the
// FIFO and buffer memories (single-bit correction).
// CRC-16 (polynomial 0x1021, initial value 0xFFFF, MSB first) protects packets.
package tdaq_pkg;

  // ---------------- detector geometry ----------------
  localparam int unsigned N_TURRETS          = 5;
  localparam int unsigned STAVES_PER_TURRET  = 3;
  localparam int unsigned N_STAVES           = N_TURRETS * STAVES_PER_TURRET; // 15
  localparam int unsigned MASTERS_PER_STAVE  = 2;
  localparam int unsigned CHIPS_PER_MASTER   = 5;   // master + 4 slaves

  // ---------------- CLB protocol (assumed) ----------------
  // A character is: start bit 0, 8 data bits LSB first, stop bit 1 (10 bit
  // times, one bit per system clock at 40 Mbps).  The line idles high.
  localparam logic [7:0] OP_TRIGGER = 8'hB1;  // broadcast read-out command
  localparam logic [7:0] OP_WRITE   = 8'h9C;  // opcode, chip, addr lo/hi, data lo/hi
  localparam logic [7:0] OP_READ    = 8'h4E;  // opcode, chip, addr lo/hi -> chip, data lo/hi
  localparam logic [15:0] DATA_REG_ADDR = 16'h0100; // chip output-buffer window

  // ---------------- chip data words (16 bit, read through DATA_REG_ADDR) -----
  //   A c bb : chip header   (c = chip id, bb = bunch counter)
  //   E c bb : chip empty    (ends that chip's event)
  //   B f 00 : chip trailer  (ends that chip's event, f = flags)
  //   110rrrrr 00 : region header (r = region 0..31)
  //   01 eeee aaaaaaaaaa : pixel hit (e = encoder, a = address)
  //   FFFF   : output buffer empty, nothing to read
  localparam logic [15:0] WORD_NO_DATA = 16'hFFFF;

  function automatic logic is_chip_end(input logic [15:0] w);
    return (w[15:12] == 4'hE) || (w[15:12] == 4'hB);
  endfunction

  function automatic logic is_hit(input logic [15:0] w);
    return w[15:14] == 2'b01;
  endfunction

  // ---------------- event packet (assumed layout) ----------------
  //   word 0 : PKT_SYNC
  //   word 1 : event number
  //   word 2 : time stamp [31:16]
  //   word 3 : time stamp [15:0]
  //   word 4 : {6'b0, TR1 bar pattern[4:0], turret mask[4:0]}
  //   for every enabled stave: {4'hF, stave[3:0], count[7:0]} then count words
  //   then   : {1'b0, truncated flags of staves 14..0}
  //   last   : CRC-16 over all previous words
  localparam logic [15:0] PKT_SYNC = 16'hEB90;
  localparam int unsigned PKT_HDR_WORDS = 5;
  localparam int unsigned STAVE_FIFO_DEPTH = 128;
  // largest packet: header, 15 full stave blocks, truncation word, CRC
  localparam int unsigned MAX_PKT_WORDS = PKT_HDR_WORDS + N_STAVES * (STAVE_FIFO_DEPTH + 1) + 2;

  // ---------------- CRC-16 ----------------
  function automatic logic [15:0] crc16_word(input logic [15:0] crc, input logic [15:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 15; i >= 0; i--) begin
      if (c[15] ^ d[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else              c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

  // ---------------- Hamming(7,4) ----------------
  // Code word bit order [6:0] = {d3 d2 d1 p2 d0 p1 p0}, i.e. the classic
  // positions 7..1: pos1=p0, pos2=p1, pos3=d0, pos4=p2, pos5=d1,
  // pos6=d2, pos7=d3.
  function automatic logic [6:0] ham74_enc(input logic [3:0] d);
    logic p0, p1, p2;
    p0 = d[0] ^ d[1] ^ d[3];
    p1 = d[0] ^ d[2] ^ d[3];
    p2 = d[1] ^ d[2] ^ d[3];
    return {d[3], d[2], d[1], p2, d[0], p1, p0};
  endfunction

  // syndrome = position (1..7) of the flipped bit, 0 when clean
  function automatic logic [2:0] ham74_syndrome(input logic [6:0] c);
    logic s0, s1, s2;
    s0 = c[0] ^ c[2] ^ c[4] ^ c[6];
    s1 = c[1] ^ c[2] ^ c[5] ^ c[6];
    s2 = c[3] ^ c[4] ^ c[5] ^ c[6];
    return {s2, s1, s0};
  endfunction

  function automatic logic [3:0] ham74_dec(input logic [6:0] c);
    logic [6:0] f;
    logic [2:0] s;
    s = ham74_syndrome(c);
    f = c;
    if (s != 3'd0) f[s - 3'd1] = ~f[s - 3'd1];
    return {f[6], f[5], f[4], f[2]};
  endfunction

endpackage
