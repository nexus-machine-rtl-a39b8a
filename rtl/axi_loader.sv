// axi_loader: off-chip memory datapath for one row of PEs.
//
// An AXI4 read master (read address and read data channels) that executes
// load commands from the host. A command names a target, a PE column of this
// row, a destination word address in that PE's data memory, a byte address
// in off-chip memory and a beat count (1..MAX_BEATS, one INCR burst of
// DW-bit beats). Each beat is written into the row according to the target:
//   LD_AMQ  - bits 69:0 of the beat are pushed into the column's AM queue
//             (one static AM per beat; the beat waits while the queue is full);
//   LD_DMEM - the beat's DW/16 words are written, lowest first, one per
//             cycle into consecutive data memory words;
//   LD_SCAN - the beat is a bit vector; the scanner turns it into the
//             coordinates of its set bits (beat b, bit i gives b*DW + i),
//             written one per cycle into consecutive data memory words.
// The AXI4 port, the 16-beat bursts and the scanner follow the published
// off-chip datapath; the command format, the beat layouts and the absence of
// a write channel are this design's. One command at a time; cmd_ready is high
// when idle. rresp and rid are not checked (only one ID is ever used).
module axi_loader
  import nm_pkg::*;
#(
  parameter int unsigned DW        = 128,
  parameter int unsigned MAX_BEATS = 16,
  parameter int unsigned DM_DEPTH  = 512,
  parameter int unsigned COLS      = 4,
  localparam int unsigned DAW      = $clog2(DM_DEPTH),
  localparam int unsigned CLW      = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned BW       = $clog2(MAX_BEATS + 1),
  localparam int unsigned WPB      = DW / DATA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // command from the host
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  ld_target_e       cmd_target,
  input  logic [CLW-1:0]   cmd_col,
  input  logic [DAW-1:0]   cmd_dst,
  input  logic [31:0]      cmd_addr,
  input  logic [BW-1:0]    cmd_beats,
  // AXI4 read address channel
  output logic             arvalid,
  input  logic             arready,
  output logic [31:0]      araddr,
  output logic [7:0]       arlen,
  output logic [2:0]       arsize,
  output logic [1:0]       arburst,
  output logic [3:0]       arid,
  // AXI4 read data channel
  input  logic             rvalid,
  output logic             rready,
  input  logic [DW-1:0]    rdata,
  input  logic [1:0]       rresp,
  input  logic             rlast,
  input  logic [3:0]       rid,
  // write port into the row
  output logic [CLW-1:0]   ld_col,
  output logic             amq_push,
  output am_t              amq_din,
  input  logic             amq_full,
  output logic             dm_we,
  output logic [DAW-1:0]   dm_addr,
  output logic [DATA_W-1:0] dm_wdata,
  output logic             busy
);
  typedef enum logic [1:0] {L_IDLE, L_AR, L_DATA, L_DRAIN} lstate_e;

  lstate_e              st;
  ld_target_e           tgt;
  logic [CLW-1:0]       col;
  logic [DAW-1:0]       dst;
  logic [DW-1:0]        beat;
  logic                 beat_full, beat_last;
  logic [$clog2(WPB+1)-1:0] widx;
  logic [BW-1:0]        beat_no;
  logic                 sc_busy, sc_valid, sc_last, sc_load;
  logic [$clog2(DW)-1:0] sc_coord;

  assign cmd_ready = (st == L_IDLE);
  assign busy      = (st != L_IDLE);
  assign arsize    = 3'($clog2(DW / 8));
  assign arburst   = 2'b01;
  assign arid      = '0;
  assign arvalid   = (st == L_AR);
  assign ld_col    = col;

  // AM queue beats go straight through; data and scan beats are buffered.
  assign amq_din  = am_t'(rdata[$bits(am_t)-1:0]);
  assign amq_push = (st == L_DATA) && (tgt == LD_AMQ) && rvalid && !amq_full;
  assign rready   = (st == L_DATA) && ((tgt == LD_AMQ) ? !amq_full : !beat_full);

  assign sc_load = beat_full && (tgt == LD_SCAN) && !sc_busy && (widx == '0);

  scanner #(.VLEN(DW)) u_scan (
    .clk, .rst_n, .load(sc_load), .vec(beat), .busy(sc_busy),
    .coord_valid(sc_valid), .coord(sc_coord), .coord_last(sc_last), .coord_ready(1'b1)
  );

  always_comb begin
    dm_we    = 1'b0;
    dm_wdata = '0;
    dm_addr  = dst;
    if (beat_full && tgt == LD_DMEM) begin
      dm_we    = 1'b1;
      dm_wdata = beat[widx*DATA_W +: DATA_W];
    end else if (tgt == LD_SCAN && sc_valid) begin
      dm_we    = 1'b1;
      dm_wdata = DATA_W'(beat_no - 1'b1) * DATA_W'(DW) + DATA_W'(sc_coord);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= L_IDLE;
      tgt       <= LD_AMQ;
      col       <= '0;
      dst       <= '0;
      araddr    <= '0;
      arlen     <= '0;
      beat      <= '0;
      beat_full <= 1'b0;
      beat_last <= 1'b0;
      widx      <= '0;
      beat_no   <= '0;
    end else begin
      if (dm_we) dst <= dst + 1'b1;
      unique case (st)
        L_IDLE: if (cmd_valid) begin
          tgt     <= cmd_target;
          col     <= cmd_col;
          dst     <= cmd_dst;
          araddr  <= cmd_addr;
          arlen   <= 8'(cmd_beats - 1'b1);
          beat_no <= '0;
          st      <= L_AR;
        end
        L_AR: if (arready) st <= L_DATA;
        L_DATA: begin
          if (rvalid && rready) begin
            beat_no <= beat_no + 1'b1;
            if (tgt == LD_AMQ) begin
              if (rlast) st <= L_IDLE;
            end else begin
              beat      <= rdata;
              beat_full <= 1'b1;
              beat_last <= rlast;
              widx      <= '0;
            end
          end
          if (beat_full) begin
            if (tgt == LD_DMEM) begin
              if (widx == $bits(widx)'(WPB - 1)) begin
                beat_full <= 1'b0;
                if (beat_last) st <= L_IDLE;
              end else begin
                widx <= widx + 1'b1;
              end
            end else begin
              // scan: hand the beat to the scanner, free it when scanned
              if (sc_load) widx <= $bits(widx)'(1);
              if (widx != '0 && (!sc_busy || (sc_valid && sc_last))) begin
                beat_full <= 1'b0;
                widx      <= '0;
                if (beat_last) st <= L_DRAIN;
              end
            end
          end
        end
        L_DRAIN: if (!sc_busy) st <= L_IDLE;
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
