// decode_unit: memory side of a PE, with the PE's data memory inside.
//
// Serves three kinds of command (cmd_valid when idle, cmd_ready high):
//   DU_DEREF  - dereference mode: read one word at base; it appears on elem
//               one cycle later with elem_last set.
//   DU_STREAM - streaming mode: read count consecutive words starting at
//               base; element k (elem_idx = k) appears on elem, one per cycle
//               while elem_ready is high, the last with elem_last.
//   DU_WRITE  - write wdata at base (used for the final result update).
// The address is the base plus a running offset from the FSM (zero in
// dereference mode), as in the published decode unit. A loaded element is
// held on elem until elem_ready takes it, so a stalled network does not lose
// data. A host port (h_*) loads and reads the memory; it has priority and is
// meant for use while the PE is not executing (it shares the read register).
// Timing and the command encoding are this design's.
module decode_unit
  import nm_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  du_mode_e          cmd_mode,
  input  logic [DATA_W-1:0] cmd_base,
  input  logic [DATA_W-1:0] cmd_count,
  input  logic [DATA_W-1:0] cmd_wdata,
  // loaded elements
  output logic              elem_valid,
  output logic [DATA_W-1:0] elem,
  output logic [DATA_W-1:0] elem_idx,
  output logic              elem_last,
  input  logic              elem_ready,
  output logic              busy,
  // host port
  input  logic              h_en,
  input  logic              h_we,
  input  logic [AW-1:0]     h_addr,
  input  logic [DATA_W-1:0] h_wdata,
  output logic [DATA_W-1:0] h_rdata
);
  logic              active;
  logic [DATA_W-1:0] base, remaining, offset;
  logic              issue, accept;
  logic              m_en, m_we;
  logic [AW-1:0]     m_addr;
  logic [DATA_W-1:0] m_wdata, m_rdata;
  logic [AW-1:0]     addr_sum;  // address wraps at the memory size

  assign cmd_ready = !active && !elem_valid;
  assign accept    = cmd_valid && cmd_ready && !h_en;
  // Issue the next read when the output slot is free or being emptied.
  assign issue     = active && (remaining != '0) && (!elem_valid || elem_ready) && !h_en;
  assign addr_sum  = AW'(base + offset);

  always_comb begin
    m_en    = 1'b0;
    m_we    = 1'b0;
    m_addr  = addr_sum;
    m_wdata = cmd_wdata;
    if (h_en) begin
      m_en    = 1'b1;
      m_we    = h_we;
      m_addr  = h_addr;
      m_wdata = h_wdata;
    end else if (accept && cmd_mode == DU_WRITE) begin
      m_en   = 1'b1;
      m_we   = 1'b1;
      m_addr = cmd_base[AW-1:0];
    end else if (issue) begin
      m_en = 1'b1;
    end
  end

  data_memory #(.DEPTH(DEPTH), .W(DATA_W)) u_mem (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata)
  );

  assign elem    = m_rdata;
  assign h_rdata = m_rdata;
  assign busy    = active || elem_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      base       <= '0;
      remaining  <= '0;
      offset     <= '0;
      elem_valid <= 1'b0;
      elem_idx   <= '0;
      elem_last  <= 1'b0;
    end else begin
      if (accept && cmd_mode != DU_WRITE) begin
        base      <= cmd_base;
        offset    <= '0;
        remaining <= (cmd_mode == DU_STREAM) ? cmd_count : 16'd1;
        active    <= (cmd_mode == DU_STREAM) ? (cmd_count != '0) : 1'b1;
      end
      if (issue) begin
        elem_valid <= 1'b1;
        elem_idx   <= offset;
        elem_last  <= (remaining == 16'd1);
        offset     <= offset + 1'b1;
        remaining  <= remaining - 1'b1;
        if (remaining == 16'd1) active <= 1'b0;
      end else if (elem_valid && elem_ready) begin
        elem_valid <= 1'b0;
      end
    end
  end

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) h_en |-> !elem_valid)
    else $error("decode_unit: host access while an element is pending");
endmodule
