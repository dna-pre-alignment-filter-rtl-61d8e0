// rtm_memory -- behavioural model of the racetrack memory (RTM) layers.
// Behavioural model, not synthesizable: racetrack memory is a magnetic
// nanowire device, so its array cannot be written as logic. The model keeps
// the real part's command/response ports and its timing and shifting
// behaviour so that the logic layer can be simulated against it.
//
// Organisation: SUBARRAYS subarrays of ROWS x COLS bits. The rows of a
// subarray are grouped into track groups of DOMAINS rows: COLS tracks of
// DOMAINS domains each, one domain per row, with the whole group shifted
// together. Each track group has its own port position ("offset"), which
// starts at 0 (row 0 of the group under the port). With US_BUF = 0 a track
// has one access port and row d needs offset d. With US_BUF = 1 a track has
// two ports DOMAINS/2 domains apart and the second half of the group is
// stored in reverse order (circular "unlimited single-shift" buffer): rows
// d < DOMAINS/2 need offset d at port A, rows d >= DOMAINS/2 need offset
// DOMAINS-1-d at port B, so reading all rows in order leaves the group back
// at offset 0.
//
// Read command (cmd_valid with cmd_sa/cmd_row/cmd_tag): the addressed track
// group is shifted to the row's offset (T_SH cycles per domain), then ACT
// (T_RCD), read plus I/O (T_CAS): rsp_valid/rsp_data/rsp_tag appear
// T_SH*S + T_RCD + T_CAS cycles after the command, S being the shift
// distance. PRE follows once T_RAS has passed since ACT and takes T_RP. With
// cmd_pre_en the group is then preshifted to row cmd_pre_row (same group) so
// that the next access finds it aligned. The subarray is busy until the
// preshift ends. The model checks the protocol: a command to a busy subarray,
// a response that would not come strictly after the previous one (the shared
// data path carries one row per cycle, in order) or a preshift to another
// track group counts in viol_count and prints an error.
//
// Loading (ld_valid/ld_sa/ld_row/ld_data) writes a row directly; it stands
// for the one-time programming of the reference and is not timed.
// Storage is sparse: rows never written read as zero. The model's state
// (rows, offsets, busy times, pending responses) lives in associative arrays
// and a queue that only this process reads; it updates them with blocking
// assignments so that a load and a command in the same cycle see each
// other's effect in program order.
// Counters: shift_count (domains shifted, preshifts included), portb_reads.
module rtm_memory #(
  parameter int unsigned SUBARRAYS = 8192,
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned COLS      = 4096,
  parameter int unsigned DOMAINS   = 64,
  parameter bit          US_BUF    = 1'b1,
  parameter int unsigned TAG_W     = 21,
  parameter int unsigned SA_W      = $clog2(SUBARRAYS),
  parameter int unsigned ROW_W     = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  logic [SA_W-1:0]  cmd_sa,
  input  logic [ROW_W-1:0] cmd_row,
  input  logic             cmd_pre_en,
  input  logic [ROW_W-1:0] cmd_pre_row,
  input  logic [TAG_W-1:0] cmd_tag,
  output logic             rsp_valid,
  output logic [COLS-1:0]  rsp_data,
  output logic [TAG_W-1:0] rsp_tag,
  input  logic             ld_valid,
  input  logic [SA_W-1:0]  ld_sa,
  input  logic [ROW_W-1:0] ld_row,
  input  logic [COLS-1:0]  ld_data,
  output logic [63:0]      shift_count,
  output logic [63:0]      portb_reads,
  output logic [31:0]      viol_count
);
  import firm_pkg::*;

  localparam int unsigned TGS = ROWS / DOMAINS;

  typedef struct {
    longint unsigned  due;
    logic [COLS-1:0]  data;
    logic [TAG_W-1:0] tag;
  } rsp_t;

  logic [COLS-1:0]  store    [longint unsigned];   // sparse row storage
  int unsigned      pos      [longint unsigned];   // offset per track group
  longint unsigned  ready_at [longint unsigned];   // per subarray
  rsp_t             rq [$];
  longint unsigned  now;
  longint unsigned  last_due;

  function automatic int unsigned get_pos(input longint unsigned key);
    return pos.exists(key) ? pos[key] : 0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now         <= 0;
      last_due    <= 0;
      rsp_valid   <= 1'b0;
      rsp_data    <= '0;
      rsp_tag     <= '0;
      shift_count <= '0;
      portb_reads <= '0;
      viol_count  <= '0;
      rq.delete();
      pos.delete();
      ready_at.delete();
    end else begin
      // response path: at most one row per cycle, in order
      rsp_valid <= 1'b0;
      if (rq.size() > 0 && rq[0].due == now) begin
        rsp_valid <= 1'b1;
        rsp_data  <= rq[0].data;
        rsp_tag   <= rq[0].tag;
        void'(rq.pop_front());
      end

      if (ld_valid)
        store[longint'(ld_sa) * ROWS + longint'(ld_row)] = ld_data;

      if (cmd_valid) begin
        automatic int unsigned tg   = 32'(cmd_row) / DOMAINS;
        automatic longint unsigned tgkey = longint'(cmd_sa) * TGS + longint'(tg);
        automatic int unsigned d    = 32'(cmd_row) % DOMAINS;
        automatic int unsigned off  = port_offset(d, DOMAINS, US_BUF);
        automatic int unsigned s    = abs_diff(off, get_pos(tgkey));
        automatic int unsigned lat  = T_SH * s + T_RCD + T_CAS;           // command to data
        automatic int unsigned occ  = T_SH * s +                          // command to PRE end
            ((T_RCD + T_CAS > T_RAS) ? T_RCD + T_CAS : T_RAS) + T_RP;
        automatic longint unsigned due = now + longint'(lat);
        automatic longint unsigned pre_end = now + longint'(occ);
        automatic int unsigned s2 = 0;
        automatic int unsigned pre_t;                                   // preshift cycles
        automatic rsp_t r;
        automatic longint unsigned rkey = longint'(cmd_sa) * ROWS + longint'(cmd_row);

        if (ready_at.exists(longint'(cmd_sa)) && ready_at[longint'(cmd_sa)] > now) begin
          $display("rtm_memory ERROR: command to busy subarray %0d at cycle %0d", cmd_sa, now);
          viol_count <= viol_count + 1;
        end
        if (due <= last_due) begin
          $display("rtm_memory ERROR: response slot %0d not after %0d", due, last_due);
          viol_count <= viol_count + 1;
        end
        if (US_BUF && d >= DOMAINS / 2) portb_reads <= portb_reads + 1;
        r.due  = due;
        r.data = store.exists(rkey) ? store[rkey] : '0;
        r.tag  = cmd_tag;
        rq.push_back(r);
        last_due <= due;
        pos[tgkey] = off;
        if (cmd_pre_en) begin
          automatic int unsigned off2 = port_offset(32'(cmd_pre_row) % DOMAINS, DOMAINS, US_BUF);
          if (32'(cmd_pre_row) / DOMAINS != 32'(cmd_row) / DOMAINS) begin
            $display("rtm_memory ERROR: preshift to row %0d leaves the track group of row %0d",
                   cmd_pre_row, cmd_row);
            viol_count <= viol_count + 1;
          end
          s2 = abs_diff(off2, off);
          pos[tgkey] = off2;
        end
        pre_t = T_SH * s2;
        ready_at[longint'(cmd_sa)] = pre_end + longint'(pre_t);
        shift_count <= shift_count + 64'(s) + 64'(s2);
      end
      now <= now + 1;
    end
  end

endmodule
