// log_import: brings the recorded logs back on chip for the replay-run.
//
// Records arrive on a valid/ready stream in the order they were exported. Each is taken
// into a one-entry holding register and from there delivered to the redundant core that
// replays the checked core named in the record (redundant core k replays checked core k):
//   LOG_BLOCK    -> that core's replay unit, block queue   (blk_*)
//   LOG_ORDER    -> the replay unit of the waiting core u   (ord_*)
//   LOG_CHECKSUM -> that core's result comparator           (cs_*)
// A record waits in the register until its target accepts it; the input is ready when
// the register is empty or is being emptied in the same cycle, so a full stream moves
// one record per cycle. Records with an unknown kind or a core number outside the group
// are discarded and set the sticky flag bad_record. n_records counts delivered records.
// room_blk/room_ord/room_cs[c] tell the log storage that a record of that kind for
// core c offered now will be delivered in the next cycle: the target has room and the
// register does not hold a record for the same core and target. Each core keeps three
// independent log sequences (block sizes, orders, checksums), and storage that serves,
// each cycle, a sequence whose room bit is set never lets one full queue block records
// headed elsewhere. A single shared in-order stream can deadlock: a replay core waiting
// for a grant or an order may hold up the very records that would release it.
// The design description names this import logic only; the stream format, the holding
// register and the checks are this design's own.
module log_import
  import reptfd_pkg::*;
#(
  parameter int unsigned N_CORES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  log_rec_t           in_rec,
  output logic [N_CORES-1:0] blk_valid,
  input  logic [N_CORES-1:0] blk_ready,
  output logic [N_CORES-1:0] ord_valid,
  input  logic [N_CORES-1:0] ord_ready,
  output logic [N_CORES-1:0] cs_valid,
  input  logic [N_CORES-1:0] cs_ready,
  output log_rec_t           rec,          // record on offer to the targets
  output logic [N_CORES-1:0] room_blk,
  output logic [N_CORES-1:0] room_ord,
  output logic [N_CORES-1:0] room_cs,
  output logic               bad_record,
  output logic [31:0]        n_records
);
  logic held;
  logic bad, taken;

  always_comb begin
    bad       = (int'(rec.core) >= N_CORES) ||
                (rec.kind == LOG_ORDER && int'(rec.peer) >= N_CORES) ||
                !(rec.kind inside {LOG_BLOCK, LOG_ORDER, LOG_CHECKSUM});
    blk_valid = '0;
    ord_valid = '0;
    cs_valid  = '0;
    taken     = 1'b0;
    if (held && !bad) begin
      unique case (rec.kind)
        LOG_BLOCK:    begin blk_valid[rec.core] = 1'b1; taken = blk_ready[rec.core]; end
        LOG_ORDER:    begin ord_valid[rec.core] = 1'b1; taken = ord_ready[rec.core]; end
        LOG_CHECKSUM: begin cs_valid[rec.core]  = 1'b1; taken = cs_ready[rec.core];  end
        default:      taken = 1'b0;
      endcase
    end
  end

  wire leaving = held && (bad || taken);
  assign in_ready = !held || leaving;

  always_comb
    for (int c = 0; c < int'(N_CORES); c++) begin
      room_blk[c] = blk_ready[c] && !(held && int'(rec.core) == c && rec.kind == LOG_BLOCK);
      room_ord[c] = ord_ready[c] && !(held && int'(rec.core) == c && rec.kind == LOG_ORDER);
      room_cs[c]  = cs_ready[c]  && !(held && int'(rec.core) == c && rec.kind == LOG_CHECKSUM);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held       <= 1'b0;
      rec        <= '0;
      bad_record <= 1'b0;
      n_records  <= '0;
    end else begin
      if (in_valid && in_ready) begin
        held <= 1'b1;
        rec  <= in_rec;
      end else if (leaving) begin
        held <= 1'b0;
      end
      if (held && bad) bad_record <= 1'b1;
      if (held && !bad && taken) n_records <= n_records + 1'b1;
    end
  end
endmodule
