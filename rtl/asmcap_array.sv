// asmcap_array -- one M x N ASMCap array.
//
// Each of the M rows stores a reference segment of N bases, one per cell.
// A search compares the read held in the shift registers with all rows at
// once: every cell reports whether its base is mismatched (in ED* mode, no
// match among the co-located, left and right read bases; in HD mode, no
// match with the co-located base), each matchline sums its row's mismatches,
// and the row's sense amplifier outputs 1 when that sum is <= T.
//
// Commands (at most one of wr_en / srch_en per cycle; ld_en not with srch_en):
//   wr_en   write wr_data into row wr_addr
//   ld_en   load ld_data into the shift registers
//   srch_en search the current shift-register content in mode `mode` with
//           threshold `threshold`; if rot_en is also high the shift
//           registers rotate one base at the same edge, ready for the next
//           search cycle.
// Timing: one search per cycle. A search issued in cycle c latches the SLs
// and S at the end of c, the cells and matchlines settle during c+1, the SAs
// latch at the end of c+1, so match/match_valid appear in cycle c+2 (latency
// 2). A write issued in cycle c is stored at the end of c+1 and is seen by a
// search issued in c+1 or later.
// Following the paper: the block set (decoder & WL driver, SL buffer &
// driver, shift registers, cells, SAs) and the shared select S. Own choice:
// the register stages and command port.
module asmcap_array
  import asmcap_pkg::*;
#(
  parameter int unsigned M  = 256,
  parameter int unsigned N  = 256,
  parameter int unsigned AW = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  base_t [N-1:0] wr_data,
  // read load
  input  logic          ld_en,
  input  base_t [N-1:0] ld_data,
  // search
  input  logic          srch_en,
  input  match_mode_e   mode,
  input  logic          rot_en,
  input  rot_dir_e      rot_dir,
  input  logic [CW-1:0] threshold,
  // result
  output logic          match_valid,
  output logic [M-1:0]  match
);
  logic [M-1:0]        wl;
  logic [N-1:0][1:0]   sl, sl_b;
  base_t [N-1:0]       read_q;
  logic                s_q;
  logic                srch_q;
  logic [CW-1:0]       vref_q;
  logic [CW-1:0]       n_mis [M];

  asmcap_wl_decoder #(.M(M), .AW(AW)) u_dec (
    .clk  (clk),
    .rst_n(rst_n),
    .wr_en(wr_en),
    .addr (wr_addr),
    .wl   (wl)
  );

  asmcap_shift_reg #(.N(N)) u_sr (
    .clk    (clk),
    .rst_n  (rst_n),
    .ld_en  (ld_en),
    .ld_data(ld_data),
    .rot_en (srch_en && rot_en),
    .rot_dir(rot_dir),
    .q      (read_q)
  );

  asmcap_sl_driver #(.N(N)) u_sld (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_en    (wr_en),
    .wr_data  (wr_data),
    .srch_en  (srch_en),
    .srch_data(read_q),
    .sl       (sl),
    .sl_b     (sl_b)
  );

  // Select S and V_ref of the search in flight, plus its valid flag.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q    <= 1'b1;
      srch_q <= 1'b0;
      vref_q <= '0;
    end else begin
      srch_q <= srch_en;
      if (srch_en) begin
        s_q    <= (mode == MODE_EDS);
        vref_q <= threshold;
      end
    end
  end

  for (genvar r = 0; r < M; r++) begin : g_row
    asmcap_row #(.N(N), .CW(CW)) u_row (
      .clk  (clk),
      .wl   (wl[r]),
      .s    (s_q),
      .sl   (sl),
      .sl_b (sl_b),
      .n_mis(n_mis[r])
    );
    asmcap_sense_amp #(.CW(CW)) u_sa (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (srch_q),
      .v_ml (n_mis[r]),
      .v_ref(vref_q),
      .match(match[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) match_valid <= 1'b0;
    else        match_valid <= srch_q;
  end

  a_no_ld_srch: assert property (@(posedge clk) disable iff (!rst_n) !(ld_en && srch_en))
    else $error("asmcap_array: load and search in the same cycle");
endmodule
