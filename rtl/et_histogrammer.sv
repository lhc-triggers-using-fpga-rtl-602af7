// et_histogrammer: builds the eta-phi transverse-energy image of one bunch
// crossing from its candidates and streams it out one eta row per cycle.
//
// Each candidate carries the eta and phi index of its trigger tower (0..TOWERS-1,
// 0.087 x 0.087 each, |eta| < 3) and its ET. Towers are grouped TOWERS/IMG at a
// time per axis (6x6 towers per pixel for a 12x12 image) and the candidate's ET
// is added to its pixel, saturating at the top of the ET range. Candidates
// outside the tower range are ignored.
//
// Two banks alternate (ping-pong): while one bank accumulates the current
// crossing, the other holds the finished image of the previous one and is read
// out, row eta = 0..IMG-1, one row per cycle, each row cleared as it is read.
// Readouts start at least READ_INTERVAL cycles apart, the time the row-serial
// network downstream needs per padded image. If a crossing ends while the other
// bank still holds an image that has not been fully read, the ending crossing is
// discarded (its bank is cleared) and `dropped` pulses.
//
// Interface: cand_valid/cand_ieta/cand_iphi/cand_et present one candidate per
// cycle; evt_end marks the last cycle of a crossing (a candidate in that same
// cycle still belongs to it). Output row_valid/row_sof/row_et is one row per
// cycle, IMG consecutive cycles per image; when idle, the first row is valid
// in the third cycle after the evt_end cycle. Synchronous active-low reset clears both banks.
//
// The paper only says candidates are histogrammed into an eta-phi ET image; the
// candidate format, one-candidate-per-cycle input, ping-pong banks and row-serial
// readout are this design's choices.
module et_histogrammer
  import cnn_pkg::*;
#(
  parameter int TOWERS_P      = TOWERS,
  parameter int IMG_P         = IMG,
  parameter int READ_INTERVAL = IMG + 2 * PAD
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cand_valid,
  input  logic [6:0]        cand_ieta,
  input  logic [6:0]        cand_iphi,
  input  et_t               cand_et,
  input  logic              evt_end,
  output logic              row_valid,
  output logic              row_sof,
  output et_t               row_et [IMG_P],
  output logic              dropped
);

  localparam int DS = TOWERS_P / IMG_P;  // towers per pixel per axis
  localparam int RW = $clog2(IMG_P + 1);
  localparam int IW = $clog2(READ_INTERVAL + 1);

  et_t bank [2][IMG_P][IMG_P];

  logic          wr_bank;     // bank being accumulated
  logic          full;        // the other bank holds an image not yet fully read
  logic          reading;
  logic [RW-1:0] rd_row;
  logic [IW-1:0] gap_cnt;     // cycles since the last readout started (saturates)

  // Pixel the current candidate falls in.
  logic          cand_in;
  int unsigned   pe, pp;
  always_comb begin
    cand_in = cand_valid && (int'(cand_ieta) < DS * IMG_P) && (int'(cand_iphi) < DS * IMG_P);
    pe = int'(cand_ieta) / DS;
    pp = int'(cand_iphi) / DS;
  end

  function automatic et_t sat_add(et_t a, et_t b);
    logic [ET_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[ET_W] ? '1 : s[ET_W-1:0];
  endfunction

  logic drop_now;
  assign drop_now = evt_end && full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int e = 0; e < IMG_P; e++)
          for (int p = 0; p < IMG_P; p++) bank[b][e][p] <= '0;
      wr_bank   <= 1'b0;
      full      <= 1'b0;
      reading   <= 1'b0;
      rd_row    <= '0;
      gap_cnt   <= IW'(READ_INTERVAL);
      row_valid <= 1'b0;
      row_sof   <= 1'b0;
      dropped   <= 1'b0;
      for (int p = 0; p < IMG_P; p++) row_et[p] <= '0;
    end else begin
      row_valid <= 1'b0;
      row_sof   <= 1'b0;
      dropped   <= drop_now;
      if (gap_cnt != IW'(READ_INTERVAL)) gap_cnt <= gap_cnt + 1'b1;

      // Accumulate into the write bank.
      if (cand_in && !drop_now)
        bank[wr_bank][pe][pp] <= sat_add(bank[wr_bank][pe][pp], cand_et);

      // End of crossing: hand the bank over, or discard the crossing.
      if (evt_end) begin
        if (full) begin
          for (int e = 0; e < IMG_P; e++)
            for (int p = 0; p < IMG_P; p++) bank[wr_bank][e][p] <= '0;
        end else begin
          wr_bank <= ~wr_bank;
          full    <= 1'b1;
        end
      end

      // Read the full bank out, one row per cycle, clearing as it goes.
      if (full && !reading && gap_cnt == IW'(READ_INTERVAL) && !evt_end) begin
        reading <= 1'b1;
        rd_row  <= '0;
        gap_cnt <= IW'(1);
      end
      if (reading) begin
        row_valid <= 1'b1;
        row_sof   <= (rd_row == '0);
        for (int p = 0; p < IMG_P; p++) begin
          row_et[p] <= bank[~wr_bank][rd_row][p];
          bank[~wr_bank][rd_row][p] <= '0;
        end
        if (int'(rd_row) == IMG_P - 1) begin
          reading <= 1'b0;
          full    <= 1'b0;
        end else begin
          rd_row <= rd_row + 1'b1;
        end
      end
    end
  end

  // A readout only runs while the read bank holds an image.
  assert property (@(posedge clk) disable iff (!rst_n) reading |-> full);
  initial assert (TOWERS_P % IMG_P == 0) else $error("TOWERS_P must be a multiple of IMG_P");

endmodule
