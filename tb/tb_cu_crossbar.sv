// tb_cu_crossbar: random buffer contents and random operand / result
// selections for four buffers; checks the two operand words and that each
// result lane writes exactly the selected buffer and word (and nothing when
// st_valid is low).
module tb_cu_crossbar;
  import ntt_pim_pkg::*;

  localparam int unsigned NB = 4;

  atom_t     bufs [NB];
  buf_idx_t  a_buf = '0, b_buf = '0, x_buf = '0, y_buf = '0;
  elem_idx_t a_idx = '0, b_idx = '0, x_idx = '0, y_idx = '0;
  word_t     a, b, x = '0, y = '0;
  logic      st_valid = 1'b0;
  logic      st_we  [NB][2];
  elem_idx_t st_idx [NB][2];
  word_t     st_din [NB][2];

  cu_crossbar dut (.bufs, .a_buf, .a_idx, .b_buf, .b_idx, .a, .b,
                              .st_valid, .x_buf, .x_idx, .x, .y_buf, .y_idx, .y,
                              .st_we, .st_idx, .st_din);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < int'(NB); i++)
        for (int k = 0; k < int'(NA); k++) bufs[i][k] = $urandom;
      a_buf = buf_idx_t'($urandom % NB); b_buf = buf_idx_t'($urandom % NB);
      x_buf = buf_idx_t'($urandom % NB); y_buf = buf_idx_t'($urandom % NB);
      a_idx = elem_idx_t'($urandom); b_idx = elem_idx_t'($urandom);
      x_idx = elem_idx_t'($urandom); y_idx = elem_idx_t'($urandom);
      x = $urandom; y = $urandom;
      st_valid = ($urandom % 4) != 0;
      #1;
      checks++;
      if (a != bufs[a_buf][a_idx] || b != bufs[b_buf][b_idx]) begin
        failures++;
        if (failures < 6) $display("operand select wrong");
      end
      for (int i = 0; i < int'(NB); i++) begin
        logic ex0, ex1;
        ex0 = st_valid && (x_buf == buf_idx_t'(i));
        ex1 = st_valid && (y_buf == buf_idx_t'(i));
        checks++;
        if (st_we[i][0] != ex0 || st_we[i][1] != ex1 ||
            (ex0 && (st_idx[i][0] != x_idx || st_din[i][0] != x)) ||
            (ex1 && (st_idx[i][1] != y_idx || st_din[i][1] != y))) begin
          failures++;
          if (failures < 6) $display("store lane of buffer %0d wrong", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
