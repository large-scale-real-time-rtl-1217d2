// tb_util_pkg: reference functions shared by the testbenches.
//
// sample_value() defines the ADC value that the front-end model sends for a
// given link, half-stream, SAMPA channel and time-bin; testbenches use the
// same function to predict what the decoder must deliver.
package tb_util_pkg;

  function automatic logic [9:0] sample_value(input int link, input int hs, input int ch, input int tb);
    int v;
    v = (link * 97 + hs * 31 + ch * 7 + tb * 13 + (ch * tb) % 11) % 1024;
    return 10'(v);
  endfunction

  // link channel 2k+j of a time-bin -> half-stream and SAMPA channel
  function automatic int hs_of(input int link_ch);
    return (link_ch / 2) % 5;
  endfunction
  function automatic int sampa_ch_of(input int link_ch);
    return 2 * ((link_ch / 2) / 5) + (link_ch % 2);
  endfunction

  // generic test sample of link `link`, channel `ch`, time-bin `tb` (12 bits)
  function automatic logic [11:0] test_sample(input int link, input int ch, input int tb, input int seed);
    int unsigned h;
    h = 32'(link) * 32'd2654435761 ^ 32'(ch) * 32'd40503 ^ 32'(tb) * 32'd97 ^ 32'(seed) * 32'd1013;
    h = h ^ (h >> 13);
    h = h * 32'd1274126177;
    h = h ^ (h >> 16);
    return 12'(h);
  endfunction

endpackage
