cee91d0bed9c2077
1ee61775ee5b2357
ae43dfa35766d5f8
90306cf70273ec38
fb45c019c88f673c
204582c67402e654
7c12c2f9357aa780
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
000000005450414c
000000004b495241
