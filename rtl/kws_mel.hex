00000
000ff
1ff00
100ff
1ff00
08080
100ff
08080
1ff00
08080
100ff
08080
1ff00
08080
100ff
08080
1ff00
0aa55
055aa
100ff
055aa
0aa55
1ff00
0aa55
055aa
100ff
055aa
0aa55
1ff00
0bf40
08080
040bf
100ff
040bf
08080
0bf40
1ff00
0cc33
09966
06699
033cc
100ff
033cc
06699
09966
0cc33
1ff00
0cc33
09966
06699
033cc
100ff
02bd5
055aa
08080
0aa55
0d52b
1ff00
0db00
0b600
09200
06d00
04900
02400
10000
