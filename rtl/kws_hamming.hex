0a3d
0a50
0a87
0ae3
0b64
0c08
0cd1
0dbc
0ecb
0ffb
114d
12bf
1451
1601
17cf
19b9
1bbe
1ddd
2015
2264
24c9
2742
29ce
2c6b
2f17
31d2
3498
3769
3a42
3d22
4007
42ef
45d9
48c2
4ba9
4e8b
5168
543d
5709
59c9
5c7d
5f22
61b6
6439
66a8
6902
6b46
6d72
6f84
717c
7358
7517
76b9
783b
799d
7ade
7bfd
7cfa
7dd4
7e8b
7f1e
7f8c
7fd6
7ffa
7ffa
7fd6
7f8c
7f1e
7e8b
7dd4
7cfa
7bfd
7ade
799d
783b
76b9
7517
7358
717c
6f84
6d72
6b46
6902
66a8
6439
61b6
5f22
5c7d
59c9
5709
543d
5168
4e8b
4ba9
48c2
45d9
42ef
4007
3d22
3a42
3769
3498
31d2
2f17
2c6b
29ce
2742
24c9
2264
2015
1ddd
1bbe
19b9
17cf
1601
1451
12bf
114d
0ffb
0ecb
0dbc
0cd1
0c08
0b64
0ae3
0a87
0a50
0a3d
