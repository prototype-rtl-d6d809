7f
7b
75
6c
61
52
42
31
1e
0a
f6
e2
cf
be
ae
9f
94
8b
85
81
7d
71
5a
3a
14
ec
c6
a6
8f
83
83
8f
a6
c6
ec
14
3a
5a
71
7d
7b
61
31
f6
be
94
81
8b
ae
e2
1e
52
75
7f
6c
42
0a
cf
9f
85
79
4b
00
b5
87
87
b5
00
4b
79
79
4b
00
b5
87
87
b5
00
4b
79
75
31
cf
8b
8b
cf
31
75
75
31
cf
8b
8b
cf
31
75
75
31
cf
8b
71
14
a6
83
c6
3a
7d
5a
ec
8f
8f
ec
5a
7d
3a
c6
83
a6
14
71
6c
f6
8b
9f
1e
7b
52
cf
81
be
42
7f
31
ae
85
e2
61
75
0a
94
67
d9
81
d9
67
67
d9
81
d9
67
67
d9
81
d9
67
67
d9
81
d9
67
61
be
8b
1e
7f
0a
85
cf
6c
52
ae
94
31
7b
f6
81
e2
75
42
9f
5a
a6
a6
5a
5a
a6
a6
5a
5a
a6
a6
5a
5a
a6
a6
5a
5a
a6
a6
5a
52
94
cf
7b
0a
81
1e
75
be
9f
61
42
8b
e2
7f
f6
85
31
6c
ae
4b
87
00
79
b5
b5
79
00
87
4b
4b
87
00
79
b5
b5
79
00
87
4b
